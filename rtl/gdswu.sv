// gdswu -- Gamma Distribution Sliding Window Unit.
//
// Smooths the stream of results of a fuzzy-logic altitude estimator so that a
// single wrong result cannot swing the landing decision on its own.  The unit
// keeps the last TAPS input samples; each one is weighted by the gamma
// probability density of its age (newest = age 1, oldest = age TAPS) and the
// weighted samples are summed.  The result is the weighted sum divided by
// TAPS and by the weight scale 2^WEIGHT_FRAC:
//     sum_sample  = sum_{i=1..TAPS} s_i * W(i)          (full precision)
//     average_out = floor(sum_sample / (TAPS * 2^WEIGHT_FRAC))
// with W(i) from gdswu_pkg::gamma_weight (floor(32*exp(-i/10)) for a=1, b=10).
// After reset the window holds zeros; a constant input of 7'h7F therefore
// gives average_out = 7'h3A once 16 samples have entered, as the paper reports.
//
// Structure: a TAPS-deep shift register (the window), one constant shift-add
// multiplier per tap, a product register stage and a pipelined adder tree.
// All weights are constants fixed at elaboration by GAMMA_A / GAMMA_B.
//
// Interface and timing:
//   en_in       sample strobe; on a rising clk edge with en_in = 1 the window
//               shifts and b enters as the newest sample.  With en_in = 0 the
//               window holds.  A new sample may be given every clock.
//   b           input sample (unsigned, DATA_W bits); the name is the one of
//               the paper's simulation waveform.
//   out_valid   one-cycle pulse per accepted sample; sum_sample / average_out
//               then show the window that includes that sample and hold until
//               the next pulse.  Latency: the result of a sample accepted at
//               clock edge k appears after edge k + 2 + log2(TAPS)
//               (6 edges for 16 taps).
//   rst_n       asynchronous, active low; clears window and pipeline.
// The paper gives the window length, the 7-bit data, the gamma density and
// a, b, the absence of DSP blocks and the systolic style; the sample strobe,
// the pipeline depth, the weight format and the reset are this design's own.
module gdswu
  import gdswu_pkg::*;
#(
  parameter int unsigned TAPS        = GDSWU_TAPS,
  parameter int unsigned DATA_W      = GDSWU_DATA_W,
  parameter int unsigned GAMMA_A     = GDSWU_GAMMA_A,
  parameter int unsigned GAMMA_B     = GDSWU_GAMMA_B,
  parameter int unsigned WEIGHT_FRAC = GDSWU_WEIGHT_FRAC
) (
  input  logic                                         clk,
  input  logic                                         rst_n,
  input  logic                                         en_in,
  input  logic [DATA_W-1:0]                            b,
  output logic                                         out_valid,
  output logic [DATA_W+WEIGHT_FRAC+$clog2(TAPS)-1:0]   sum_sample,
  output logic [DATA_W-1:0]                            average_out
);
  localparam int unsigned PROD_W = DATA_W + WEIGHT_FRAC;
  localparam int unsigned SUM_W  = DATA_W + WEIGHT_FRAC + $clog2(TAPS);
  localparam int unsigned SHIFT  = WEIGHT_FRAC + $clog2(TAPS);

  if ((1 << $clog2(TAPS)) != TAPS) begin : g_bad_taps
    $error("gdswu: TAPS = %0d is not a power of two", TAPS);
  end

  // ---- window: win[0] is the newest sample (age 1) ----------------------
  logic [TAPS-1:0][DATA_W-1:0] win;
  logic                        win_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win       <= '0;
      win_valid <= 1'b0;
    end else begin
      win_valid <= en_in;
      if (en_in) win <= {win[TAPS-2:0], b};
    end
  end

  // ---- constant-weight products, one register stage ----------------------
  logic [TAPS-1:0][PROD_W-1:0] prod_c, prod_q;
  logic                        prod_valid;

  for (genvar i = 0; i < TAPS; i++) begin : g_tap
    localparam logic [WEIGHT_FRAC-1:0] W =
      WEIGHT_FRAC'(gamma_weight(i + 1, GAMMA_A, GAMMA_B, WEIGHT_FRAC));
    gdswu_const_mult #(.IN_W(DATA_W), .K_W(WEIGHT_FRAC), .K(W)) u_mult (
      .a (win[i]),
      .p (prod_c[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod_q     <= '0;
      prod_valid <= 1'b0;
    end else begin
      prod_q     <= prod_c;
      prod_valid <= win_valid;
    end
  end

  // ---- systolic adder tree ----------------------------------------------
  logic [SUM_W-1:0] tree_sum;
  logic             tree_valid;

  gdswu_adder_tree #(.N(TAPS), .IN_W(PROD_W)) u_tree (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (prod_valid),
    .in        (prod_q),
    .out_valid (tree_valid),
    .sum       (tree_sum)
  );

  // ---- result register: holds between samples ---------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_sample <= '0;
      out_valid  <= 1'b0;
    end else begin
      out_valid <= tree_valid;
      if (tree_valid) sum_sample <= tree_sum;
    end
  end

  assign average_out = DATA_W'(sum_sample >> SHIFT);

  // Every weight is below 2^WEIGHT_FRAC, so the average can never exceed the
  // largest input value.
  a_avg_range : assert property (@(posedge clk)
    (sum_sample >> SHIFT) < (SUM_W'(1) << DATA_W));
endmodule
