// tb_gdswu -- self-checking testbench of the gamma-distribution sliding
// window unit at its default configuration (16 taps, 7-bit data, a=1, b=10).
//
// A reference model keeps its own copy of the window and its own weights,
// computed here with the simulator's $exp as floor(32*exp(-age/10)).  Every
// out_valid pulse is compared with the model's weighted sum and average, and
// its latency (6 clock edges after the sample was taken) is checked.  Between
// pulses the outputs must hold.  Directed parts: the step response of the
// paper (seed 7'h7F held for 16 samples -> 7'h3A), a single outlier in a
// constant stream, random samples with random gaps, back-to-back samples and
// a reset in the middle of a run.
module tb_gdswu;
  localparam int TAPS    = 16;
  localparam int DW      = 7;
  localparam int FRAC    = 5;
  localparam int SUM_W   = DW + FRAC + 4;
  localparam int LATENCY = 6;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic             en_in = 1'b0;
  logic [DW-1:0]    b = '0;
  logic             out_valid;
  logic [SUM_W-1:0] sum_sample;
  logic [DW-1:0]    average_out;

  int checks = 0, failures = 0;

  gdswu dut (.*);

  always #5 clk = ~clk;

  // ---- reference model --------------------------------------------------
  int unsigned w_ref [TAPS];
  int unsigned m_win [TAPS];
  int unsigned exp_sum_q[$];
  int unsigned exp_cyc_q[$];
  int unsigned cyc = 0;
  logic [SUM_W-1:0] last_sum = '0;

  initial
    for (int i = 0; i < TAPS; i++)
      w_ref[i] = int'($floor(32.0 * $exp(-(i + 1) / 10.0)));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  function automatic int unsigned model_sum();
    int unsigned s = 0;
    for (int i = 0; i < TAPS; i++) s += m_win[i] * w_ref[i];
    return s;
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      foreach (m_win[i]) m_win[i] = 0;
      exp_sum_q.delete();
      exp_cyc_q.delete();
      last_sum = '0;
    end else begin
      // outputs as left by the previous edge
      if (out_valid) begin
        if (exp_sum_q.size() == 0) check(0, "out_valid without a sample");
        else begin
          int unsigned es, ec;
          es = exp_sum_q.pop_front();
          ec = exp_cyc_q.pop_front();
          check(sum_sample == SUM_W'(es),
                $sformatf("sum_sample %0d, expected %0d", sum_sample, es));
          check(average_out == DW'(es / (TAPS * 32)),
                $sformatf("average_out %0d, expected %0d", average_out, es / 512));
          check(cyc - 1 - ec == LATENCY,
                $sformatf("latency %0d, expected %0d", cyc - 1 - ec, LATENCY));
        end
        last_sum = sum_sample;
      end else begin
        check(sum_sample == last_sum, "outputs did not hold between samples");
      end
      // sample taken at this edge
      if (en_in) begin
        for (int i = TAPS - 1; i > 0; i--) m_win[i] = m_win[i-1];
        m_win[0] = 32'(b);
        exp_sum_q.push_back(model_sum());
        exp_cyc_q.push_back(cyc);
      end
    end
    if (rst_n) cyc++;
  end

  // ---- stimulus: inputs change on the falling clock edge -------------------
  task automatic give(input logic [DW-1:0] v, input int gap);
    b     = v;
    en_in = 1'b1;
    @(negedge clk);
    en_in = 1'b0;
    repeat (gap) @(negedge clk);
  endtask

  task automatic drain();
    repeat (LATENCY + 3) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(average_out == 0 && sum_sample == 0, "outputs not zero after reset");

    // weights: the sum of the 16 weights of the default unit is 234
    begin
      automatic int unsigned s = 0;
      foreach (w_ref[i]) s += w_ref[i];
      check(s == 234, $sformatf("reference weight sum %0d", s));
    end

    // 1. step response of the paper: seed 7'h7F, 16 samples spaced out
    for (int n = 0; n < TAPS; n++) give(7'h7F, 7);
    drain();
    check(average_out == 7'h3A,
          $sformatf("step response %h, paper gives 3A", average_out));
    // more samples of the same value: the window is full, result stays
    for (int n = 0; n < 4; n++) give(7'h7F, 0);
    drain();
    check(average_out == 7'h3A, "full window of 7F does not stay at 3A");

    // 2. a single outlier in a constant stream moves the result by at most
    //    one weight's share: 87*28/512 < 5
    for (int n = 0; n < TAPS; n++) give(7'd40, 0);
    drain();
    begin
      logic [DW-1:0] base, peak;
      base = average_out;
      peak = base;
      give(7'd127, 0);
      repeat (LATENCY + 1) @(negedge clk);
      if (average_out > peak) peak = average_out;
      check(peak - base <= 5, $sformatf("outlier moved result %0d -> %0d", base, peak));
      check(peak != base, $sformatf("outlier had no effect at all (%0d)", base));
    end
    for (int n = 0; n < TAPS; n++) give(7'd40, 0);
    drain();

    // 3. random samples with random gaps, including back-to-back
    for (int n = 0; n < 300; n++) give(DW'($urandom), $urandom_range(0, 3));
    drain();

    // 4. reset in the middle of a run
    for (int n = 0; n < 5; n++) give(DW'($urandom), 0);
    #1 rst_n = 1'b0;
    #1 check(average_out == 0 && out_valid == 0, "reset did not clear the unit");
    @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    give(7'd100, 0);
    drain();
    check(average_out == DW'((100 * 28) / 512), "first sample after reset");

    check(exp_sum_q.size() == 0, "results missing at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
