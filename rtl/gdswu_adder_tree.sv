// gdswu_adder_tree -- pipelined (systolic) binary adder tree.
//
// Sums N unsigned operands of IN_W bits in log2(N) register stages.  Level l
// holds N/2^l partial sums of IN_W + l bits, so every level is only as wide as
// its values can get (variable-width unsigned arithmetic).  A valid bit travels
// with the data; the tree itself never stalls and accepts new operands every
// clock.  Latency: LEVELS = log2(N) cycles from in_valid/in to out_valid/sum.
// N must be a power of two.  The adder tree is this design's choice: the paper
// only calls the GDSWU a systolic, coarse-grained architecture.
module gdswu_adder_tree #(
  parameter int unsigned N    = 16,
  parameter int unsigned IN_W = 12
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic [N-1:0][IN_W-1:0]            in,
  output logic                              out_valid,
  output logic [IN_W+$clog2(N)-1:0]         sum
);
  localparam int unsigned LEVELS = $clog2(N);

  if ((1 << LEVELS) != N) begin : g_bad_n
    $error("gdswu_adder_tree: N = %0d is not a power of two", N);
  end

  for (genvar l = 0; l <= LEVELS; l++) begin : lvl
    logic [(N >> l)-1:0][IN_W+l-1:0] node;
    logic                            v;
    if (l == 0) begin : g_leaf
      assign node = in;
      assign v    = in_valid;
    end else begin : g_add
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          node <= '0;
          v    <= 1'b0;
        end else begin
          v <= lvl[l-1].v;
          for (int i = 0; i < int'(N >> l); i++)
            node[i] <= (IN_W + l)'(lvl[l-1].node[2*i]) +
                       (IN_W + l)'(lvl[l-1].node[2*i+1]);
        end
      end
    end
  end

  assign sum       = lvl[LEVELS].node[0];
  assign out_valid = lvl[LEVELS].v;
endmodule
