// gdswu_const_mult -- multiplies an unsigned operand by a constant weight
// using only shifts and adds, so no hardware multiplier (DSP) is needed.
//
// For every bit k that is set in the constant K, the operand shifted left by k
// is added in (the default K is 28, the weight of the newest sample of the
// default window).  The product p is exact and IN_W + K_W bits wide.
// Purely combinational; the caller registers the result.  The paper states
// that the GDSWU uses no DSP blocks; doing the constant products as shift-add
// is this design's way of meeting that.
module gdswu_const_mult #(
  parameter int unsigned IN_W  = 7,
  parameter int unsigned K_W   = 5,
  parameter logic [K_W-1:0] K  = K_W'(28)
) (
  input  logic [IN_W-1:0]      a,
  output logic [IN_W+K_W-1:0]  p
);
  always_comb begin
    p = '0;
    for (int k = 0; k < int'(K_W); k++)
      if (K[k]) p = p + ((IN_W + K_W)'(a) << k);
  end
endmodule
