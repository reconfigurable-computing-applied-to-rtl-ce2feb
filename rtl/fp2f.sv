// Fixed-point to float converter (FP2F) at the output of a trigonometric block.
//
// Converts a signed [sV.N] word (default [s16.13]) into IEEE-754 single
// precision. Every [s16.13] value is exactly representable in F32, so the
// conversion is exact: take the magnitude, find its leading one, shift it into
// the hidden-bit position and set the exponent to (position - N + 127).
// Zero gives +0. Format and function follow the source. Combinational.
module fp2f
  import tactile_pkg::*;
#(
  parameter int unsigned V = FIX_V,
  parameter int unsigned N = FIX_N
) (
  input  logic signed [V-1:0] q,
  output f32_t               f
);

  logic [V:0]  mag;
  int unsigned p;
  logic [22:0] m;

  always_comb begin
    mag = q[V-1] ? (V+1)'(-$signed({q[V-1], q})) : {1'b0, q};
    p   = 0;
    for (int i = 0; i <= V; i++) begin
      if (mag[i]) p = i;
    end
    m = 23'(24'(mag) << (23 - p));   // leading one (bit 23) dropped
    if (mag == '0)
      f = 32'h0000_0000;
    else
      f = {q[V-1], 8'(p + 127 - N), m};
  end

endmodule
