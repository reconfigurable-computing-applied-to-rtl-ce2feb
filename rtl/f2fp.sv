// Float to fixed-point converter (F2FP) at the input of a trigonometric block.
//
// Converts an IEEE-754 single-precision word into the signed fixed-point
// format [sV.N] (default [s16.13]: V = 16 bits, N = 13 fractional). The
// magnitude is rounded to nearest (half away from zero) and saturates at
// +/-(2^(V-1) - 1) LSB, i.e. just under +/-4.0 for [s16.13]. Format and
// function follow the source; the rounding and saturation rules are this
// design's choice. Combinational.
module f2fp
  import tactile_pkg::*;
#(
  parameter int unsigned V = FIX_V,
  parameter int unsigned N = FIX_N
) (
  input  f32_t               f,
  output logic signed [V-1:0] q
);

  localparam int unsigned MAXQ = (1 << (V - 1)) - 1;
  // exponent at and above which the value no longer fits
  localparam int unsigned E_SAT = 127 + 23 - N;   // 137 for N = 13

  logic [23:0] mant;
  logic [7:0]  e;
  int unsigned rs;
  logic [24:0] mag;

  always_comb begin
    e    = f[30:23];
    mant = {1'b1, f[22:0]};
    rs   = 0;
    mag  = '0;
    if (e == 8'd0) begin
      mag = '0;
    end else if (32'(e) >= E_SAT) begin
      mag = 25'(MAXQ);
    end else begin
      rs = E_SAT - 32'(e);               // 1 .. E_SAT-1
      if (rs > 25) mag = '0;
      else mag = 25'(({1'b0, mant} + (25'd1 << (rs - 1))) >> rs);
      if (mag > 25'(MAXQ)) mag = 25'(MAXQ);
    end
    q = f[31] ? -$signed(V'(mag)) : $signed(V'(mag));
  end

endmodule
