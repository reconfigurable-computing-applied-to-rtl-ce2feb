// IEEE-754 single-precision square root (combinational), the "Sqrt" sub-circuit.
//
// y = sqrt(a). The exponent is halved (the mantissa is doubled first when the
// unbiased exponent is odd) and the mantissa root is taken with a restoring,
// digit-by-digit integer square root of 25 result bits: 24 mantissa bits and
// a guard bit, the remainder giving the sticky bit; rounding is to nearest.
// The source gives only the function. Zero and negative inputs return +0
// (the radicands in this design are sums of squares); subnormals read as 0.
module fp_sqrt
  import tactile_pkg::*;
(
  input  f32_t a,
  output f32_t y
);

  logic [9:0]  e;        // unbiased exponent + bias handling
  logic [49:0] x;        // radicand: mantissa * 2^25 or 2^26
  logic [49:0] rem;
  logic [24:0] root;
  logic [50:0] trial;
  logic [24:0] m_r;
  logic        rnd;
  logic [7:0]  e_out;

  always_comb begin
    // exponent: (ea - 127) halved, rebiased
    e = {2'b00, a[30:23]} - 10'd127;
    if (e[0]) begin
      x = {1'b1, a[22:0], 26'd0};         // odd: mantissa * 2, then * 2^25
      e = e - 10'd1;
    end else begin
      x = {1'b0, 1'b1, a[22:0], 25'd0};
    end
    e_out = 8'(($signed(e) >>> 1) + 10'sd127);

    // restoring square root: 25 result bits
    rem  = '0;
    root = '0;
    for (int i = 24; i >= 0; i--) begin
      rem   = {rem[47:0], x[2*i+1], x[2*i]};
      trial = {1'b0, rem} - {24'd0, root, 2'b01};
      if (!trial[50]) begin
        rem  = trial[49:0];
        root = {root[23:0], 1'b1};
      end else begin
        root = {root[23:0], 1'b0};
      end
    end

    rnd = root[0] & ((rem != 50'd0) | root[1]);
    m_r = {1'b0, root[24:1]} + {24'd0, rnd};
    if (m_r[24]) begin
      m_r   = m_r >> 1;
      e_out = e_out + 8'd1;
    end

    if (a[31] || a[30:23] == 8'd0)
      y = 32'h0000_0000;
    else
      y = {1'b0, e_out, m_r[22:0]};
  end

endmodule
