// IEEE-754 single-precision multiplier (combinational).
//
// y = a * b. The 24x24-bit mantissa product is normalised by at most one
// position and rounded to nearest, ties to even. As in fp_add, subnormals
// are read and returned as zero, and overflow returns infinity; NaN and
// infinity inputs are not treated specially. The source only names the
// multipliers; these rounding and exception rules are this design's choice.
module fp_mul
  import tactile_pkg::*;
(
  input  f32_t a,
  input  f32_t b,
  output f32_t y
);

  logic [23:0] ma, mb;
  logic [47:0] p;
  logic [23:0] m;
  logic        g, s, rnd;
  logic [24:0] m_r;
  logic [9:0]  e;
  logic        sg;

  always_comb begin
    sg = a[31] ^ b[31];
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    p  = ma * mb;
    e  = {2'b00, a[30:23]} + {2'b00, b[30:23]} - 10'd127;
    if (p[47]) begin
      m = p[47:24]; g = p[23]; s = |p[22:0];
      e = e + 10'd1;
    end else begin
      m = p[46:23]; g = p[22]; s = |p[21:0];
    end
    rnd = g & (s | m[0]);
    m_r = {1'b0, m} + {24'd0, rnd};
    if (m_r[24]) begin
      m_r = m_r >> 1;
      e   = e + 10'd1;
    end
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0 || e[9] || e == 10'd0)
      y = {sg, 31'd0};
    else if (e >= 10'd255)
      y = {sg, 8'hff, 23'd0};
    else
      y = {sg, e[7:0], m_r[22:0]};
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) y = 32'h0000_0000;
  end

endmodule
