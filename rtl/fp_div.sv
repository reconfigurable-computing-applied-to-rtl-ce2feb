// IEEE-754 single-precision divider (combinational).
//
// y = a / b. The dividend mantissa, shifted left by 26 bits, is divided by the
// divisor mantissa in one integer division; the 26- or 27-bit quotient and the
// remainder (as sticky bit) are rounded to nearest, ties to even. A zero
// divisor returns infinity with the quotient's sign, a zero dividend returns
// zero; subnormals are read as zero. The source only names the divider of the
// gamma and alpha circuits; the method is this design's choice.
module fp_div
  import tactile_pkg::*;
(
  input  f32_t a,
  input  f32_t b,
  output f32_t y
);

  logic [49:0] num;
  logic [23:0] den;
  logic [26:0] q;
  logic [23:0] rem;
  logic [23:0] m;
  logic        g, s, rnd, sg;
  logic [24:0] m_r;
  logic [9:0]  e;

  always_comb begin
    sg  = a[31] ^ b[31];
    num = {1'b1, a[22:0], 26'd0};
    den = {1'b1, b[22:0]};
    q   = 27'(num / {26'd0, den});   // < 2^27 since num < 2^50, den >= 2^23
    rem = 24'(num % {26'd0, den});
    e   = {2'b00, a[30:23]} - {2'b00, b[30:23]} + 10'd127;
    // q lies in [2^25, 2^27)
    if (q[26]) begin
      m = q[26:3]; g = q[2]; s = (|q[1:0]) | (|rem);
    end else begin
      m = q[25:2]; g = q[1]; s = q[0] | (|rem);
      e = e - 10'd1;
    end
    rnd = g & (s | m[0]);
    m_r = {1'b0, m} + {24'd0, rnd};
    if (m_r[24]) begin
      m_r = m_r >> 1;
      e   = e + 10'd1;
    end
    if (a[30:23] == 8'd0)
      y = 32'h0000_0000;
    else if (b[30:23] == 8'd0)
      y = {sg, 8'hff, 23'd0};
    else if (e[9] || e == 10'd0)
      y = {sg, 31'd0};
    else if (e >= 10'd255)
      y = {sg, 8'hff, 23'd0};
    else
      y = {sg, e[7:0], m_r[22:0]};
  end

endmodule
