// IEEE-754 single-precision adder / subtractor (combinational).
//
// y = a + b, or a - b when sub = 1. The operand of smaller magnitude is
// aligned with three extra bits (guard, round, sticky), the mantissas are
// added or subtracted, the result is renormalised with a leading-zero count
// and rounded to nearest, ties to even.
// Simplifications chosen for this design (the source only names "adders"):
// subnormal inputs are read as zero and subnormal results are flushed to +0;
// infinities and NaNs are not treated specially, an exponent overflow gives
// infinity. Purely combinational: the result is valid in the same cycle.
module fp_add
  import tactile_pkg::*;
(
  input  f32_t a,
  input  f32_t b,
  input  logic sub,
  output f32_t y
);

  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [23:0] ma, mb, ml, ms;
  logic [7:0]  d;
  logic [26:0] ml_x, ms_x;     // {mantissa, G, R, S}
  logic [27:0] sum;
  logic [26:0] norm;
  logic [4:0]  lz;
  logic [9:0]  e_res;          // signed-ish working exponent
  logic [24:0] mant_r;
  logic        rnd;
  logic        s_res;

  always_comb begin
    sa = a[31];
    sb = b[31] ^ sub;
    ea = a[30:23];
    eb = b[30:23];
    ma = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
    mb = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};
    if (ea == 8'd0) ea = 8'd0;
    if (eb == 8'd0) eb = 8'd0;

    // larger magnitude first
    if ({ea, ma} >= {eb, mb}) begin
      sl = sa; el = ea; ml = ma;
      ss = sb; es = eb; ms = mb;
    end else begin
      sl = sb; el = eb; ml = mb;
      ss = sa; es = ea; ms = ma;
    end

    d    = el - es;
    ml_x = {ml, 3'b000};
    if (d >= 8'd27) begin
      ms_x = {26'd0, |ms};
    end else begin
      ms_x = {ms, 3'b000} >> d;
      // sticky: any bit shifted out of the aligned operand
      if (({ms, 3'b000} & ~(27'h7ff_ffff << d)) != 27'd0) ms_x[0] = 1'b1;
    end

    s_res = sl;
    e_res = {2'b00, el};
    norm  = '0;
    lz    = '0;
    if (sl == ss) begin
      sum = {1'b0, ml_x} + {1'b0, ms_x};
      if (sum[27]) begin
        norm  = sum[27:1];
        norm[0] = sum[1] | sum[0];
        e_res = e_res + 10'd1;
      end else begin
        norm = sum[26:0];
      end
    end else begin
      sum  = {1'b0, ml_x} - {1'b0, ms_x};
      norm = sum[26:0];
      lz   = 5'd0;
      // leading-zero count: the highest set bit is assigned last
      for (int i = 0; i <= 26; i++) begin
        if (norm[i]) lz = 5'(26 - i);
      end
      norm  = norm << lz;
      e_res = e_res - {5'd0, lz};
    end

    // round to nearest even on {mant[26:3], G=norm[2], R|S=norm[1:0]}
    rnd    = norm[2] & (norm[1] | norm[0] | norm[3]);
    mant_r = {1'b0, norm[26:3]} + {24'd0, rnd};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e_res  = e_res + 10'd1;
    end

    if (norm[26] == 1'b0 || el == 8'd0) begin
      y = 32'h0000_0000;                       // exact zero
    end else if (e_res[9] || e_res == 10'd0) begin
      y = 32'h0000_0000;                       // underflow: flush to zero
    end else if (e_res >= 10'd255) begin
      y = {s_res, 8'hff, 23'd0};               // overflow: infinity
    end else begin
      y = {s_res, e_res[7:0], mant_r[22:0]};
    end
  end

endmodule
