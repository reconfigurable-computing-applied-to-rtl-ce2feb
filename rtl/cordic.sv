// Unrolled CORDIC in signed fixed point [sV.N] (default [s16.13]).
//
// Rotation mode (vectoring = 0): starting from (K, 0) the vector is turned by
// the angle z0, giving cos_o = cos(z0) and sin_o = sin(z0). Angles outside
// [-pi/2, pi/2] are first folded by +/-pi and the result negated, so any
// angle representable in the format (|z0| < 4 rad) is accepted.
// Vectoring mode (vectoring = 1): the vector (x0, y0) is turned onto the
// x axis and angle_o = atan2(y0, x0) in [-pi, pi]; a vector in the left half
// plane is first turned by -/+pi/2. cos_o then carries the gain-scaled
// magnitude and sin_o the residue.
// ITER micro-rotations are unrolled; the arctangent table and the gain K are
// computed at elaboration from ITER and N. Internally the words carry two
// extra integer bits so that the CORDIC gain (1.647) cannot overflow;
// outputs saturate to the V-bit format.
// The source fixes the algorithm (CORDIC, after Volder) and the [s16.13]
// format; the iteration count (one per bit of the word), the folding and the
// guard bits are this design's choice. Combinational.
module cordic #(
  parameter int unsigned V    = 16,
  parameter int unsigned N    = 13,
  parameter int unsigned ITER = 16
) (
  input  logic               vectoring,
  input  logic signed [V-1:0] x0,
  input  logic signed [V-1:0] y0,
  input  logic signed [V-1:0] z0,
  output logic signed [V-1:0] cos_o,
  output logic signed [V-1:0] sin_o,
  output logic signed [V-1:0] angle_o
);

  localparam int unsigned W = V + 2;
  typedef logic signed [W-1:0] word_t;

  // The constants below are computed with plain real arithmetic (no math
  // system functions) so that every front end can evaluate them.
  function automatic real pow2(int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int k = 0; k < e; k++) r = r * 2.0;
    else        for (int k = 0; k < -e; k++) r = r / 2.0;
    return r;
  endfunction

  function automatic word_t to_q(real r);
    return word_t'(longint'(r * pow2(N)));   // real-to-integer cast rounds to nearest
  endfunction

  function automatic real pi_r();
    return 3.14159265358979323846;
  endfunction

  // atan(2^-i): pi/4 for i = 0, else the series u - u^3/3 + u^5/5 - ..., u = 2^-i
  function automatic real atan_pow2(int i);
    real u, term, acc;
    if (i == 0) return pi_r() / 4.0;
    u    = pow2(-i);
    term = u;
    acc  = 0.0;
    for (int k = 0; k < 30; k++) begin
      acc  = acc + (((k % 2) == 0) ? term : -term) / real'(2 * k + 1);
      term = term * u * u;
    end
    return acc;
  endfunction

  // arctangent table, packed: entry i in bits [i*W +: W]
  function automatic logic [ITER*W-1:0] atan_table();
    logic [ITER*W-1:0] tab;
    tab = '0;
    for (int i = 0; i < ITER; i++) tab[i*W +: W] = to_q(atan_pow2(i));
    return tab;
  endfunction

  // K = prod 1/sqrt(1 + 2^-2i), square root by Newton iteration
  function automatic real gain_k();
    real k2, k;
    k2 = 1.0;
    for (int i = 0; i < ITER; i++) k2 = k2 / (1.0 + pow2(-2 * i));
    k = 1.0;
    for (int n = 0; n < 40; n++) k = 0.5 * (k + k2 / k);
    return k;
  endfunction

  localparam word_t PI_Q  = to_q(pi_r());
  localparam word_t HPI_Q = to_q(pi_r() / 2.0);
  localparam word_t K_Q   = to_q(gain_k());
  localparam logic [ITER*W-1:0] ATAN_TAB = atan_table();

  function automatic logic signed [V-1:0] sat(word_t w);
    word_t lim;
    lim = word_t'((1 << (V - 1)) - 1);
    if (w > lim) return V'(lim);
    if (w < -lim) return V'(-lim);
    return V'(w);
  endfunction

  word_t x, y, z, xn, yn;
  logic  neg;
  logic  dir;

  always_comb begin
    neg = 1'b0;
    if (!vectoring) begin
      x = K_Q;
      y = '0;
      z = word_t'(z0);
      if (z > HPI_Q) begin
        z = z - PI_Q; neg = 1'b1;
      end else if (z < -HPI_Q) begin
        z = z + PI_Q; neg = 1'b1;
      end
    end else begin
      x = word_t'(x0);
      y = word_t'(y0);
      z = '0;
      if (x0 < 0) begin
        if (y0 >= 0) begin
          x = word_t'(y0); y = -word_t'(x0); z = HPI_Q;
        end else begin
          x = -word_t'(y0); y = word_t'(x0); z = -HPI_Q;
        end
      end
    end

    for (int i = 0; i < ITER; i++) begin
      // dir = 1: rotate counter-clockwise
      dir = vectoring ? (y < 0) : (z >= 0);
      if (dir) begin
        xn = x - (y >>> i);
        yn = y + (x >>> i);
        z  = z - word_t'(ATAN_TAB[i*W +: W]);
      end else begin
        xn = x + (y >>> i);
        yn = y - (x >>> i);
        z  = z + word_t'(ATAN_TAB[i*W +: W]);
      end
      x = xn;
      y = yn;
    end

    cos_o   = sat(neg ? -x : x);
    sin_o   = sat(neg ? -y : y);
    angle_o = sat(z);
  end

endmodule
