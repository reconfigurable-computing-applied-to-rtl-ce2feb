// Trigonometric Function Block (TFB).
//
// The only part of the datapath that computes in fixed point: the F32
// argument(s) pass through F2FP into [s16.13], a CORDIC evaluates the
// function, and FP2F returns the result as F32 (F2FP -> CORDIC -> FP2F, as in
// the block diagram of the source). FUNC selects what the block computes,
// matching the label printed in each TFB box of the circuit diagrams:
//   TFB_SIN   y = sin(a)           CORDIC rotation mode
//   TFB_COS   y = cos(a)           CORDIC rotation mode
//   TFB_ATAN2 y = atan2(a, b)      CORDIC vectoring mode (a: ordinate, b: abscissa)
//   TFB_ACOS  y = acos(a)          atan2(sqrt(1 - a^2), a) in vectoring mode
// The source does not say how the arccosine is obtained from the CORDIC. Here
// sqrt(1 - a^2) is formed in the fixed-point domain (a clamped to [-1, 1],
// one squaring, one restoring integer square root) and fed to the vectoring
// CORDIC with a. Input b is only used by TFB_ATAN2.
// Arguments must lie inside the [s16.13] range (|a|, |b| < 4); larger values
// saturate. Combinational: the result is valid in the same cycle.
module tfb
  import tactile_pkg::*;
#(
  parameter tfb_func_e   FUNC = TFB_SIN,
  parameter int unsigned V    = FIX_V,
  parameter int unsigned N    = FIX_N
) (
  input  f32_t a,
  input  f32_t b,
  output f32_t y
);

  typedef logic signed [V-1:0] fix_t;

  fix_t a_q, b_q;
  fix_t cx, cy, cz;
  fix_t cos_q, sin_q, ang_q;
  fix_t res_q;
  logic vect;

  // integer square root, floor(sqrt(v)), restoring method
  function automatic logic [15:0] isqrt32(logic [31:0] rad);
    logic [31:0] rem;
    logic [15:0] root;
    logic [32:0] trial;
    rem  = '0;
    root = '0;
    for (int i = 15; i >= 0; i--) begin
      rem   = {rem[29:0], rad[2*i+1], rad[2*i]};
      trial = {1'b0, rem} - {15'd0, root, 2'b01};
      if (!trial[32]) begin
        rem  = trial[31:0];
        root = {root[14:0], 1'b1};
      end else begin
        root = {root[14:0], 1'b0};
      end
    end
    return root;
  endfunction

  f2fp #(.V(V), .N(N)) u_f2fp_a (.f(a), .q(a_q));
  f2fp #(.V(V), .N(N)) u_f2fp_b (.f(b), .q(b_q));

  localparam fix_t ONE_Q = fix_t'(1 << N);

  fix_t        a_c;
  logic [31:0] sq;
  logic [31:0] t;

  always_comb begin
    vect = (FUNC == TFB_ATAN2) || (FUNC == TFB_ACOS);
    cx   = '0;
    cy   = '0;
    cz   = '0;
    a_c  = '0;
    sq   = '0;
    t    = '0;
    unique case (FUNC)
      TFB_SIN, TFB_COS: cz = a_q;
      TFB_ATAN2: begin
        cx = b_q;
        cy = a_q;
      end
      TFB_ACOS: begin
        a_c = (a_q > ONE_Q) ? ONE_Q : ((a_q < -ONE_Q) ? -ONE_Q : a_q);
        sq  = 32'($signed(a_c) * $signed(a_c)) >> N;
        t   = (32'(ONE_Q) > sq) ? (32'(ONE_Q) - sq) : 32'd0;
        cx  = a_c;
        cy  = fix_t'(isqrt32(t << N));
      end
      default: cz = a_q;
    endcase
  end

  cordic #(.V(V), .N(N)) u_cordic (
    .vectoring (vect),
    .x0        (cx),
    .y0        (cy),
    .z0        (cz),
    .cos_o     (cos_q),
    .sin_o     (sin_q),
    .angle_o   (ang_q)
  );

  always_comb begin
    unique case (FUNC)
      TFB_SIN: res_q = sin_q;
      TFB_COS: res_q = cos_q;
      default: res_q = ang_q;
    endcase
  end

  fp2f #(.V(V), .N(N)) u_fp2f (.q(res_q), .f(y));

endmodule
