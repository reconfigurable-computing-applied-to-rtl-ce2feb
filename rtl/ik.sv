// Inverse kinematics of the PHANToM Omni (IK-HSD).
//
// Maps a tool position (x, y, z), F32, to the three joint angles:
//   t1    = -atan2(x, z + L4)
//   R     = sqrt(x^2 + (z + L4)^2)
//   r     = sqrt(x^2 + (z + L4)^2 + (y - L3)^2)
//   gamma = acos((r^2 + (L1^2 - L2^2)) / ((2 L1) r))
//   beta  = atan2(y - L3, R)
//   alpha = acos((-(r^2) + (L1^2 + L2^2)) / ((2 L1) L2))
//   t2    = gamma + beta
//   t3    = (t2 + alpha) + (-pi/2)
// The circuits follow the source's diagrams one by one, each with its own
// operators: t1, R and r are computed side by side from the inputs, then
// gamma, beta and alpha, then t2 and t3. Subtractions of L3 are additions of
// the constant -L3, as drawn. The r equation of the source has a misplaced
// parenthesis; its diagram (three squares summed) is what is built.
// Timing: combinational, captured in one output register; latency one
// clock, one sample per clock (218 ns path reported on a Virtex-6). The
// output register, valid flag and reset are this design's choice.
module ik
  import tactile_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  vec3_t   pos,
  output logic    out_valid,
  output joints_t theta
);

  joints_t th;

  // ---- theta1
  f32_t t1_zl4, t1_at;
  fp_add u_t1_a (.a(pos.z), .b(F32_L4), .sub(1'b0), .y(t1_zl4));
  tfb #(.FUNC(TFB_ATAN2)) u_t1_tfb (.a(pos.x), .b(t1_zl4), .y(t1_at));
  assign th.t1 = f32_neg(t1_at);

  // ---- R
  f32_t R_xx, R_zl4, R_zz, R_sum, R;
  fp_mul  u_R_m1 (.a(pos.x), .b(pos.x), .y(R_xx));
  fp_add  u_R_a1 (.a(pos.z), .b(F32_L4), .sub(1'b0), .y(R_zl4));
  fp_mul  u_R_m2 (.a(R_zl4), .b(R_zl4), .y(R_zz));
  fp_add  u_R_a2 (.a(R_xx), .b(R_zz), .sub(1'b0), .y(R_sum));
  fp_sqrt u_R_sq (.a(R_sum), .y(R));

  // ---- r
  f32_t r_xx, r_zl4, r_zz, r_s1, r_yl3, r_yy, r_s2, r;
  fp_mul  u_r_m1 (.a(pos.x), .b(pos.x), .y(r_xx));
  fp_add  u_r_a1 (.a(pos.z), .b(F32_L4), .sub(1'b0), .y(r_zl4));
  fp_mul  u_r_m2 (.a(r_zl4), .b(r_zl4), .y(r_zz));
  fp_add  u_r_a2 (.a(r_xx), .b(r_zz), .sub(1'b0), .y(r_s1));
  fp_add  u_r_a3 (.a(pos.y), .b(F32_NEG_L3), .sub(1'b0), .y(r_yl3));
  fp_mul  u_r_m3 (.a(r_yl3), .b(r_yl3), .y(r_yy));
  fp_add  u_r_a4 (.a(r_s1), .b(r_yy), .sub(1'b0), .y(r_s2));
  fp_sqrt u_r_sq (.a(r_s2), .y(r));

  // ---- gamma
  f32_t g_rr, g_l1l1, g_l2l2, g_num1, g_num, g_2l1, g_den, g_q, gamma;
  fp_mul u_g_m1 (.a(r), .b(r), .y(g_rr));
  fp_mul u_g_m2 (.a(F32_L1), .b(F32_L1), .y(g_l1l1));
  fp_mul u_g_m3 (.a(F32_L2), .b(F32_L2), .y(g_l2l2));
  fp_add u_g_a1 (.a(g_l1l1), .b(f32_neg(g_l2l2)), .sub(1'b0), .y(g_num1));
  fp_add u_g_a2 (.a(g_rr), .b(g_num1), .sub(1'b0), .y(g_num));
  fp_mul u_g_m4 (.a(F32_TWO), .b(F32_L1), .y(g_2l1));
  fp_mul u_g_m5 (.a(g_2l1), .b(r), .y(g_den));
  fp_div u_g_d  (.a(g_num), .b(g_den), .y(g_q));
  tfb #(.FUNC(TFB_ACOS)) u_g_tfb (.a(g_q), .b(F32_ZERO), .y(gamma));

  // ---- beta
  f32_t b_yl3, beta;
  fp_add u_b_a (.a(pos.y), .b(F32_NEG_L3), .sub(1'b0), .y(b_yl3));
  tfb #(.FUNC(TFB_ATAN2)) u_b_tfb (.a(b_yl3), .b(R), .y(beta));

  // ---- alpha
  f32_t a_rr, a_l1l1, a_l2l2, a_num1, a_num, a_2l1, a_den, a_q, alpha;
  fp_mul u_a_m1 (.a(r), .b(r), .y(a_rr));
  fp_mul u_a_m2 (.a(F32_L1), .b(F32_L1), .y(a_l1l1));
  fp_mul u_a_m3 (.a(F32_L2), .b(F32_L2), .y(a_l2l2));
  fp_add u_a_a1 (.a(a_l1l1), .b(a_l2l2), .sub(1'b0), .y(a_num1));
  fp_add u_a_a2 (.a(f32_neg(a_rr)), .b(a_num1), .sub(1'b0), .y(a_num));
  fp_mul u_a_m4 (.a(F32_TWO), .b(F32_L1), .y(a_2l1));
  fp_mul u_a_m5 (.a(a_2l1), .b(F32_L2), .y(a_den));
  fp_div u_a_d  (.a(a_num), .b(a_den), .y(a_q));
  tfb #(.FUNC(TFB_ACOS)) u_a_tfb (.a(a_q), .b(F32_ZERO), .y(alpha));

  // ---- theta2, theta3
  f32_t t3_a;
  fp_add u_t2   (.a(gamma), .b(beta), .sub(1'b0), .y(th.t2));
  fp_add u_t3_1 (.a(th.t2), .b(alpha), .sub(1'b0), .y(t3_a));
  fp_add u_t3_2 (.a(t3_a), .b(F32_NEG_HPI), .sub(1'b0), .y(th.t3));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      theta     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) theta <= th;
    end
  end

endmodule
