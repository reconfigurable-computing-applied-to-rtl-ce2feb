// Forward kinematics of the PHANToM Omni (FK-HMD and FK-HSD).
//
// Maps the three joint angles to the tool position, all in F32:
//   x = -sin(t1) * (L1 cos(t2) + L2 sin(t3))
//   y =  L1 sin(t2) + (-L2) cos(t3) + L3
//   z =  cos(t2) (L1 cos(t1)) + (-L4) + sin(t3) (L2 cos(t1))
// Each coordinate is its own fully parallel circuit with its own
// trigonometric blocks, wired as in the source's diagrams: x uses three TFBs,
// three multipliers, one sign inversion and one adder; y two TFBs, two
// multipliers and two adders with the constant -L2; z three TFBs, four
// multipliers and two adders with the constant -L4. The same module serves
// as FK-HMD (master angles to c(n)) and FK-HSD (slave angles to l(n)).
// Timing: the whole computation is combinational and is captured in one
// output register, so a sample presented with in_valid appears one clock
// later with out_valid, and a new sample can be taken every clock. The
// clock period must cover the combinational path (47 ns reported for this
// module on a Virtex-6). The output register, valid flag and reset are this
// design's choice.
module fk
  import tactile_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  joints_t theta,
  output logic    out_valid,
  output vec3_t   pos
);

  vec3_t p;

  // ---- x: Eq. for x, circuit with sin(t1), cos(t2), sin(t3)
  f32_t x_s1, x_c2, x_s3, x_c2l1, x_s3l2, x_sum;
  tfb #(.FUNC(TFB_SIN)) u_x_s1 (.a(theta.t1), .b(F32_ZERO), .y(x_s1));
  tfb #(.FUNC(TFB_COS)) u_x_c2 (.a(theta.t2), .b(F32_ZERO), .y(x_c2));
  tfb #(.FUNC(TFB_SIN)) u_x_s3 (.a(theta.t3), .b(F32_ZERO), .y(x_s3));
  fp_mul u_x_m1 (.a(x_c2), .b(F32_L1), .y(x_c2l1));
  fp_mul u_x_m2 (.a(x_s3), .b(F32_L2), .y(x_s3l2));
  fp_add u_x_a1 (.a(x_c2l1), .b(x_s3l2), .sub(1'b0), .y(x_sum));
  fp_mul u_x_m3 (.a(f32_neg(x_s1)), .b(x_sum), .y(p.x));

  // ---- y: sin(t2), cos(t3)
  f32_t y_s2, y_c3, y_s2l1, y_c3l2, y_sum;
  tfb #(.FUNC(TFB_SIN)) u_y_s2 (.a(theta.t2), .b(F32_ZERO), .y(y_s2));
  tfb #(.FUNC(TFB_COS)) u_y_c3 (.a(theta.t3), .b(F32_ZERO), .y(y_c3));
  fp_mul u_y_m1 (.a(y_s2), .b(F32_L1), .y(y_s2l1));
  fp_mul u_y_m2 (.a(y_c3), .b(F32_NEG_L2), .y(y_c3l2));
  fp_add u_y_a1 (.a(y_s2l1), .b(y_c3l2), .sub(1'b0), .y(y_sum));
  fp_add u_y_a2 (.a(y_sum), .b(F32_L3), .sub(1'b0), .y(p.y));

  // ---- z: cos(t2), cos(t1), sin(t3)
  f32_t z_c2, z_c1, z_s3, z_l1c1, z_l2c1, z_a, z_b, z_ab;
  tfb #(.FUNC(TFB_COS)) u_z_c2 (.a(theta.t2), .b(F32_ZERO), .y(z_c2));
  tfb #(.FUNC(TFB_COS)) u_z_c1 (.a(theta.t1), .b(F32_ZERO), .y(z_c1));
  tfb #(.FUNC(TFB_SIN)) u_z_s3 (.a(theta.t3), .b(F32_ZERO), .y(z_s3));
  fp_mul u_z_m1 (.a(F32_L1), .b(z_c1), .y(z_l1c1));
  fp_mul u_z_m2 (.a(z_c1), .b(F32_L2), .y(z_l2c1));
  fp_mul u_z_m3 (.a(z_c2), .b(z_l1c1), .y(z_a));
  fp_mul u_z_m4 (.a(z_l2c1), .b(z_s3), .y(z_b));
  fp_add u_z_a1 (.a(F32_NEG_L4), .b(z_a), .sub(1'b0), .y(z_ab));
  fp_add u_z_a2 (.a(z_ab), .b(z_b), .sub(1'b0), .y(p.z));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      pos       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) pos <= p;
    end
  end

endmodule
