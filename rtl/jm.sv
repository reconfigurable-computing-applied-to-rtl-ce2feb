// Jacobian matrix (JM) of the PHANToM Omni, sub-circuit of KFF-HMD.
//
// From the master joint angles computes, in F32 and in parallel:
//   J11 = -cos(t1) (L1 cos(t2) + L2 sin(t3))
//   J21 = 0 (no circuit: the constant zero)
//   J31 = ((-L1) cos(t2)) sin(t1) - sin(t1) (L2 sin(t3))
//   J12 = sin(t2) (L1 sin(t1))
//   J22 = L1 cos(t2)
//   J32 = (sin(t2) (-L1)) cos(t1)
//   J13 = (sin(t1) (-L2)) cos(t3)
//   J23 = L2 sin(t3)
//   J33 = (cos(t3) L2) cos(t1)
// Each element has its own trigonometric blocks and operators, wired as in
// the source's per-element diagrams (16 TFBs in all). Combinational.
module jm
  import tactile_pkg::*;
(
  input  joints_t   theta,
  output jacobian_t j
);

  // J11
  f32_t j11_c1, j11_c2, j11_s3, j11_a, j11_b, j11_s;
  tfb #(.FUNC(TFB_COS)) u_j11_c1 (.a(theta.t1), .b(F32_ZERO), .y(j11_c1));
  tfb #(.FUNC(TFB_COS)) u_j11_c2 (.a(theta.t2), .b(F32_ZERO), .y(j11_c2));
  tfb #(.FUNC(TFB_SIN)) u_j11_s3 (.a(theta.t3), .b(F32_ZERO), .y(j11_s3));
  fp_mul u_j11_m1 (.a(j11_c2), .b(F32_L1), .y(j11_a));
  fp_mul u_j11_m2 (.a(j11_s3), .b(F32_L2), .y(j11_b));
  fp_add u_j11_a1 (.a(j11_a), .b(j11_b), .sub(1'b0), .y(j11_s));
  fp_mul u_j11_m3 (.a(f32_neg(j11_c1)), .b(j11_s), .y(j.j11));

  // J21
  assign j.j21 = F32_ZERO;

  // J31
  f32_t j31_c2, j31_s1, j31_s3, j31_a, j31_b, j31_p, j31_q;
  tfb #(.FUNC(TFB_COS)) u_j31_c2 (.a(theta.t2), .b(F32_ZERO), .y(j31_c2));
  tfb #(.FUNC(TFB_SIN)) u_j31_s1 (.a(theta.t1), .b(F32_ZERO), .y(j31_s1));
  tfb #(.FUNC(TFB_SIN)) u_j31_s3 (.a(theta.t3), .b(F32_ZERO), .y(j31_s3));
  fp_mul u_j31_m1 (.a(j31_c2), .b(F32_NEG_L1), .y(j31_a));
  fp_mul u_j31_m2 (.a(j31_s3), .b(F32_L2), .y(j31_b));
  fp_mul u_j31_m3 (.a(j31_a), .b(j31_s1), .y(j31_p));
  fp_mul u_j31_m4 (.a(j31_s1), .b(j31_b), .y(j31_q));
  fp_add u_j31_s  (.a(j31_p), .b(j31_q), .sub(1'b1), .y(j.j31));

  // J12
  f32_t j12_s2, j12_s1, j12_a;
  tfb #(.FUNC(TFB_SIN)) u_j12_s2 (.a(theta.t2), .b(F32_ZERO), .y(j12_s2));
  tfb #(.FUNC(TFB_SIN)) u_j12_s1 (.a(theta.t1), .b(F32_ZERO), .y(j12_s1));
  fp_mul u_j12_m1 (.a(j12_s1), .b(F32_L1), .y(j12_a));
  fp_mul u_j12_m2 (.a(j12_s2), .b(j12_a), .y(j.j12));

  // J22
  f32_t j22_c2;
  tfb #(.FUNC(TFB_COS)) u_j22_c2 (.a(theta.t2), .b(F32_ZERO), .y(j22_c2));
  fp_mul u_j22_m1 (.a(j22_c2), .b(F32_L1), .y(j.j22));

  // J32
  f32_t j32_s2, j32_c1, j32_a;
  tfb #(.FUNC(TFB_SIN)) u_j32_s2 (.a(theta.t2), .b(F32_ZERO), .y(j32_s2));
  tfb #(.FUNC(TFB_COS)) u_j32_c1 (.a(theta.t1), .b(F32_ZERO), .y(j32_c1));
  fp_mul u_j32_m1 (.a(j32_s2), .b(F32_NEG_L1), .y(j32_a));
  fp_mul u_j32_m2 (.a(j32_a), .b(j32_c1), .y(j.j32));

  // J13
  f32_t j13_s1, j13_c3, j13_a;
  tfb #(.FUNC(TFB_SIN)) u_j13_s1 (.a(theta.t1), .b(F32_ZERO), .y(j13_s1));
  tfb #(.FUNC(TFB_COS)) u_j13_c3 (.a(theta.t3), .b(F32_ZERO), .y(j13_c3));
  fp_mul u_j13_m1 (.a(j13_s1), .b(F32_NEG_L2), .y(j13_a));
  fp_mul u_j13_m2 (.a(j13_a), .b(j13_c3), .y(j.j13));

  // J23
  f32_t j23_s3;
  tfb #(.FUNC(TFB_SIN)) u_j23_s3 (.a(theta.t3), .b(F32_ZERO), .y(j23_s3));
  fp_mul u_j23_m1 (.a(j23_s3), .b(F32_L2), .y(j.j23));

  // J33
  f32_t j33_c3, j33_c1, j33_a;
  tfb #(.FUNC(TFB_COS)) u_j33_c3 (.a(theta.t3), .b(F32_ZERO), .y(j33_c3));
  tfb #(.FUNC(TFB_COS)) u_j33_c1 (.a(theta.t1), .b(F32_ZERO), .y(j33_c1));
  fp_mul u_j33_m1 (.a(j33_c3), .b(F32_L2), .y(j33_a));
  fp_mul u_j33_m2 (.a(j33_a), .b(j33_c1), .y(j.j33));

endmodule
