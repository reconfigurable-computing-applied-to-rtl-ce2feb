// KFF sub-circuit: joint torques from the Jacobian and the force, tau = J^T F.
//
//   tau1 = (J11 Fx + J21 Fy) + J31 Fz
//   tau2 = (J12 Fx + J22 Fy) + J32 Fz
//   tau3 = (J13 Fx + J23 Fy) + J33 Fz
// Twelve F32 inputs (nine Jacobian elements, three forces), three outputs;
// each torque has three multipliers and two adders, summed in the order the
// source's diagrams draw them. Combinational.
module kff
  import tactile_pkg::*;
(
  input  jacobian_t j,
  input  vec3_t     force_in,
  output joints_t   tau
);

  f32_t p11, p21, p31, s1;
  fp_mul u_m11 (.a(j.j11), .b(force_in.x), .y(p11));
  fp_mul u_m21 (.a(j.j21), .b(force_in.y), .y(p21));
  fp_mul u_m31 (.a(j.j31), .b(force_in.z), .y(p31));
  fp_add u_a1a (.a(p11), .b(p21), .sub(1'b0), .y(s1));
  fp_add u_a1b (.a(s1), .b(p31), .sub(1'b0), .y(tau.t1));

  f32_t p12, p22, p32, s2;
  fp_mul u_m12 (.a(j.j12), .b(force_in.x), .y(p12));
  fp_mul u_m22 (.a(j.j22), .b(force_in.y), .y(p22));
  fp_mul u_m32 (.a(j.j32), .b(force_in.z), .y(p32));
  fp_add u_a2a (.a(p12), .b(p22), .sub(1'b0), .y(s2));
  fp_add u_a2b (.a(s2), .b(p32), .sub(1'b0), .y(tau.t2));

  f32_t p13, p23, p33, s3;
  fp_mul u_m13 (.a(j.j13), .b(force_in.x), .y(p13));
  fp_mul u_m23 (.a(j.j23), .b(force_in.y), .y(p23));
  fp_mul u_m33 (.a(j.j33), .b(force_in.z), .y(p33));
  fp_add u_a3a (.a(p13), .b(p23), .sub(1'b0), .y(s3));
  fp_add u_a3b (.a(s3), .b(p33), .sub(1'b0), .y(tau.t3));

endmodule
