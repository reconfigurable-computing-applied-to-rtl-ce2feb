// Self-checking testbench of kff: random Jacobian elements and forces; each
// torque is compared with J^T F computed in double precision from the same
// F32 inputs (relative tolerance 1e-6 of the sum of term magnitudes, i.e.
// a few F32 roundings). Checks that row and column roles are not swapped.
module tb_kff;
  import fp_ref_pkg::*;
  import tactile_pkg::*;

  jacobian_t j;
  vec3_t     force_in;
  joints_t   tau;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  kff dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(f32_t got, real expv, real mag, string what);
    checks++;
    if (rabs(f2r(got) - expv) > 1e-6 * mag + 1e-30) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %e expected %e", what, f2r(got), expv);
    end
  endtask

  initial begin
    real r[9], fx, fy, fz, t1, t2, t3, m1, m2, m3;
    for (int i = 0; i < 5000; i++) begin
      for (int k = 0; k < 9; k++) r[k] = f2r(r2f(urand(-0.3, 0.3)));
      fx = f2r(r2f(urand(-10.0, 10.0)));
      fy = f2r(r2f(urand(-10.0, 10.0)));
      fz = f2r(r2f(urand(-10.0, 10.0)));
      j.j11 = r2f(r[0]); j.j12 = r2f(r[1]); j.j13 = r2f(r[2]);
      j.j21 = r2f(r[3]); j.j22 = r2f(r[4]); j.j23 = r2f(r[5]);
      j.j31 = r2f(r[6]); j.j32 = r2f(r[7]); j.j33 = r2f(r[8]);
      force_in.x = r2f(fx); force_in.y = r2f(fy); force_in.z = r2f(fz);
      #1;
      kff_ref(r, fx, fy, fz, t1, t2, t3);
      m1 = rabs(r[0] * fx) + rabs(r[3] * fy) + rabs(r[6] * fz);
      m2 = rabs(r[1] * fx) + rabs(r[4] * fy) + rabs(r[7] * fz);
      m3 = rabs(r[2] * fx) + rabs(r[5] * fy) + rabs(r[8] * fz);
      chk(tau.t1, t1, m1, "tau1");
      chk(tau.t2, t2, m2, "tau2");
      chk(tau.t3, t3, m3, "tau3");
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
