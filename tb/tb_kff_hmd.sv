// Self-checking testbench of kff_hmd (KFF-HMD): random master angles and
// forces, one sample per clock with a random valid pattern. The torques must
// appear one clock after the sample, hold while no sample is taken, and match tau = J(theta)^T F evaluated in
// double precision (tolerance 5e-4 per newton of force, from the [s16.13]
// trigonometry). The mean squared error over all samples is reported and
// checked against 1e-5.
module tb_kff_hmd;
  import fp_ref_pkg::*;
  import tactile_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  joints_t theta, tau;
  vec3_t   force_in;
  int checks = 0, failures = 0;
  real se = 0.0;
  int  nse = 0;
  always #5 clk = ~clk;

  kff_hmd dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(f32_t got, real expv, real tol, string what);
    checks++;
    se += (f2r(got) - expv) ** 2;
    nse++;
    if (rabs(f2r(got) - expv) > tol) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %f expected %f", what, f2r(got), expv);
    end
  endtask

  initial begin
    real r[9], fx, fy, fz, t1, t2, t3, fm;
    joints_t tau_prev;
    theta = '0; force_in = '0; tau_prev = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid   = ($urandom_range(0, 3) != 0);
      theta.t1   = r2f(urand(-1.6, 1.6));
      theta.t2   = r2f(urand(-1.6, 1.6));
      theta.t3   = r2f(urand(-1.6, 1.6));
      force_in.x = r2f(urand(-5.0, 5.0));
      force_in.y = r2f(urand(-5.0, 5.0));
      force_in.z = r2f(urand(-5.0, 5.0));
      @(posedge clk); #1;
      checks++;
      if (out_valid !== in_valid) failures++;
      if (!in_valid) begin
        checks++;
        if (tau !== tau_prev) failures++;
      end
      tau_prev = tau;
      if (in_valid) begin
        jm_ref(f2r(theta.t1), f2r(theta.t2), f2r(theta.t3), r);
        fx = f2r(force_in.x); fy = f2r(force_in.y); fz = f2r(force_in.z);
        kff_ref(r, fx, fy, fz, t1, t2, t3);
        fm = rabs(fx) + rabs(fy) + rabs(fz);
        chk(tau.t1, t1, 5e-4 * fm, "tau1");
        chk(tau.t2, t2, 5e-4 * fm, "tau2");
        chk(tau.t3, t3, 5e-4 * fm, "tau3");
      end
    end
    checks++;
    if (se / nse > 1e-5) failures++;
    $display("kff_hmd MSE %e over %0d values", se / nse, nse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
