// Self-checking testbench of hsd (slave-side hardware). Samples come either
// back to back or with one to three idle clocks between them. Each carries a
// received position v(n) (forward kinematics of random reachable angles),
// slave angles theta^SD(n), an object position and elasticities.
// Checked against double-precision equations:
//   theta_ref one clock later = the angles behind v(n) (3e-2 rad);
//   l one clock later = forward kinematics of theta^SD(n) (5e-4);
//   h two clocks later (and h_valid at no other clock) = h_k(n) (obj(n) - l(n)) with the l(n) the block
//   produced, so the object position must be aligned with its own instant.
module tb_hsd;
  import fp_ref_pkg::*;
  import tactile_pkg::*;

  logic clk = 0, rst_n = 0, sample = 0;
  logic theta_ref_valid, l_valid, h_valid;
  vec3_t   v, g_obj, hcoef, l, h;
  joints_t g_theta, theta_ref;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  hsd dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(f32_t got, real expv, real tol, string what);
    checks++;
    if (rabs(f2r(got) - expv) > tol) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %f expected %f", what, f2r(got), expv);
    end
  endtask

  // h and h_valid checked at every clock: a force is due exactly one clock
  // after l(n) appears, computed from the s^OBJ(n), h_k(n) of that sample
  vec3_t pend_obj, pend_h, pend_l;
  logic  pend_v = 0;

  task automatic tick();
    @(posedge clk); #1;
    checks++;
    if (h_valid !== pend_v) failures++;
    if (pend_v) begin
      chk(h.x, f2r(pend_h.x) * (f2r(pend_obj.x) - f2r(pend_l.x)), 1e-4, "h.x");
      chk(h.y, f2r(pend_h.y) * (f2r(pend_obj.y) - f2r(pend_l.y)), 1e-4, "h.y");
      chk(h.z, f2r(pend_h.z) * (f2r(pend_obj.z) - f2r(pend_l.z)), 1e-4, "h.z");
    end
    pend_v = l_valid; pend_obj = g_obj; pend_h = hcoef; pend_l = l;
  endtask

  initial begin
    real t1, t2, t3, x, y, z;
    real a1, a2, a3;
    int  gap;
    v = '0; g_obj = '0; hcoef = '0; g_theta = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      sample = 1;
      t1 = urand(-1.2, 1.2); t2 = urand(0.0, 1.2); t3 = t2 + urand(-1.2, 1.2);
      fk_ref(t1, t2, t3, x, y, z);
      v.x = r2f(x); v.y = r2f(y); v.z = r2f(z);
      g_theta.t1 = r2f(urand(-1.6, 1.6)); g_theta.t2 = r2f(urand(-1.6, 1.6)); g_theta.t3 = r2f(urand(-1.6, 1.6));
      g_obj.x = r2f(urand(-0.3, 0.3)); g_obj.y = r2f(urand(-0.3, 0.3)); g_obj.z = r2f(urand(-0.3, 0.3));
      hcoef.x = r2f(urand(0.0, 300.0)); hcoef.y = r2f(urand(0.0, 300.0)); hcoef.z = r2f(urand(0.0, 300.0));
      tick();
      checks++;
      if (!theta_ref_valid || !l_valid) failures++;
      chk(theta_ref.t1, t1, 3e-2, "theta_ref.t1");
      chk(theta_ref.t2, t2, 3e-2, "theta_ref.t2");
      chk(theta_ref.t3, t3, 3e-2, "theta_ref.t3");
      fk_ref(f2r(g_theta.t1), f2r(g_theta.t2), f2r(g_theta.t3), a1, a2, a3);
      chk(l.x, a1, 5e-4, "l.x"); chk(l.y, a2, 5e-4, "l.y"); chk(l.z, a3, 5e-4, "l.z");
      // idle clocks between samples (none in half of the cases)
      gap = ($urandom_range(0, 1) == 0) ? 0 : int'($urandom_range(1, 3));
      if (gap > 0) begin
        @(negedge clk);
        sample = 0;
        repeat (gap) begin
          tick();
          checks++;
          if (theta_ref_valid || l_valid) failures++;
        end
      end
    end
    @(negedge clk);
    sample = 0;
    tick();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
