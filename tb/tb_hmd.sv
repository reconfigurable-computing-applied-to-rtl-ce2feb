// Self-checking testbench of hmd (master-side hardware): random master
// angles b(n) and received forces q(n), a sample on a random subset of
// clocks. One clock after each sample c(n) must hold the forward kinematics
// of b(n) and p(n) the torques J(b(n))^T q(n), both against double-precision
// equations (5e-4, and 5e-4 per newton for the torques); both valid flags
// must follow the sample strobe by one clock.
module tb_hmd;
  import fp_ref_pkg::*;
  import tactile_pkg::*;

  logic clk = 0, rst_n = 0, sample = 0, c_valid, p_valid;
  joints_t b, p;
  vec3_t   q, c;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  hmd dut (.*);

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

  initial begin
    real r[9], x, y, z, t1, t2, t3, fm;
    b = '0; q = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      sample = ($urandom_range(0, 2) != 0);
      b.t1 = r2f(urand(-1.6, 1.6)); b.t2 = r2f(urand(-1.6, 1.6)); b.t3 = r2f(urand(-1.6, 1.6));
      q.x = r2f(urand(-5.0, 5.0)); q.y = r2f(urand(-5.0, 5.0)); q.z = r2f(urand(-5.0, 5.0));
      @(posedge clk); #1;
      checks++;
      if (c_valid !== sample || p_valid !== sample) failures++;
      if (sample) begin
        fk_ref(f2r(b.t1), f2r(b.t2), f2r(b.t3), x, y, z);
        chk(c.x, x, 5e-4, "c.x"); chk(c.y, y, 5e-4, "c.y"); chk(c.z, z, 5e-4, "c.z");
        jm_ref(f2r(b.t1), f2r(b.t2), f2r(b.t3), r);
        kff_ref(r, f2r(q.x), f2r(q.y), f2r(q.z), t1, t2, t3);
        fm = rabs(f2r(q.x)) + rabs(f2r(q.y)) + rabs(f2r(q.z));
        chk(p.t1, t1, 5e-4 * fm, "p.tau1"); chk(p.t2, t2, 5e-4 * fm, "p.tau2"); chk(p.t3, t3, 5e-4 * fm, "p.tau3");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
