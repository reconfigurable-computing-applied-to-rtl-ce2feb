// Self-checking testbench of ik (IK-HSD).
//
// Joint angles are drawn inside the arm's reachable set used here
// (t1 in (-1.2, 1.2), t2 in (0, 1.2), t3 - t2 in (-1.2, 1.2)), converted to a
// tool position with the forward equations in double precision, and the
// position is presented to the block, one sample per clock. The block must
// return the original angles within 3e-2 rad per sample (small vectors in
// the [s16.13] CORDIC are the coarsest step), with a mean squared error over
// all samples below 1e-5 rad^2 (the source reports 2.7e-6 to 3.7e-6), one clock later, and also agree with the inverse
// equations evaluated in double precision on the same F32 position. The
// valid flag must follow in_valid by one clock.
module tb_ik;
  import fp_ref_pkg::*;
  import tactile_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  vec3_t   pos;
  joints_t theta;
  int checks = 0, failures = 0;
  real se1 = 0.0, se2 = 0.0, se3 = 0.0;
  int  nse = 0;
  always #5 clk = ~clk;

  ik dut (.*);

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
    real t1, t2, t3, x, y, z, r1, r2, r3;
    pos = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      t1 = urand(-1.2, 1.2);
      t2 = urand(0.0, 1.2);
      t3 = t2 + urand(-1.2, 1.2);
      fk_ref(t1, t2, t3, x, y, z);
      pos.x = r2f(x); pos.y = r2f(y); pos.z = r2f(z);
      in_valid = 1;
      @(posedge clk); #1;
      checks++;
      if (!out_valid) begin
        failures++;
        $display("FAIL latency: no out_valid one clock after the sample");
      end
      chk(theta.t1, t1, 3e-2, "theta1 round trip");
      chk(theta.t2, t2, 3e-2, "theta2 round trip");
      chk(theta.t3, t3, 3e-2, "theta3 round trip");
      ik_ref(f2r(pos.x), f2r(pos.y), f2r(pos.z), r1, r2, r3);
      chk(theta.t1, r1, 3e-2, "theta1 equations");
      se1 += (f2r(theta.t1) - r1) ** 2;
      se2 += (f2r(theta.t2) - r2) ** 2;
      se3 += (f2r(theta.t3) - r3) ** 2;
      nse++;
    end
    @(negedge clk);
    in_valid = 0;
    @(posedge clk); #1;
    checks++; if (out_valid) failures++;
    checks++;
    if (se1 / nse > 1e-5 || se2 / nse > 1e-5 || se3 / nse > 1e-5) begin
      failures++;
      $display("FAIL: mean squared error above 1e-5");
    end
    $display("ik MSE: %e %e %e", se1 / nse, se2 / nse, se3 / nse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
