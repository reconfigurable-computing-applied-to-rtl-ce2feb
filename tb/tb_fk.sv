// Self-checking testbench of fk (FK-HMD / FK-HSD).
//
// Random joint angles in (-1.6, 1.6) rad are presented with a random valid
// pattern (back-to-back samples included). Every clock the testbench checks
// that out_valid repeats in_valid one clock later and that the registered
// position matches the forward kinematic equations evaluated in double
// precision, within 5e-4 (the error of the [s16.13] sines and cosines
// scaled by the arm lengths). Also checks the rest position (0, 0, 0) ->
// (0, -0.110, -0.035) and that a cycle without in_valid holds the output.
module tb_fk;
  import fp_ref_pkg::*;
  import tactile_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  joints_t theta;
  vec3_t   pos;
  int checks = 0, failures = 0, samples = 0;
  always #5 clk = ~clk;

  fk dut (.*);

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
    real x, y, z;
    logic    prev_valid;
    joints_t prev_theta;
    vec3_t   held;
    theta = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // rest position
    in_valid = 1; theta = '0;
    @(posedge clk); #1;
    checks++; if (!out_valid) failures++;
    chk(pos.x, 0.0, 5e-4, "rest x");
    chk(pos.y, -0.110, 5e-4, "rest y");
    chk(pos.z, -0.035, 5e-4, "rest z");
    prev_valid = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      prev_valid = in_valid;
      prev_theta = theta;
      held       = pos;
      in_valid   = ($urandom_range(0, 3) != 0);
      theta.t1   = r2f(urand(-1.6, 1.6));
      theta.t2   = r2f(urand(-1.6, 1.6));
      theta.t3   = r2f(urand(-1.6, 1.6));
      @(posedge clk); #1;
      checks++;
      if (out_valid !== in_valid) begin
        failures++;
        $display("FAIL latency: out_valid %b one clock after in_valid %b", out_valid, in_valid);
      end
      if (in_valid) begin
        samples++;
        fk_ref(f2r(theta.t1), f2r(theta.t2), f2r(theta.t3), x, y, z);
        chk(pos.x, x, 5e-4, "x");
        chk(pos.y, y, 5e-4, "y");
        chk(pos.z, z, 5e-4, "z");
      end else begin
        checks++;
        if (pos !== held) failures++;
      end
    end
    $display("fk: %0d samples checked", samples);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
