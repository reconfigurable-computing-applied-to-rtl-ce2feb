// Self-checking testbench of fbf (FBF-HSD): random object and tool positions
// and elasticity coefficients; each force must equal h_k (k_obj - k_env)
// rounded twice in F32 (relative 2^-22 of |h_k| (|k_obj| + |k_env|)), one
// clock after the sample, with out_valid following in_valid.
module tb_fbf;
  import fp_ref_pkg::*;
  import tactile_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  vec3_t p_obj, p_env, hcoef, force_out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fbf dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(f32_t got, f32_t o, f32_t e, f32_t h, string what);
    real expv, tol;
    expv = f2r(h) * (f2r(o) - f2r(e));
    tol  = rabs(f2r(h)) * (rabs(f2r(o)) + rabs(f2r(e))) * 2.4e-7;
    checks++;
    if (rabs(f2r(got) - expv) > tol) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %e expected %e", what, f2r(got), expv);
    end
  endtask

  initial begin
    p_obj = '0; p_env = '0; hcoef = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      p_obj.x = r2f(urand(-0.3, 0.3)); p_obj.y = r2f(urand(-0.3, 0.3)); p_obj.z = r2f(urand(-0.3, 0.3));
      p_env.x = r2f(urand(-0.3, 0.3)); p_env.y = r2f(urand(-0.3, 0.3)); p_env.z = r2f(urand(-0.3, 0.3));
      hcoef.x = r2f(urand(0.0, 500.0)); hcoef.y = r2f(urand(0.0, 500.0)); hcoef.z = r2f(urand(0.0, 500.0));
      @(posedge clk); #1;
      checks++;
      if (out_valid !== in_valid) failures++;
      if (in_valid) begin
        chk(force_out.x, p_obj.x, p_env.x, hcoef.x, "Fx");
        chk(force_out.y, p_obj.y, p_env.y, hcoef.y, "Fy");
        chk(force_out.z, p_obj.z, p_env.z, hcoef.z, "Fz");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
