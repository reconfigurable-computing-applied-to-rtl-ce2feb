// Self-checking testbench of tfb: one block of each function (sin, cos,
// atan2, acos) driven with random F32 arguments and compared with the real
// functions. Tolerance 1.5e-3 absolute (the [s16.13] CORDIC), for atan2 plus
// 3 LSB divided by the vector length, relaxed to
// 2e-2 for acos of |a| > 0.98 where the slope of acos grows without bound.
module tb_tfb;
  import fp_ref_pkg::*;
  import tactile_pkg::*;

  f32_t a, b, y_sin, y_cos, y_atan, y_acos, c;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  tfb #(.FUNC(TFB_SIN))   u_sin  (.a(a), .b(b), .y(y_sin));
  tfb #(.FUNC(TFB_COS))   u_cos  (.a(a), .b(b), .y(y_cos));
  tfb #(.FUNC(TFB_ATAN2)) u_atan (.a(a), .b(b), .y(y_atan));
  tfb #(.FUNC(TFB_ACOS))  u_acos (.a(c), .b(b), .y(y_acos));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
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
    real ra, rb, rc;
    for (int i = 0; i < 5000; i++) begin
      ra = urand(-3.5, 3.5);
      rb = urand(-1.0, 1.0);
      rc = urand(-1.0, 1.0);
      a = r2f(ra); b = r2f(rb); c = r2f(rc);
      #1;
      ra = f2r(a); rb = f2r(b); rc = f2r(c);
      chk(y_sin, $sin(ra), 1.5e-3, "sin");
      chk(y_cos, $cos(ra), 1.5e-3, "cos");
      if (rabs(ra) < 1.5)
        chk(y_atan, $atan2(ra, rb), 1.5e-3 + 3.0 / (8192.0 * $sqrt(ra * ra + rb * rb)), "atan2");
      chk(y_acos, $acos(rc), (rabs(rc) > 0.98) ? 2e-2 : 1.5e-3, "acos");
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
