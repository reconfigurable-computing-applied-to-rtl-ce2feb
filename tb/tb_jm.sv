// Self-checking testbench of jm: random joint angles in (-1.6, 1.6) rad; all
// nine Jacobian elements are compared with the double-precision equations
// (tolerance 5e-4, the sine/cosine error scaled by the arm lengths), and
// J21 must be exactly zero.
module tb_jm;
  import fp_ref_pkg::*;
  import tactile_pkg::*;

  joints_t   theta;
  jacobian_t j;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  jm dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(f32_t got, real expv, string what);
    checks++;
    if (rabs(f2r(got) - expv) > 5e-4) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %f expected %f", what, f2r(got), expv);
    end
  endtask

  initial begin
    real r[9];
    for (int i = 0; i < 3000; i++) begin
      theta.t1 = r2f(urand(-1.6, 1.6));
      theta.t2 = r2f(urand(-1.6, 1.6));
      theta.t3 = r2f(urand(-1.6, 1.6));
      #1;
      jm_ref(f2r(theta.t1), f2r(theta.t2), f2r(theta.t3), r);
      chk(j.j11, r[0], "J11"); chk(j.j12, r[1], "J12"); chk(j.j13, r[2], "J13");
      chk(j.j22, r[4], "J22"); chk(j.j23, r[5], "J23");
      chk(j.j31, r[6], "J31"); chk(j.j32, r[7], "J32"); chk(j.j33, r[8], "J33");
      checks++;
      if (j.j21 !== 32'h0) failures++;
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
