// Self-checking testbench of cordic at [s16.13]: rotation mode over angles in
// all four quadrants (|z| < 3.9 rad) against $cos/$sin, vectoring mode over
// vectors in all quadrants against $atan2. Tolerance: 8 LSB (about 1e-3),
// the accumulated rounding of 16 iterations in 13 fractional bits, plus, in
// vectoring mode, 3 LSB of final residue divided by the vector length.
module tb_cordic;
  import fp_ref_pkg::*;

  logic vectoring;
  logic signed [15:0] x0, y0, z0, cos_o, sin_o, angle_o;
  int checks = 0, failures = 0;
  int folds = 0, lefthalf = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  cordic #(.V(16), .N(13), .ITER(16)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int q(real r);
    return (r >= 0.0) ? $rtoi(r * 8192.0 + 0.5) : -$rtoi(-r * 8192.0 + 0.5);
  endfunction

  int tol_extra = 0;

  task automatic chk(logic signed [15:0] got, real expv, string what);
    checks++;
    if ((int'(got) - q(expv)) > 8 + tol_extra || (int'(got) - q(expv)) < -8 - tol_extra) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, q(expv));
    end
  endtask

  initial begin
    real a, x, y;
    vectoring = 0; x0 = 0; y0 = 0;
    for (int i = 0; i < 5000; i++) begin
      a  = urand(-3.9, 3.9);
      z0 = 16'(q(a));
      if (a > PI / 2.0 || a < -PI / 2.0) folds++;
      #1;
      a = real'(z0) / 8192.0;
      chk(cos_o, $cos(a), "cos");
      chk(sin_o, $sin(a), "sin");
      @(posedge clk);
    end
    vectoring = 1; z0 = 0;
    for (int i = 0; i < 5000; i++) begin
      x  = urand(-1.5, 1.5);
      y  = urand(-1.5, 1.5);
      x0 = 16'(q(x));
      y0 = 16'(q(y));
      if (x < 0.0) lefthalf++;
      #1;
      // vectoring error grows as the vector shrinks: allow 3 LSB of residue / |v|
      tol_extra = $rtoi(3.0 * 8192.0 / $sqrt(real'(x0) * real'(x0) + real'(y0) * real'(y0) + 1.0));
      chk(angle_o, $atan2(real'(y0), real'(x0)), "atan2");
      @(posedge clk);
    end
    checks++;
    if (folds == 0 || lefthalf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
