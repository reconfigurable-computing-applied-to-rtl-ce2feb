// Self-checking testbench of f2fp: random F32 values inside and outside the
// [s16.13] range, compared with value * 2^13 rounded to nearest (half away
// from zero) and saturated at +/-32767; zero and tiny values give 0.
module tb_f2fp;
  import fp_ref_pkg::*;

  logic [31:0] f;
  logic signed [15:0] q;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  f2fp dut (.f(f), .q(q));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real r, s;
    int  e;
    int  sh;
    for (int i = 0; i < 20000; i++) begin
      sh = int'($urandom_range(0, 12));
      r  = (i % 10 == 0) ? urand(-6.0, 6.0) : urand(-1.0, 1.0) / real'(1 << sh);
      f = r2f(r);
      #1;
      s = f2r(f) * 8192.0;
      e = (s >= 0.0) ? $rtoi(s + 0.5) : -$rtoi(-s + 0.5);
      if (e > 32767) e = 32767;
      if (e < -32767) e = -32767;
      checks++;
      if (int'(q) != e) begin
        failures++;
        if (failures < 10) $display("FAIL f2fp(%h = %f) = %0d, expected %0d", f, f2r(f), q, e);
      end
      @(posedge clk);
    end
    f = 32'h0; #1; checks++; if (q != 0) failures++;
    f = 32'h3f80_0000; #1; checks++; if (q != 16'sd8192) failures++;
    f = 32'hc000_0000; #1; checks++; if (q != -16'sd16384) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
