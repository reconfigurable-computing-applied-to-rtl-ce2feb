// Self-checking testbench of fp2f: every one of the 65536 [s16.13] codes is
// converted and compared bit for bit with code / 2^13 encoded as F32 (the
// conversion is exact).
module tb_fp2f;
  import fp_ref_pkg::*;

  logic signed [15:0] q;
  logic [31:0] f;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fp2f dut (.q(q), .f(f));

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = -32768; i < 32768; i++) begin
      q = 16'(i);
      #1;
      checks++;
      if (f !== r2f(real'(i) / 8192.0)) begin
        failures++;
        if (failures < 10) $display("FAIL fp2f(%0d) = %h, expected %h", i, f, r2f(real'(i) / 8192.0));
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
