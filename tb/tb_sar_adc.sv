`timescale 1ns/1ps
// tb_sar_adc -- converts every code's mid-point and exact level, then random
// input levels (including below 0 and above
// full scale) and checks the code (floor of the input, clipped to 0..1023),
// the four-cycle conversion time, the one-cycle 'done' and that a start
// while busy is ignored.
module tb_sar_adc;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  real vin = 0.0;
  logic [9:0] code;
  sar_adc dut (.clk, .rst_n, .start, .vin, .busy, .done, .code);
  always #3.125 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      real v; int want, cyc;
      v = (n < 1024) ? real'(n) + 0.5 : (n < 2048) ? real'(n - 1024) : -20.0 + 0.013 * $urandom_range(0, 80000);
      want = (v < 0) ? 0 : (v >= 1023.0) ? 1023 : int'($floor(v));
      @(negedge clk); vin = v; start = 1;
      @(negedge clk); start = (n % 3 == 0); vin = 5.0;    // restart attempt while busy
      cyc = 1;
      while (!done) begin @(negedge clk); start = 0; cyc++; check(cyc < 10, "conversion ends"); if (cyc >= 10) break; end
      check(cyc == 4, $sformatf("conversion took %0d cycles", cyc));
      check(code == 10'(want), $sformatf("vin %f code %0d want %0d", v, code, want));
      @(negedge clk);
      check(!done && !busy, "done lasts one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
