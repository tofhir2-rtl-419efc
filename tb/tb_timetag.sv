`timescale 1ns/1ps
// tb_timetag -- checks the coarse time tag and the Resync length decoding.
// A reference counter runs beside the DUT; Resync pulses of random length
// (1..24 cycles) are applied and the bench checks that the tag restarts at
// 0 in the cycle after Resync falls, and that clear_chain / full_reset pulse
// for exactly one cycle when the length reaches 4 / 16 cycles.
module tb_timetag;
  logic clk = 0, rst_n = 0, resync = 0;
  logic [15:0] tcoarse;
  logic clear_chain, full_reset;
  timetag dut (.clk, .rst_n, .resync, .tcoarse, .clear_chain, .full_reset);
  always #3.125 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  logic [15:0] ref_tc = 0;
  int len = 0, exp_cc = 0, exp_fr = 0, n_cc = 0, n_fr = 0;
  logic rs_q = 0;
  always @(posedge clk) if (rst_n) begin
    // compare before updating the reference
    check(tcoarse == ref_tc, $sformatf("tcoarse %0d want %0d", tcoarse, ref_tc));
    check(clear_chain == (exp_cc == 1), "clear_chain");
    check(full_reset == (exp_fr == 1), "full_reset");
    n_cc += clear_chain; n_fr += full_reset;
    exp_cc = 0; exp_fr = 0;
    if (rs_q && !resync) begin
      ref_tc <= 16'd0;
      exp_cc = (len >= 4);
      exp_fr = (len >= 16);
    end else ref_tc <= ref_tc + 16'd1;
    len = resync ? len + 1 : 0;
    rs_q <= resync;
  end
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (70000) @(negedge clk);                // let the tag wrap
    for (int i = 0; i < 300; i++) begin
      repeat ($urandom_range(1, 40)) @(negedge clk);
      resync = 1;
      repeat ((i < 24) ? i + 1 : $urandom_range(1, 24)) @(negedge clk);
      resync = 0;
    end
    repeat (10) @(negedge clk);
    check(n_cc > 0 && n_fr > 0, "both long actions seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
