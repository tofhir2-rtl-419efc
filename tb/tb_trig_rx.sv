`timescale 1ns/1ps
// tb_trig_rx -- checks the 80 Mb/s trigger line receiver. Random L0 and L1
// bits are sent in the two half-bins of every 25 ns bin (L0 when the coarse
// tag is 1 mod 4, L1 when it is 3 mod 4); the bench checks that one strobe
// per bin delivers both bits with the number of the bin they arrived in.
module tb_trig_rx;
  logic clk = 0, rst_n = 0, trig_in = 0;
  logic [15:0] tc = 0;
  logic stb, l0, l1;
  logic [13:0] bin;
  trig_rx dut (.clk, .rst_n, .trig_in, .tcoarse(tc), .stb, .l0, .l1, .bin);
  always #3.125 clk = ~clk;
  int checks = 0, failures = 0, nstb = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  bit b0 [16384], b1 [16384];
  initial for (int i = 0; i < 16384; i++) begin b0[i] = 1'($urandom); b1[i] = 1'($urandom); end
  always @(posedge clk) if (rst_n) tc <= tc + 1;
  always @(negedge clk) begin
    if (tc[1:0] == 2'd1) trig_in <= b0[tc[15:2]];
    else if (tc[1:0] == 2'd3) trig_in <= b1[tc[15:2]];
    else trig_in <= 1'($urandom);               // the line is not looked at then
  end
  logic [15:0] tc_prev;
  always @(posedge clk) begin
    tc_prev <= tc;
    if (rst_n && tc > 8) begin
      check(stb == (tc_prev[1:0] == 2'd3 && tc > 4), "one strobe per bin");
      if (stb) begin
        nstb++;
        check(bin == tc_prev[15:2], $sformatf("bin %0d want %0d", bin, tc_prev[15:2]));
        check(l0 == b0[bin] && l1 == b1[bin], $sformatf("bits of bin %0d", bin));
      end
    end
  end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (20000) @(negedge clk);
    check(nstb > 4000, "strobes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
