`timescale 1ns/1ps
// tb_ddr_tx -- random 10-bit symbols are offered to the serialiser; the
// bench records each symbol taken on a 'load' cycle and checks that the
// following five cycles put exactly its ten bits on dq, bit 9 first, two per
// cycle (rising-edge bit dq[1] before falling-edge bit dq[0]), and that a
// load happens every fifth cycle.
module tb_ddr_tx;
  logic clk = 0, rst_n = 0;
  logic [9:0] sym = 0;
  logic load;
  logic [1:0] dq;
  ddr_tx dut (.clk, .rst_n, .sym, .load, .dq);
  always #3.125 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  logic [9:0] q [$];
  logic [9:0] cur;
  int pos = -1, since = 0, nsym = 0, nload = 0;
  always @(negedge clk) sym <= 10'($urandom);
  always @(posedge clk) if (rst_n) begin
    // dq shows the current shift register before this edge updates it
    if (pos >= 0) begin
      check(dq == cur[9 - 2*pos -: 2], $sformatf("symbol %b bit pair %0d", cur, pos));
      pos++;
      if (pos == 5) begin pos = -1; nsym++; end
    end
    if (load) begin
      check(since == 4 || nload == 0, $sformatf("load spacing %0d", since));
      check(pos < 0, "new symbol only after all ten bits of the last one");
      nload++;
      since = 0;
      cur   = sym;
      pos   = 0;
    end else since++;
  end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (5000) @(negedge clk);
    check(nsym > 900, "symbols sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
