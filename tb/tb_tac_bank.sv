`timescale 1ns/1ps
// tb_tac_bank -- starts charging a random buffer at a random time inside a
// clock period and checks that the stored value equals the pedestal plus the
// time to the next rising clock edge in 10 ps bins, that the other buffers
// keep their values, and that a second start while charging is ignored.
module tb_tac_bank;
  logic clk = 0, start = 0;
  logic [2:0] sel = 0, rd_sel = 0;
  real vout;
  tac_bank dut (.clk, .start, .sel, .rd_sel, .vout);
  always #3.125 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  real want [8];
  initial begin
    for (int i = 0; i < 8; i++) want[i] = 0.0;
    repeat (3) @(posedge clk);
    for (int n = 0; n < 2000; n++) begin
      real d; int b;
      b = $urandom_range(0, 7);
      d = 0.05 + 0.001 * $urandom_range(0, 6000);   // ns after the rising edge
      @(posedge clk); #(d);
      sel = 3'(b); start = 1;
      if (n % 7 == 0) begin #0.02; start = 0; #0.01; sel = 3'(b + 1); start = 1; end  // ignored
      want[b] = 16.0 + (6.25 - d) * 100.0;
      @(posedge clk); #0.5; start = 0;
      for (int i = 0; i < 8; i++) begin
        rd_sel = 3'(i); #0.1;
        check(vout > want[i] - 0.5 && vout < want[i] + 0.5,
              $sformatf("buffer %0d holds %f want %f", i, vout, want[i]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
