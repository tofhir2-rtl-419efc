`timescale 1ns/1ps
// tb_qac_bank -- integrates a random current minus a random baseline for a
// random number of cycles into a random buffer and checks the stored value
// (clipped to 0..1023), with the other buffers unchanged.
module tb_qac_bank;
  logic clk = 0, integrate = 0;
  logic [2:0] sel = 0, rd_sel = 0;
  logic [9:0] i_in = 0;
  logic [5:0] base = 0;
  real vout;
  qac_bank dut (.clk, .integrate, .sel, .i_in, .base, .rd_sel, .vout);
  always #3.125 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  real want [8];
  initial begin
    for (int i = 0; i < 8; i++) want[i] = 0.0;
    repeat (3) @(negedge clk);
    for (int n = 0; n < 1000; n++) begin
      int b, nc, ii, bb;
      real v;
      b = $urandom_range(0, 7); nc = $urandom_range(1, 12);
      ii = (n % 5 == 0) ? $urandom_range(0, 1023) : $urandom_range(0, 200);
      bb = $urandom_range(0, 63);
      @(negedge clk); sel = 3'(b); i_in = 10'(ii); base = 6'(bb); integrate = 1;
      v = 0.0;
      for (int c = 0; c < nc; c++) begin
        v = v + ii - bb; if (v < 0) v = 0; if (v > 1023) v = 1023;
        @(negedge clk);
      end
      integrate = 0; want[b] = v;
      repeat (2) @(negedge clk);
      for (int i = 0; i < 8; i++) begin
        rd_sel = 3'(i); #0.1;
        check(vout == want[i], $sformatf("buffer %0d holds %f want %f", i, vout, want[i]));
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
