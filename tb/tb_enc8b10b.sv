`timescale 1ns/1ps
// tb_enc8b10b -- self-checking test of the 8b/10b encoder.
// Checks textbook code words for both running disparities, then a long
// random stream for symbol disparity (0 or +/-2), running-disparity
// bookkeeping, run length (at most 5 equal bits) and that the comma pattern
// appears only in control characters.
module tb_enc8b10b;
  logic clk = 0, rst_n = 0, en = 0, k = 0;
  logic [7:0] d = 0;
  logic [9:0] code;
  logic rd;
  int checks = 0, failures = 0;

  enc8b10b dut (.clk, .rst_n, .en, .k, .d, .code, .rd);
  always #3.125 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // known symbols: value, k, code for RD-, code for RD+
  task automatic known(input logic [7:0] v, input logic kk, input logic [9:0] cm, input logic [9:0] cp);
    rst_n = 0; @(negedge clk); rst_n = 1;
    d = v; k = kk; #0.1;
    check(code == cm, $sformatf("RD- code of %s%0d.%0d = %b, want %b", kk ? "K" : "D", v[4:0], v[7:5], code, cm));
    // force RD+ by sending K28.5 first (RD- K28.5 flips disparity)
    d = 8'hBC; k = 1; en = 1; @(negedge clk); en = 0;
    d = v; k = kk; #0.1;
    check(code == cp, $sformatf("RD+ code of %s%0d.%0d = %b, want %b", kk ? "K" : "D", v[4:0], v[7:5], code, cp));
  endtask

  int run, rdsum, disp, prev_bit;
  initial begin
    repeat (2) @(negedge clk);
    known(8'hBC, 1, 10'b0011111010, 10'b1100000101);   // K28.5
    known(8'h3C, 1, 10'b0011111001, 10'b1100000110);   // K28.1
    known(8'h1C, 1, 10'b0011110100, 10'b1100001011);   // K28.0
    known(8'h00, 0, 10'b1001110100, 10'b0110001011);   // D0.0
    known(8'hB5, 0, 10'b1010101010, 10'b1010101010);   // D21.5
    known(8'h03, 0, 10'b1100011011, 10'b1100010100);   // D3.0
    known(8'hF1, 0, 10'b1000110111, 10'b1000110001);   // D17.7: alternate only on RD-
    known(8'h4A, 0, 10'b0101010101, 10'b0101010101);   // D10.2
    // random stream
    rst_n = 0; @(negedge clk); rst_n = 1;
    rdsum = -1; run = 0; prev_bit = -1;
    for (int n = 0; n < 4000; n++) begin
      logic [9:0] c;
      if ($urandom_range(0, 15) == 0) begin k = 1; d = {3'($urandom_range(0, 5)) == 3'd4 ? 3'd5 : 3'($urandom_range(0, 3)), 5'd28}; end
      else begin k = 0; d = 8'($urandom); end
      #0.1;
      c = code;
      disp = 2 * $countones(c) - 10;
      check(disp == 0 || disp == 2 || disp == -2, $sformatf("symbol %b disparity %0d", c, disp));
      check((rd ? 1 : -1) == rdsum, "running disparity output");
      if (disp != 0) begin
        check((disp > 0) == (rdsum < 0), $sformatf("unbalanced symbol %b with wrong sign", c));
        rdsum = -rdsum;
      end
      for (int b = 9; b >= 0; b--) begin
        if (c[b] == prev_bit) run++; else run = 1;
        prev_bit = c[b];
        if (run > 5) begin check(0, $sformatf("run of %0d at symbol %0d", run, n)); run = 0; end
      end
      if (!k)
        check(c[9:3] != 7'b0011111 && c[9:3] != 7'b1100000, $sformatf("comma in data symbol %b", c));
      en = 1; @(negedge clk); en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
