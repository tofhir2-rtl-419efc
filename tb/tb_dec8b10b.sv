`timescale 1ns/1ps
// tb_dec8b10b -- self-checking test of the 8b/10b decoder.
// Textbook symbols must decode to their byte; every data byte and the K28.y
// characters used, encoded in both disparities by the encoder, must decode
// back; symbols that are not code words must raise err.
module tb_dec8b10b;
  import code8b10b_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [9:0] sym = 0;
  logic out_valid, k, err;
  logic [7:0] data;
  int checks = 0, failures = 0;

  dec8b10b dut (.clk, .rst_n, .in_valid, .sym, .out_valid, .data, .k, .err);
  always #3.125 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic dec(input logic [9:0] s, input logic [7:0] ed, input logic ek, input logic eerr);
    sym = s; in_valid = 1; @(negedge clk); in_valid = 0;
    check(out_valid, "out_valid");
    if (eerr) check(err, $sformatf("%b should be an error", s));
    else check(!err && data == ed && k == ek, $sformatf("%b -> %h k%0d err%0d, want %h k%0d", s, data, k, err, ed, ek));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    dec(10'b0011111010, 8'hBC, 1, 0);
    dec(10'b1100000101, 8'hBC, 1, 0);
    dec(10'b0011111001, 8'h3C, 1, 0);
    dec(10'b1100000110, 8'h3C, 1, 0);
    dec(10'b1001110100, 8'h00, 0, 0);
    dec(10'b0110001011, 8'h00, 0, 0);
    dec(10'b1010101010, 8'hB5, 0, 0);
    dec(10'b1000110111, 8'hF1, 0, 0);
    dec(10'b0000000000, 8'h00, 0, 1);
    dec(10'b1111111111, 8'h00, 0, 1);
    dec(10'b1111000000, 8'h00, 0, 1);
    for (int r = 0; r < 2; r++)
      for (int v = 0; v < 256; v++) begin
        enc_t e;
        e = encode(8'(v), 1'b0, r[0]);
        dec(e.code, 8'(v), 0, 0);
      end
    for (int r = 0; r < 2; r++)
      for (int y = 0; y < 8; y++) begin
        enc_t e;
        e = encode({3'(y), 5'd28}, 1'b1, r[0]);
        dec(e.code, {3'(y), 5'd28}, 1, 0);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
