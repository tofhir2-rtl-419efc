`timescale 1ns/1ps
// dec8b10b -- registered 8b/10b decoder.
//
// A symbol presented with 'in_valid' is decoded by table inversion and
// appears one cycle later on data/k with 'out_valid'. 'err' flags a 6b or 4b
// sub-block that is not a code word; running disparity is not checked.
module dec8b10b
  import code8b10b_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [9:0] sym,       // 'a' in bit 9
  output logic       out_valid,
  output logic [7:0] data,
  output logic       k,
  output logic       err
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0;
      data      <= '0;
      k         <= 1'b0;
      err       <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) {data, k, err} <= decode(sym);
    end
endmodule
