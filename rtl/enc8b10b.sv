`timescale 1ns/1ps
// enc8b10b -- 8b/10b encoder with running-disparity state.
//
// The symbol for (k, d) is produced combinationally from the running
// disparity held in this block; 'en' marks the cycle in which the symbol is
// taken, and only then does the running disparity advance. Reset puts the
// disparity at RD-. Only K28.y control characters are encodable. The output
// links of the chip are 8b/10b coded; the code itself is the standard one.
module enc8b10b
  import code8b10b_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,      // symbol consumed this cycle
  input  logic       k,       // control character (K28.y, y = d[7:5])
  input  logic [7:0] d,
  output logic [9:0] code,    // abcdei_fghj, 'a' in bit 9
  output logic       rd       // running disparity before this symbol (1 = RD+)
);
  enc_t e;
  always_comb begin
    e    = encode(d, k, rd);
    code = e.code;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  rd <= 1'b0;
    else if (en) rd <= e.rd;
endmodule
