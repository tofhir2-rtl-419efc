`timescale 1ns/1ps
// tx_link -- one 320 Mb/s output link: packer, 8b/10b encoder, DDR serialiser.
//
// Two-word frames enter on a valid/ready word stream and leave as 8b/10b
// characters at one character per five 160 MHz cycles (32 Mcharacter/s), two
// line bits per cycle on dq. A frame occupies nine characters, so one link
// carries at most 3.56 M frames/s.
module tx_link (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  output logic [1:0]  dq,
  output logic        frame_start
);
  logic       take;
  logic [7:0] b;
  logic       k;
  logic [9:0] sym;
  logic       rd_unused;

  pack u_pack (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .take, .byte_o(b), .k_o(k), .frame_start
  );
  enc8b10b u_enc (.clk, .rst_n, .en(take), .k, .d(b), .code(sym), .rd(rd_unused));
  ddr_tx   u_ser (.clk, .rst_n, .sym, .load(take), .dq);
endmodule
