`timescale 1ns/1ps
// link_mux -- assigns the L0, L1 and command-reply frame streams to the two
// output links according to the link mode.
//
//   LINK_L1_L0     primary: L1 frames and replies; secondary: L0 frames
//   LINK_L1_BACKUP primary: replies only; secondary: L1 frames (primary link
//                  out of order); L0 frames are discarded
//   LINK_L1_BOTH   L1 frames alternate between the two links, replies go on
//                  primary; L0 frames are discarded
// Replies share the primary link through a round-robin frame arbiter. The
// three uses of the links follow the chip; the mode encoding is this design's.
module link_mux
  import tofhir2_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  link_mode_e  mode,
  input  logic        l0_valid,
  output logic        l0_ready,
  input  logic [31:0] l0_data,
  input  logic        l1_valid,
  output logic        l1_ready,
  input  logic [31:0] l1_data,
  input  logic        rp_valid,
  output logic        rp_ready,
  input  logic [31:0] rp_data,
  output logic        pri_valid,
  input  logic        pri_ready,
  output logic [31:0] pri_data,
  output logic        sec_valid,
  input  logic        sec_ready,
  output logic [31:0] sec_data
);
  logic       l1_to_pri;     // destination of the current L1 frame
  logic       alt;           // LINK_L1_BOTH: next L1 frame goes to secondary
  logic       l1_second;     // second word of an L1 frame
  logic       p_l1_valid, p_l1_ready;
  logic [1:0] arb_ready;

  always_comb begin
    unique case (mode)
      LINK_L1_L0:     l1_to_pri = 1'b1;
      LINK_L1_BACKUP: l1_to_pri = 1'b0;
      default:        l1_to_pri = !alt;
    endcase
  end

  assign p_l1_valid = l1_valid && l1_to_pri;

  frame_arbiter #(.N(2)) u_pri (
    .clk, .rst_n,
    .in_valid({rp_valid, p_l1_valid}), .in_ready(arb_ready), .in_data({rp_data, l1_data}),
    .out_valid(pri_valid), .out_ready(pri_ready), .out_data(pri_data)
  );
  assign p_l1_ready = arb_ready[0];
  assign rp_ready   = arb_ready[1];

  always_comb begin
    if (mode == LINK_L1_L0) begin
      sec_valid = l0_valid;
      sec_data  = l0_data;
      l0_ready  = sec_ready;
      l1_ready  = p_l1_ready;
    end else begin
      sec_valid = l1_valid && !l1_to_pri;
      sec_data  = l1_data;
      l0_ready  = 1'b1;                       // L0 frames are discarded
      l1_ready  = l1_to_pri ? p_l1_ready : sec_ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      alt <= 1'b0; l1_second <= 1'b0;
    end else if (l1_valid && l1_ready) begin
      l1_second <= !l1_second;
      if (l1_second && mode == LINK_L1_BOTH) alt <= !alt;
    end
endmodule
