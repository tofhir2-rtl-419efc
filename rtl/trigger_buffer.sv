`timescale 1ns/1ps
// trigger_buffer -- trigger buffer of one group of N_IN channels.
//
// The channels' frame streams are merged round-robin into the L0 filter. The
// L0 filter sends every frame on to the L1 filter and the L0-accepted ones to
// its link output; the L1 filter sends the L1-accepted ones to its link
// output and discards the rest. Groups of four channels sharing one trigger
// buffer with an L0 and an L1 stage follow the chip's block diagram; the
// arbitration policy is this design's.
module trigger_buffer
  import tofhir2_pkg::*;
#(
  parameter int unsigned N_IN     = 4,
  parameter int unsigned L0_DEPTH = 64,
  parameter int unsigned L1_DEPTH = 256,
  parameter int unsigned MEM_DEPTH = 1024
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  trig_stb,
  input  logic                  l0_bit,
  input  logic                  l1_bit,
  input  logic [BIN_W-1:0]      trig_bin,
  input  logic [BIN_W-1:0]      bin_now,
  input  logic [BIN_W-1:0]      l0_latency,
  input  logic [BIN_W-1:0]      l1_latency,
  input  logic [N_IN-1:0]       in_valid,
  output logic [N_IN-1:0]       in_ready,
  input  logic [N_IN-1:0][31:0] in_data,
  output logic                  l0_valid,
  input  logic                  l0_ready,
  output logic [31:0]           l0_data,
  output logic                  l1_valid,
  input  logic                  l1_ready,
  output logic [31:0]           l1_data,
  output logic [2:0]            l0_stat,    // {expired, reject, accept} strobes
  output logic [2:0]            l1_stat
);
  logic        a_valid, a_ready;
  logic [31:0] a_data;
  logic        n_valid, n_ready;
  logic [31:0] n_data;
  logic        d_valid;
  logic [31:0] d_data;

  frame_arbiter #(.N(N_IN)) u_arb (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(a_valid), .out_ready(a_ready), .out_data(a_data)
  );

  trigger_filter #(.FIFO_DEPTH(L0_DEPTH), .MEM_DEPTH(MEM_DEPTH)) u_l0 (
    .clk, .rst_n, .clear, .trig_stb, .trig_bit(l0_bit), .trig_bin, .bin_now, .latency(l0_latency),
    .in_valid(a_valid), .in_ready(a_ready), .in_data(a_data),
    .next_valid(n_valid), .next_ready(n_ready), .next_data(n_data),
    .link_valid(l0_valid), .link_ready(l0_ready), .link_data(l0_data),
    .ev_accept(l0_stat[0]), .ev_reject(l0_stat[1]), .ev_expired(l0_stat[2])
  );

  trigger_filter #(.FIFO_DEPTH(L1_DEPTH), .MEM_DEPTH(MEM_DEPTH)) u_l1 (
    .clk, .rst_n, .clear, .trig_stb, .trig_bit(l1_bit), .trig_bin, .bin_now, .latency(l1_latency),
    .in_valid(n_valid), .in_ready(n_ready), .in_data(n_data),
    .next_valid(d_valid), .next_ready(1'b1), .next_data(d_data),
    .link_valid(l1_valid), .link_ready(l1_ready), .link_data(l1_data),
    .ev_accept(l1_stat[0]), .ev_reject(l1_stat[1]), .ev_expired(l1_stat[2])
  );
endmodule
