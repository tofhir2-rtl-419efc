`timescale 1ns/1ps
// tofhir2_top -- digital part of the TOFHIR2 32-channel readout chip.
//
// Each channel turns its three discriminator outputs into events: a T2-gated
// T1 edge starts a TAC, E validates the event, and the TAC and QAC values of
// valid events are digitised by the channel's ADC. Channels are grouped by
// four; each group's trigger buffer holds events in an L0 filter and then an
// L1 filter, which look up the external L0/L1 trigger decisions by the
// event's coarse time tag. L0-accepted events go to the secondary link and
// L1-accepted ones to the primary link (link use is configurable). The
// 160 MHz time tag counts cycles since the last Resync, whose length selects
// time-tag reset, event-chain clear or full reset. Configuration arrives on
// an 80 Mb/s 8b/10b multi-drop line addressed by chip ID and is held in a
// triplicated register file; replies go out on the primary link.
//
// Interface: discriminator outputs and energy-current samples per channel
// (from the analog front end, not modelled here), the 160 MHz clock, Resync,
// the 80 Mb/s trigger line, the 80 Mb/s configuration line, the test pulse
// input and the static chip ID / RX alignment pins. Outputs are the two
// links as two bits per clock (DDR), the configuration codes for the analog
// front end and the ALDO2 bias DACs, and the analog test pulse.
module tofhir2_top
  import tofhir2_pkg::*;
#(
  parameter int unsigned NCH       = N_CH,
  parameter int unsigned GROUP     = 4,
  parameter int unsigned L0_DEPTH  = 64,
  parameter int unsigned L1_DEPTH  = 256,
  parameter int unsigned MEM_DEPTH = 1024,
  parameter int unsigned REFRESH   = REFRESH_CYCLES
) (
  input  logic                      clk,          // 160 MHz
  input  logic                      rst_n,        // power-on reset
  input  logic                      resync,
  input  logic                      trig_in,      // 80 Mb/s L0/L1 bitstream
  input  logic                      cfg_in,       // 80 Mb/s configuration line
  input  logic                      tp_in,        // test pulse or test-pulse clock
  input  logic [4:0]                chip_id,
  input  logic                      rx_align_mode,
  input  logic [NCH-1:0]            do_t1,        // delayed T1 discriminators
  input  logic [NCH-1:0]            do_t2,
  input  logic [NCH-1:0]            do_e,
  input  logic [NCH-1:0][9:0]       e_current,
  output logic [1:0]                tx_pri,       // {rising, falling} bit per clock
  output logic [1:0]                tx_sec,
  output logic [NCH-1:0][REG_W-1:0] ch_cfg_o,     // analog settings per channel
  output logic [7:0]                aldo_dac_a,
  output logic                      aldo_rng_a,
  output logic [7:0]                aldo_dac_b,
  output logic                      aldo_rng_b,
  output logic                      aldo_en,
  output logic                      aldo_mon_rng,
  output logic [5:0]                mon_sel,
  output logic                      tp_analog
);
  localparam int unsigned NG = NCH / GROUP;

  // ---------------- time tag, resync, reset ----------------
  logic [TC_W-1:0] tcoarse;
  logic            clear_chain, full_reset, clear;
  logic            cfg_rst_n;

  timetag #(.TC_W(TC_W)) u_tt (.clk, .rst_n, .resync, .tcoarse, .clear_chain, .full_reset);
  assign clear     = clear_chain | full_reset;
  assign cfg_rst_n = rst_n & ~full_reset;

  // ---------------- configuration ----------------
  logic                      cfg_we;
  logic [5:0]                cfg_addr;
  logic [REG_W-1:0]          cfg_wdata, cfg_rdata;
  logic [N_REGS-1:0][REG_W-1:0] regs;
  logic [15:0]               seu_count;
  logic                      mismatch;
  logic                      rp_valid, rp_ready;
  logic [31:0]               rp_data;
  logic                      rx_aligned, rx_err;
  glb0_t                     g0;
  glb1_t                     g1;
  glb2_t                     g2;

  cfg_rx u_cfg_rx (
    .clk, .rst_n, .rx(cfg_in), .chip_id, .align_mode(rx_align_mode),
    .we(cfg_we), .addr(cfg_addr), .wdata(cfg_wdata), .rdata(cfg_rdata), .seu_count,
    .rp_valid, .rp_ready, .rp_data, .aligned(rx_aligned), .code_err(rx_err)
  );

  tmr_cfg u_cfg (
    .clk, .rst_n(cfg_rst_n), .we(cfg_we), .waddr(cfg_addr), .wdata(cfg_wdata),
    .raddr(cfg_addr), .rdata(cfg_rdata), .regs, .seu_count, .mismatch,
    .inj_en(1'b0), .inj_copy(2'd0), .inj_reg(6'd0), .inj_bit('0)
  );

  assign g0 = glb0_t'(regs[N_CH]);
  assign g1 = glb1_t'(regs[N_CH+1]);
  assign g2 = glb2_t'(regs[N_CH+2]);

  assign aldo_dac_a   = g2.aldo_dac_a;
  assign aldo_rng_a   = g2.aldo_rng_a;
  assign aldo_dac_b   = g2.aldo_dac_b;
  assign aldo_rng_b   = g2.aldo_rng_b;
  assign aldo_en      = g2.aldo_en;
  assign aldo_mon_rng = g2.aldo_mon_rng;
  assign mon_sel      = g2.mon_sel;

  // ---------------- test pulse ----------------
  logic tp_digital;
  test_pulse_gen u_tp (
    .rst_n, .tp_in, .tp_internal(g1.tp_internal), .tp_target(g1.tp_target),
    .period(g1.tp_period), .length(g1.tp_length), .tp_digital, .tp_analog
  );

  // ---------------- trigger input ----------------
  logic             trig_stb, l0_bit, l1_bit;
  logic [BIN_W-1:0] trig_bin;
  trig_rx #(.TC_W(TC_W)) u_trig (.clk, .rst_n, .trig_in, .tcoarse, .stb(trig_stb), .l0(l0_bit), .l1(l1_bit), .bin(trig_bin));

  // ---------------- channels ----------------
  logic [NCH-1:0]       ch_valid, ch_ready;
  logic [NCH-1:0][31:0] ch_data;
  logic [NCH-1:0][3:0]  ch_stat;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    assign ch_cfg_o[c] = regs[c];
    channel #(.REFRESH(REFRESH)) u_ch (
      .clk, .rst_n, .clear, .ch_id(5'(c)), .cfg(ch_cfg_t'(regs[c])), .cnt_period(g0.cnt_period),
      .tcoarse, .do_t1(do_t1[c]), .do_t2(do_t2[c]), .do_e(do_e[c]), .tp(tp_digital),
      .e_current(e_current[c]),
      .out_valid(ch_valid[c]), .out_ready(ch_ready[c]), .out_data(ch_data[c]), .stat(ch_stat[c])
    );
  end

  // ---------------- trigger buffers ----------------
  logic [NG-1:0]       g0_valid, g0_ready, g1_valid, g1_ready;
  logic [NG-1:0][31:0] g0_data, g1_data;
  logic [NG-1:0][2:0]  l0_stat, l1_stat;

  for (genvar g = 0; g < NG; g++) begin : g_grp
    trigger_buffer #(.N_IN(GROUP), .L0_DEPTH(L0_DEPTH), .L1_DEPTH(L1_DEPTH), .MEM_DEPTH(MEM_DEPTH)) u_tb (
      .clk, .rst_n, .clear, .trig_stb, .l0_bit, .l1_bit, .trig_bin, .bin_now(tcoarse[TC_W-1:2]),
      .l0_latency(g0.l0_latency), .l1_latency(g0.l1_latency),
      .in_valid(ch_valid[g*GROUP +: GROUP]), .in_ready(ch_ready[g*GROUP +: GROUP]),
      .in_data(ch_data[g*GROUP +: GROUP]),
      .l0_valid(g0_valid[g]), .l0_ready(g0_ready[g]), .l0_data(g0_data[g]),
      .l1_valid(g1_valid[g]), .l1_ready(g1_ready[g]), .l1_data(g1_data[g]),
      .l0_stat(l0_stat[g]), .l1_stat(l1_stat[g])
    );
  end

  logic        l0_valid, l0_ready, l1_valid, l1_ready;
  logic [31:0] l0_data, l1_data;

  frame_arbiter #(.N(NG)) u_l0_merge (
    .clk, .rst_n, .in_valid(g0_valid), .in_ready(g0_ready), .in_data(g0_data),
    .out_valid(l0_valid), .out_ready(l0_ready), .out_data(l0_data)
  );
  frame_arbiter #(.N(NG)) u_l1_merge (
    .clk, .rst_n, .in_valid(g1_valid), .in_ready(g1_ready), .in_data(g1_data),
    .out_valid(l1_valid), .out_ready(l1_ready), .out_data(l1_data)
  );

  // ---------------- links ----------------
  logic        pri_valid, pri_ready, sec_valid, sec_ready;
  logic [31:0] pri_data, sec_data;
  logic        pri_sof, sec_sof;

  link_mux u_mux (
    .clk, .rst_n, .mode(g0.link_mode),
    .l0_valid, .l0_ready, .l0_data, .l1_valid, .l1_ready, .l1_data,
    .rp_valid, .rp_ready, .rp_data,
    .pri_valid, .pri_ready, .pri_data, .sec_valid, .sec_ready, .sec_data
  );

  tx_link u_pri (.clk, .rst_n, .in_valid(pri_valid), .in_ready(pri_ready), .in_data(pri_data), .dq(tx_pri), .frame_start(pri_sof));
  tx_link u_sec (.clk, .rst_n, .in_valid(sec_valid), .in_ready(sec_ready), .in_data(sec_data), .dq(tx_sec), .frame_start(sec_sof));
endmodule
