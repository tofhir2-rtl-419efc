`timescale 1ns/1ps
// tofhir2_pkg -- types and constants shared by the TOFHIR2 readout logic.
//
// The chip clock is 160 MHz; one LHC bunch-crossing bin of 25 ns is four
// clock cycles. An event leaves a channel as a frame of two 32-bit words
// (the 32-bit event bus between the trigger filter stages) and is sent on an
// 8b/10b link one byte at a time. Widths of the coarse time tag, the frame
// layout and the configuration field positions are this design's choices:
// the chip's own numbers are not published.
package tofhir2_pkg;

  localparam int unsigned N_CH       = 32;     // channels per chip
  localparam int unsigned N_BUF      = 8;      // TAC/QAC analog buffer sets
  localparam int unsigned ADC_W      = 10;     // SAR ADC resolution
  localparam int unsigned TC_W       = 16;     // coarse time tag width (160 MHz cycles)
  localparam int unsigned BIN_W      = TC_W - 2; // 25 ns bin number width
  localparam int unsigned CNT_W      = 24;     // channel event counter
  localparam int unsigned REG_W      = 64;     // width of one configuration register
  localparam int unsigned N_GLOBAL   = 3;      // global configuration registers
  localparam int unsigned N_REGS     = N_CH + N_GLOBAL; // 35 registers
  localparam int unsigned REFRESH_CYCLES = 16000; // 100 us at 160 MHz

  // 8b/10b control characters (byte value of the K code)
  localparam logic [7:0] K28_5 = 8'hBC;  // comma, link idle
  localparam logic [7:0] K28_1 = 8'h3C;  // start of event frame
  localparam logic [7:0] K28_2 = 8'h5C;  // start of counter frame
  localparam logic [7:0] K28_3 = 8'h7C;  // start of command-reply frame
  localparam logic [7:0] K28_0 = 8'h1C;  // start of a configuration command

  // Frame type carried in word 0
  typedef enum logic [1:0] {
    FT_EVENT   = 2'd0,
    FT_COUNTER = 2'd1,
    FT_REPLY   = 2'd2
  } frame_type_e;

  // Word 0 of a frame: channel, buffer set, type, T2-T1 coarse difference,
  // coarse time tag of the T1 trigger.
  typedef struct packed {
    logic [4:0]  ch;
    logic [2:0]  buf_id;
    frame_type_e ftype;
    logic [5:0]  dcoarse;
    logic [TC_W-1:0] tcoarse;
  } word0_t;

  // Word 1 of an event frame: the three digitised analog values.
  typedef struct packed {
    logic [ADC_W-1:0] tfine1;
    logic [ADC_W-1:0] tfine2;
    logic [ADC_W-1:0] qfine;
    logic [1:0]       flags;   // [1] TAC2 edge seen, [0] three-measurement mode
  } word1_t;

  typedef struct packed {
    word0_t w0;
    word1_t w1;
  } frame_t;

  // Which edge starts TAC2
  typedef enum logic [1:0] {
    TAC2_T1_RISE = 2'd0,
    TAC2_T1_FALL = 2'd1,
    TAC2_T2_RISE = 2'd2,
    TAC2_T2_FALL = 2'd3
  } tac2_edge_e;

  // Event counter source
  typedef enum logic [1:0] {
    CNT_T1       = 2'd0,   // every T1 crossing: threshold scans, noise
    CNT_LOW_E    = 2'd1,   // T2 fired but E did not: low-energy hits
    CNT_LOST     = 2'd2,   // triggers missed because no buffer set was free
    CNT_VALID    = 2'd3    // valid events
  } cnt_mode_e;

  // Per-channel configuration register (REG_W bits)
  typedef struct packed {
    logic [5:0]  spare;
    logic        enable;       // channel takes part in readout
    logic        tp_enable;    // internal test pulse drives this channel's trigger logic
    logic        three_meas;   // digitise TAC1, TAC2 and QAC (else TAC1 and QAC)
    tac2_edge_e  tac2_edge;
    logic [3:0]  win;          // trigger window in clock cycles (E check, QAC integration)
    logic        cnt_enable;
    cnt_mode_e   cnt_mode;
    logic [5:0]  qac_base;     // QAC baseline cancellation current DAC (80 nA LSB)
    logic [2:0]  e_gain;       // energy branch attenuator, (gain+2)/8
    logic [4:0]  trim_e;       // DLED pulse-shape trim DAC, energy branch
    logic [4:0]  trim_t;       // DLED pulse-shape trim DAC, timing branch
    logic [2:0]  delay_tap;    // DLED delay line tap (8 taps, 200-1400 ps)
    logic [1:0]  th_e_rng;     // E threshold DAC LSB range
    logic [5:0]  th_e;
    logic [1:0]  th_t2_rng;    // T2 threshold DAC LSB range
    logic [5:0]  th_t2;
    logic [1:0]  th_t1_rng;    // T1 threshold DAC LSB range
    logic [5:0]  th_t1;
  } ch_cfg_t;

  typedef enum logic [1:0] {
    LINK_L1_L0     = 2'd0,     // primary: L1 + replies, secondary: L0
    LINK_L1_BACKUP = 2'd1,     // primary: replies only, secondary: L1
    LINK_L1_BOTH   = 2'd2      // L1 frames alternate on both links
  } link_mode_e;

  // Global register 0: trigger filtering and readout
  typedef struct packed {
    logic [28:0]      spare;
    logic [4:0]       cnt_period; // counter frame every 2^cnt_period cycles
    link_mode_e       link_mode;
    logic [BIN_W-1:0] l1_latency; // in 25 ns bins
    logic [BIN_W-1:0] l0_latency; // in 25 ns bins
  } glb0_t;

  // Global register 1: test pulse
  typedef struct packed {
    logic [37:0] spare;
    logic [7:0]  tp_length;    // pulse length in test-pulse-clock cycles
    logic [15:0] tp_period;    // pulse period in test-pulse-clock cycles
    logic        tp_target;    // 0: channel trigger logic, 1: analog injection into the pre-amplifier
    logic        tp_internal;  // 0: pass the external pulse, 1: internal generator
  } glb1_t;

  // Global register 2: service block and ALDO2 control
  typedef struct packed {
    logic [37:0] spare;
    logic [5:0]  mon_sel;      // analog monitor multiplexer
    logic        aldo_mon_rng; // ALDO2 bias-current monitor range
    logic        aldo_en;      // ALDO2 bias enable
    logic        aldo_rng_b;   // DAC B range: 0 high (0.74-0.98 V), 1 low (0.82-0.94 V)
    logic [7:0]  aldo_dac_b;
    logic        aldo_rng_a;
    logic [7:0]  aldo_dac_a;
  } glb2_t;


  function automatic logic [REG_W-1:0] glb0_default();
    glb0_t g;
    g = '0;
    g.l0_latency = BIN_W'(40);
    g.l1_latency = BIN_W'(485);   // 12.125 us
    g.cnt_period = 5'd16;
    return REG_W'(g);
  endfunction

  function automatic logic [REG_W-1:0] ch_cfg_default();
    ch_cfg_t c;
    c = '0;
    c.enable     = 1'b1;
    c.three_meas = 1'b1;
    c.tac2_edge  = TAC2_T1_FALL;
    c.win        = 4'd4;       // 25 ns
    c.cnt_mode   = CNT_LOW_E;
    c.delay_tap  = 3'd3;
    c.e_gain     = 3'd2;
    c.th_t1      = 6'd20;
    c.th_t2      = 6'd20;
    c.th_e       = 6'd20;
    return REG_W'(c);
  endfunction

endpackage
