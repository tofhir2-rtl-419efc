`timescale 1ns/1ps
// channel_trigger -- the channel's trigger generator (trigger logic CONTROL).
//
// Inputs are the three discriminator outputs: do_t1 (low threshold, after
// the analog delay), do_t2 (higher threshold) and do_e (energy branch), all
// asynchronous to the clock. When the channel is armed, the rising edge of
// the delayed T1 while T2 is high starts TAC1 of the current buffer set; the
// T1 delay lets T2 decide before the timing edge, so hits below T2 start
// nothing and cost no dead time. The clock edge that stops TAC1 is the
// trigger cycle: its time tag is the event's coarse time and the trigger
// window of cfg.win cycles begins (QAC integration, E check, TAC2). TAC2 is
// started by the configured edge (T1 or T2, rising or falling); its coarse
// time is kept as a difference to TAC1's. At the end of the window the event
// is valid if E fired: it is handed to the digitiser with its buffer set,
// which stays busy until digitised. Without E it is rejected, with win-1
// cycles of dead time (18.75 ns for the usual 25 ns window). Either way the
// channel re-arms on the next buffer set in round-robin order; if that set is
// still busy the channel waits, unarmed, and each T1-and-T2 hit in that time
// is counted as lost. After REFRESH_CYCLES armed cycles with no trigger
// (100 us) the channel re-arms on the next set to avoid leakage on the stored
// values. When cfg.tp_enable is set the digital test pulse acts as all three
// discriminators. The gating rules, the round-robin buffer use and the
// refresh follow the chip; cycle-level timing is this design's.
module channel_trigger
  import tofhir2_pkg::*;
#(
  parameter int unsigned NB      = N_BUF,
  parameter int unsigned REFRESH = REFRESH_CYCLES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  do_t1,
  input  logic                  do_t2,
  input  logic                  do_e,
  input  logic                  tp,
  input  ch_cfg_t               cfg,
  input  logic [TC_W-1:0]       tcoarse,
  input  logic [NB-1:0]         buf_busy,
  // analog control
  output logic                  tac1_start,
  output logic                  tac2_start,
  output logic [$clog2(NB)-1:0] buf_sel,
  output logic                  qac_int,
  // event to the digitiser
  output logic                  ev_valid,
  output logic [$clog2(NB)-1:0] ev_buf,
  output logic [TC_W-1:0]       ev_tcoarse,
  output logic [5:0]            ev_dcoarse,
  output logic                  ev_tac2,
  // monitoring strobes
  output logic                  st_t1,       // T1 crossing
  output logic                  st_lowe,     // T2 without E: rejected
  output logic                  st_lost,     // hit while no buffer set was free
  output logic                  st_refresh   // idle re-arm
);
  localparam int unsigned BW = $clog2(NB);
  typedef enum logic [1:0] {S_ARMED, S_WIN, S_REARM} state_e;

  state_e          st;
  logic            t1, t2, e;
  logic            armed;
  logic            tac2_got, tac2_now;
  logic [TC_W-1:0] tc1, tc2;
  logic            e_seen;
  logic [3:0]      wcnt;
  logic [15:0]     idle;
  logic            t1_q, hit_q;
  logic [BW-1:0]   nb;
  logic [3:0]      win_last;
  logic [BW-1:0]   ev_buf_cur;     // buffer set of the armed / current event

  assign t1 = do_t1 | (cfg.tp_enable & tp);
  assign t2 = do_t2 | (cfg.tp_enable & tp);
  assign e  = do_e  | (cfg.tp_enable & tp);

  assign armed      = (st == S_ARMED) && cfg.enable;
  assign tac1_start = armed && t1 && t2;
  always_comb begin
    unique case (cfg.tac2_edge)
      TAC2_T1_RISE: tac2_start = tac1_start;
      TAC2_T2_RISE: tac2_start = armed && t2 && !tac2_got;
      TAC2_T1_FALL: tac2_start = (st == S_WIN) && !tac2_got && !t1;
      default:      tac2_start = (st == S_WIN) && !tac2_got && !t2;
    endcase
  end
  assign tac2_now = tac2_got || tac2_start;
  assign buf_sel  = ev_buf_cur;
  assign qac_int  = (st == S_WIN) || tac1_start;   // integrate from the trigger cycle on
  assign nb       = ev_buf_cur + 1'b1;
  assign win_last = (cfg.win < 4'd2) ? 4'd1 : cfg.win - 4'd1;   // windows of at least 2 cycles


  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_ARMED; ev_buf_cur <= '0; tac2_got <= 1'b0; tc1 <= '0; tc2 <= '0;
      e_seen <= 1'b0; wcnt <= '0; idle <= '0; t1_q <= 1'b0; hit_q <= 1'b0;
      ev_valid <= 1'b0; ev_buf <= '0; ev_tcoarse <= '0; ev_dcoarse <= '0; ev_tac2 <= 1'b0;
      st_t1 <= 1'b0; st_lowe <= 1'b0; st_lost <= 1'b0; st_refresh <= 1'b0;
    end else if (clear) begin
      st <= S_ARMED; tac2_got <= 1'b0; idle <= '0; ev_valid <= 1'b0;
      st_t1 <= 1'b0; st_lowe <= 1'b0; st_lost <= 1'b0; st_refresh <= 1'b0;
    end else begin
      ev_valid   <= 1'b0;
      st_lowe    <= 1'b0;
      st_lost    <= 1'b0;
      st_refresh <= 1'b0;
      t1_q       <= t1;
      hit_q      <= t1 && t2;
      st_t1      <= t1 && !t1_q;
      if (tac2_start && !tac2_got) begin
        tac2_got <= 1'b1;
        tc2      <= tcoarse;
      end
      unique case (st)
        S_ARMED: begin
          if (!t2 && cfg.tac2_edge == TAC2_T2_RISE && !tac1_start) tac2_got <= 1'b0;
          if (tac1_start) begin
            tc1    <= tcoarse;
            e_seen <= e;
            wcnt   <= 4'd0;
            idle   <= '0;
            st     <= S_WIN;
          end else if (cfg.enable && 32'(idle) >= REFRESH - 1) begin
            idle       <= '0;
            st_refresh <= 1'b1;
            st         <= S_REARM;
          end else if (cfg.enable) idle <= idle + 16'd1;
        end
        S_WIN: begin
          e_seen <= e_seen | e;
          wcnt   <= wcnt + 4'd1;
          if (wcnt + 4'd1 >= win_last) begin
            if (e_seen || e) begin
              ev_valid   <= 1'b1;
              ev_buf     <= ev_buf_cur;
              ev_tcoarse <= tc1;
              ev_dcoarse <= 6'(tac2_start && !tac2_got ? tcoarse - tc1 : tc2 - tc1);
              ev_tac2    <= tac2_now;
            end else st_lowe <= 1'b1;
            if (!buf_busy[nb]) begin
              ev_buf_cur <= nb;
              tac2_got   <= 1'b0;
              st         <= S_ARMED;
            end else st <= S_REARM;
          end
        end
        default: begin   // S_REARM
          if (t1 && t2 && !hit_q) st_lost <= 1'b1;
          if (!buf_busy[nb]) begin
            ev_buf_cur <= nb;
            tac2_got   <= 1'b0;
            st         <= S_ARMED;
          end
        end
      endcase
    end
endmodule
