`timescale 1ns/1ps
// tb_workload_rate -- the chip at its design operating point, default
// configuration and default size: all 32 channels receive valid hits at
// 2.5 MHz each (random intervals, at least 12 cycles apart), the L1 trigger
// accepts 750 kHz of the 40 MHz bunch crossings (1.875 % of the 25 ns bins)
// and the L0 trigger 2 % of the bins. The run lasts 250 us of hits
// (about 20,000 hits) and then drains.
//
// The bench predicts each hit's coarse time, fine times and charge like the
// end-to-end bench and decodes both links. A hit that the chip reports as
// lost (no free buffer set) is not expected; every other hit in an
// L1-accepted bin must appear once on the primary link and every hit in an
// L0-accepted bin once on the secondary link, with correct values, and
// nothing else may appear. The bench prints how many hits were lost, which
// measures how far the 8 buffer sets and the per-group L1 FIFO (128
// events for 4 channels at 2.5 MHz over the 12.125 us L1 latency, about
// 121 on average) carry this rate. A loss fraction above 5 % counts as a
// failure.
module tb_workload_rate;
  import tofhir2_pkg::*;
  import code8b10b_pkg::*;

  localparam int  L0LAT = 40, L1LAT = 485, NCHT = 32;
  localparam int  RUN_TC = 40000;          // 250 us of hits
  localparam real TCK = 6.25;

  logic clk = 0, rst_n = 0, resync = 0, trig_in = 0, cfg_in = 0, tp_in = 0;
  logic [4:0] chip_id = 5'd3;
  logic t1 [NCHT], t2 [NCHT], ee [NCHT];
  logic [NCHT-1:0] do_t1, do_t2, do_e;
  logic [NCHT-1:0][9:0] e_current;
  logic [1:0] tx_pri, tx_sec;
  logic [NCHT-1:0][REG_W-1:0] ch_cfg_o;
  logic [7:0] aldo_dac_a, aldo_dac_b;
  logic aldo_rng_a, aldo_rng_b, aldo_en, aldo_mon_rng, tp_analog;
  logic [5:0] mon_sel;

  for (genvar c = 0; c < NCHT; c++) begin : g_drv
    assign do_t1[c] = t1[c];
    assign do_t2[c] = t2[c];
    assign do_e[c]  = ee[c];
  end

  tofhir2_top dut (
    .clk, .rst_n, .resync, .trig_in, .cfg_in, .tp_in, .chip_id, .rx_align_mode(1'b0),
    .do_t1, .do_t2, .do_e, .e_current, .tx_pri, .tx_sec, .ch_cfg_o,
    .aldo_dac_a, .aldo_rng_a, .aldo_dac_b, .aldo_rng_b, .aldo_en, .aldo_mon_rng, .mon_sel, .tp_analog
  );

  always #(TCK/2) clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // time tag mirror (no Resync in this run: counts from reset)
  logic [15:0] tc = 0;
  always @(posedge clk) tc <= rst_n ? tc + 16'd1 : 16'd0;

  // trigger decisions per 25 ns bin
  bit l0dec [16384];
  bit l1dec [16384];
  initial for (int b = 0; b < 16384; b++) begin
    l0dec[b] = ($urandom_range(0, 9999) < 200);
    l1dec[b] = ($urandom_range(0, 9999) < 188);
  end
  always @(negedge clk) begin
    logic [13:0] b;
    b = tc[15:2];
    if (tc[1:0] == 2'd1) trig_in <= l0dec[14'(b - 14'(L0LAT))];
    if (tc[1:0] == 2'd3) trig_in <= l1dec[14'(b - 14'(L1LAT))];
  end

  // expected events
  typedef struct {
    int ch; int tcv; int f1; int dc; int f2; int q;
    bit l0; bit l1; bit lost; bit got_pri; bit got_sec;
  } exp_t;
  exp_t exp_q [$];
  int   ecur [NCHT];
  int   n_hits = 0;

  // lost-hit strobes of each channel, seen by the hit task
  bit lost_seen [NCHT];
  int n_lost = 0;
  for (genvar c = 0; c < NCHT; c++) begin : g_mon
    always @(posedge clk) if (rst_n && dut.g_ch[c].u_ch.stat[2]) begin lost_seen[c] = 1; n_lost++; end
  end

  function automatic int fine_of(real dt_ns);
    return 16 + int'($floor(dt_ns * 100.0 + 1e-6));
  endfunction

  // One valid hit (T1, T2, E) on channel c, 'd' ns after the current
  // negedge; T1 falls n2 cycles later at d2 ns after a negedge (TAC2).
  task automatic hit(input int c, input real d, input int n2, input real d2);
    exp_t e;
    #(d - 0.1);
    t2[c] = 1; ee[c] = 1;
    #0.1;
    t1[c] = 1;
    lost_seen[c] = 0;
    e.ch = c; e.tcv = int'(tc); e.f1 = fine_of(TCK/2 - d);
    e.q  = (4 * ecur[c] > 1023) ? 1023 : 4 * ecur[c];
    e.l0 = l0dec[tc[15:2]]; e.l1 = l1dec[tc[15:2]];
    e.got_pri = 0; e.got_sec = 0;
    #(n2 * TCK + d2 - d);
    t1[c] = 0;
    e.dc = (int'(tc) - e.tcv) & 63; e.f2 = fine_of(TCK/2 - d2);
    #(8.0);
    t2[c] = 0; ee[c] = 0;
    e.lost = lost_seen[c];
    exp_q.push_back(e);
    n_hits++;
  endtask

  // link receivers
  int n_pri_ev = 0, n_sec_ev = 0, n_other = 0;
  task automatic take_frame(input bit pri, input logic [7:0] sof, input logic [63:0] f);
    word0_t w0; word1_t w1;
    bit found = 0;
    w0 = word0_t'(f[63:32]); w1 = word1_t'(f[31:0]);
    if (sof != K28_1) begin n_other++; check(0, "non-event frame in a run without counters or commands"); return; end
    check(w0.ftype == FT_EVENT, "event frame type");
    if (pri) n_pri_ev++; else n_sec_ev++;
    for (int i = exp_q.size() - 1; i >= 0 && !found; i--) begin
      if (exp_q[i].ch == int'(w0.ch) && exp_q[i].tcv == int'(w0.tcoarse) &&
          !(pri ? exp_q[i].got_pri : exp_q[i].got_sec)) begin
        found = 1;
        check(pri ? exp_q[i].l1 : exp_q[i].l0,
              $sformatf("ch %0d tc %0d on %s link without trigger", w0.ch, w0.tcoarse, pri ? "primary" : "secondary"));
        check(!exp_q[i].lost, $sformatf("ch %0d tc %0d reported lost but sent", w0.ch, w0.tcoarse));
        check(w1.tfine1 >= 10'(exp_q[i].f1 - 1) && w1.tfine1 <= 10'(exp_q[i].f1 + 1),
              $sformatf("ch %0d tfine1 %0d want %0d", w0.ch, w1.tfine1, exp_q[i].f1));
        check(w1.tfine2 >= 10'(exp_q[i].f2 - 1) && w1.tfine2 <= 10'(exp_q[i].f2 + 1),
              $sformatf("ch %0d tfine2 %0d want %0d", w0.ch, w1.tfine2, exp_q[i].f2));
        check(w0.dcoarse == 6'(exp_q[i].dc), $sformatf("ch %0d dcoarse %0d want %0d", w0.ch, w0.dcoarse, exp_q[i].dc));
        check(w1.qfine == 10'(exp_q[i].q), $sformatf("ch %0d qfine %0d want %0d", w0.ch, w1.qfine, exp_q[i].q));
        if (pri) exp_q[i].got_pri = 1; else exp_q[i].got_sec = 1;
      end
    end
    check(found, $sformatf("unexpected event ch %0d tc %0d on %s", w0.ch, w0.tcoarse, pri ? "primary" : "secondary"));
  endtask

  for (genvar L = 0; L < 2; L++) begin : g_rx
    logic [9:0]  sh = 0;
    int          nb = -1;
    int          idx = -1;
    logic [7:0]  sof = 0;
    logic [63:0] fr = 0;
    always @(negedge clk) if (rst_n) begin
      logic [1:0] dq;
      dq = (L == 0) ? tx_pri : tx_sec;
      for (int j = 1; j >= 0; j--) begin
        sh = {sh[8:0], dq[j]};
        if (nb >= 0) nb++;
        if (sh == 10'b0011111010 || sh == 10'b1100000101) nb = 10;
        if (nb == 10) begin
          dec_t dd;
          nb = 0;
          dd = decode(sh);
          check(!dd.err, $sformatf("link %0d code error %b", L, sh));
          if (dd.k) begin
            if (dd.data != K28_5) begin sof = dd.data; idx = 0; fr = 0; end
          end else if (idx >= 0) begin
            fr = {fr[55:0], dd.data};
            idx++;
            if (idx == 8) begin take_frame(L == 0, sof, fr); idx = -1; end
          end
        end
      end
    end
  end

  // no event may expire in a trigger filter; record the peak FIFO levels
  int l0_peak = 0, l1_peak = 0;
  for (genvar g = 0; g < NCHT / 4; g++) begin : g_gmon
    always @(posedge clk) if (rst_n) begin
      if (dut.l0_stat[g][2] || dut.l1_stat[g][2]) check(0, "event expired in a trigger filter");
      if (int'(dut.g_grp[g].u_tb.u_l0.u_fifo.count) > l0_peak) l0_peak = int'(dut.g_grp[g].u_tb.u_l0.u_fifo.count);
      if (int'(dut.g_grp[g].u_tb.u_l1.u_fifo.count) > l1_peak) l1_peak = int'(dut.g_grp[g].u_tb.u_l1.u_fifo.count);
    end
  end

  // stimulus: exponential intervals, mean 64 cycles (2.5 MHz), minimum 12
  task automatic channel_hits(input int c);
    while (int'(tc) < RUN_TC) begin
      int n;
      n = 12 + int'(-52.0 * $ln((real'($urandom_range(1, 1000000))) / 1000000.0));
      repeat (n) @(negedge clk);
      hit(c, 0.2 + 0.01 * $urandom_range(0, 280), $urandom_range(1, 2), 0.2 + 0.01 * $urandom_range(0, 280));
    end
  endtask

  initial begin
    int miss_pri, miss_sec, want_pri, want_sec, nl;
    for (int c = 0; c < NCHT; c++) begin
      t1[c] = 0; t2[c] = 0; ee[c] = 0; lost_seen[c] = 0;
      ecur[c] = 20 + 7 * c;
      e_current[c] = 10'(ecur[c]);
    end
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (200) @(negedge clk);
    for (int c = 0; c < NCHT; c++) begin
      automatic int cc = c;
      fork channel_hits(cc); join_none
    end
    wait (int'(tc) >= RUN_TC);
    repeat (4 * L1LAT + 6000) @(negedge clk);

    miss_pri = 0; miss_sec = 0; want_pri = 0; want_sec = 0; nl = 0;
    foreach (exp_q[i]) begin
      if (exp_q[i].lost) begin nl++; continue; end
      if (exp_q[i].l1) begin want_pri++; if (!exp_q[i].got_pri) miss_pri++; end
      if (exp_q[i].l0) begin want_sec++; if (!exp_q[i].got_sec) miss_sec++; end
    end
    check(miss_pri == 0, $sformatf("%0d L1-accepted events missing on the primary link", miss_pri));
    check(miss_sec == 0, $sformatf("%0d L0-accepted events missing on the secondary link", miss_sec));
    check(nl == n_lost, $sformatf("lost hits %0d, lost strobes %0d", nl, n_lost));
    check(n_hits > 15000, $sformatf("only %0d hits", n_hits));
    check(want_pri > 200 && want_sec > 200, "too few accepted events");
    check(nl * 20 <= n_hits, $sformatf("lost %0d of %0d hits", nl, n_hits));
    $display("hits=%0d lost=%0d (%0d.%02d%%) L1acc_events=%0d primary=%0d L0acc_events=%0d secondary=%0d",
             n_hits, nl, nl * 100 / n_hits, (nl * 10000 / n_hits) % 100, want_pri, n_pri_ev, want_sec, n_sec_ev);
    $display("peak FIFO levels (32-bit words): L0 %0d of 64, L1 %0d of 256", l0_peak, l1_peak);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (RUN_TC + 4 * L1LAT + 20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
