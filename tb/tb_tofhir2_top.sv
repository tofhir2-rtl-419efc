`timescale 1ns/1ps
// tb_tofhir2_top -- end-to-end test of the whole chip at its default size
// (32 channels, L0 latency 40 bins, L1 latency 485 bins = 12.125 us).
//
// The bench plays the analog front end, the trigger source, the
// configuration master and the back end:
//  * it drives discriminator edges at known sub-cycle times and a constant
//    energy current per channel, and predicts each event's coarse time
//    (from its own copy of the time tag), TAC1 and TAC2 fine times (10 ps
//    bins plus the 16-bin pedestal of the TAC model) and QAC value;
//  * it sends random L0/L1 decisions for every 25 ns bin on the 80 Mb/s
//    trigger line and predicts which events each link must carry;
//  * it configures the chip over the 8b/10b command line, reads registers
//    back and checks the replies;
//  * it deserialises and decodes both DDR links and matches every frame.
// Mechanisms that must occur at least once: valid events, low-energy
// rejects, L0 and L1 accepts and rejects, buffer-full losses (a burst on one
// channel), the 100 us idle refresh, counter frames, internal test pulses,
// command replies, the backup link mode, Resync with chain clear, and full
// reset restoring the default configuration.
module tb_tofhir2_top;
  import tofhir2_pkg::*;
  import code8b10b_pkg::*;

  localparam int L0LAT = 40, L1LAT = 485, NCHT = 32;
  localparam real TCK = 6.25;

  logic clk = 0, rst_n = 0, resync = 0, trig_in = 0, cfg_in = 0, tp_in = 0;
  logic [4:0] chip_id = 5'd9;
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

  // ---------------- time tag mirror ----------------
  logic [15:0] tc = 0;
  logic rs_q = 0;
  always @(posedge clk) begin
    if (!rst_n) begin tc <= 0; rs_q <= 0; end
    else begin
      rs_q <= resync;
      tc   <= (rs_q && !resync) ? 16'd0 : tc + 16'd1;
    end
  end

  // ---------------- trigger decisions ----------------
  bit l0dec [16384];
  bit l1dec [16384];
  initial for (int b = 0; b < 16384; b++) begin
    l0dec[b] = ($urandom_range(0, 99) < 50);
    l1dec[b] = ($urandom_range(0, 99) < 40);
  end
  always @(negedge clk) begin
    logic [13:0] b;
    b = tc[15:2];
    if (tc[1:0] == 2'd1) trig_in <= l0dec[14'(b - 14'(L0LAT))];
    if (tc[1:0] == 2'd3) trig_in <= l1dec[14'(b - 14'(L1LAT))];
  end

  // ---------------- expected events ----------------
  typedef struct {
    int ch; int tcv; int f1; bit has2; bit skip2; int dc; int f2; int q;
    bit l0; bit l1; bit optional; bit got_pri; bit got_sec;
  } exp_t;
  exp_t exp_q [$];
  int   ecur [NCHT];
  int   n_valid_hits = 0, n_lowe_hits = 0;
  bit   mode_backup = 0;

  function automatic int fine_of(real dt_ns);
    return 16 + int'($floor(dt_ns * 100.0 + 1e-6));
  endfunction

  // One hit on channel c, starting 'd' ns after the current negedge.
  // kind 0: valid (T1, T2, E), 1: low energy (T1, T2), 2: T1 only.
  // The T1 pulse ends n2 cycles later at d2 ns after a negedge.
  task automatic hit(input int c, input int kind, input real d, input int n2, input real d2, input bit optional);
    exp_t e;
    real  t0;
    #(d - 0.1);
    if (kind != 2) t2[c] = 1;
    if (kind == 0) ee[c] = 1;
    #0.1;
    t1[c] = 1;
    t0 = $realtime;
    e.ch = c; e.tcv = tc; e.f1 = fine_of(TCK/2 - d); e.skip2 = 0;
    e.q  = (4 * ecur[c] > 1023) ? 1023 : 4 * ecur[c];
    e.l0 = l0dec[tc[15:2]]; e.l1 = l1dec[tc[15:2]];
    e.optional = optional; e.got_pri = 0; e.got_sec = 0;
    #(n2 * TCK + d2 - d);
    t1[c] = 0;
    e.has2 = 1; e.dc = (tc - e.tcv) & 63; e.f2 = fine_of(TCK/2 - d2);
    if (kind == 0) begin exp_q.push_back(e); n_valid_hits++; end
    if (kind == 1) n_lowe_hits++;
    #(8.0);
    t2[c] = 0; ee[c] = 0;
  endtask

  // test pulses reaching channel 7 (tp_enable set there)
  int n_tp = 0;
  ch_cfg_t ch7_cfg;
  assign ch7_cfg = ch_cfg_t'(ch_cfg_o[7]);
  // (the T1 fall that ends the pulse gives a TAC2 measurement whose value
  // is not predicted here, so only TAC1 and QAC are checked)
  always @(posedge dut.tp_digital) if (ch7_cfg.tp_enable) begin
    exp_t e;
    e.ch = 7; e.tcv = tc; e.f1 = fine_of(TCK/2 - 1.0); e.has2 = 1; e.skip2 = 1; e.dc = 0; e.f2 = 0;
    e.q = (4 * ecur[7] > 1023) ? 1023 : 4 * ecur[7];
    e.l0 = l0dec[tc[15:2]]; e.l1 = l1dec[tc[15:2]];
    e.optional = 0; e.got_pri = 0; e.got_sec = 0;
    exp_q.push_back(e);
    n_tp++;
  end

  // ---------------- configuration line ----------------
  typedef struct { bit k; logic [7:0] d; } ch_t;
  ch_t  cmdq [$];
  logic crd = 0;
  initial begin
    @(posedge rst_n);
    forever begin
      ch_t  s;
      enc_t en;
      if (cmdq.size() > 0) s = cmdq.pop_front(); else begin s.k = 1; s.d = K28_5; end
      en  = encode(s.d, s.k, crd);
      crd = en.rd;
      for (int b = 9; b >= 0; b--) begin
        @(negedge clk); cfg_in = en.code[b];
        @(negedge clk);
      end
    end
  end
  task automatic push_sym(input bit k, input logic [7:0] d);
    ch_t s; s.k = k; s.d = d; cmdq.push_back(s);
  endtask
  task automatic cfg_write(input logic [4:0] id, input int addr, input logic [63:0] v);
    push_sym(1, K28_0); push_sym(0, {id, 3'd1}); push_sym(0, 8'(addr));
    for (int i = 7; i >= 0; i--) push_sym(0, v[8*i +: 8]);
  endtask
  task automatic cfg_read(input int cmd, input int addr);
    push_sym(1, K28_0); push_sym(0, {chip_id, 3'(cmd)}); push_sym(0, 8'(addr));
  endtask
  task automatic wait_cmds();
    while (cmdq.size() > 0) @(negedge clk);
    repeat (60) @(negedge clk);
  endtask

  // ---------------- link receivers ----------------
  logic [31:0] reply_q [$];
  int n_pri_ev = 0, n_sec_ev = 0, n_cnt_frames = 0, n_replies = 0, n_backup_ev = 0;
  longint cnt_sum = 0;

  task automatic take_frame(input bit pri, input logic [7:0] sof, input logic [63:0] f);
    word0_t w0; word1_t w1;
    w0 = word0_t'(f[63:32]); w1 = word1_t'(f[31:0]);
    if (sof == K28_3) begin
      check(pri, "reply on secondary link");
      reply_q.push_back(f[31:0]); n_replies++;
      check(f[63:59] == chip_id, "reply chip id");
    end else if (sof == K28_2) begin
      check(w0.ftype == FT_COUNTER && w0.ch == 5'd3, $sformatf("counter frame from ch %0d", w0.ch));
      if (pri) begin n_cnt_frames++; cnt_sum += f[23:0]; end
    end else begin
      bit found = 0;
      check(sof == K28_1 && w0.ftype == FT_EVENT, "event frame start/type");
      if (pri) n_pri_ev++; else n_sec_ev++;
      if (!pri && mode_backup) n_backup_ev++;
      foreach (exp_q[i]) begin
        if (!found && exp_q[i].ch == int'(w0.ch) && exp_q[i].tcv == int'(w0.tcoarse) &&
            !(pri ? exp_q[i].got_pri : exp_q[i].got_sec)) begin
          bit want;
          found = 1;
          want = (pri || mode_backup) ? exp_q[i].l1 : exp_q[i].l0;
          check(want, $sformatf("ch %0d tc %0d sent on %s link without trigger", w0.ch, w0.tcoarse, pri ? "primary" : "secondary"));
          check(w1.tfine1 >= 10'(exp_q[i].f1 - 1) && w1.tfine1 <= 10'(exp_q[i].f1 + 1),
                $sformatf("ch %0d tfine1 %0d want %0d", w0.ch, w1.tfine1, exp_q[i].f1));
          check(w1.qfine == 10'(exp_q[i].q), $sformatf("ch %0d qfine %0d want %0d", w0.ch, w1.qfine, exp_q[i].q));
          if (!exp_q[i].skip2) check(w1.flags[1] == exp_q[i].has2, $sformatf("ch %0d TAC2 flag", w0.ch));
          if (exp_q[i].has2 && !exp_q[i].skip2) begin
            check(w0.dcoarse == 6'(exp_q[i].dc), $sformatf("ch %0d dcoarse %0d want %0d", w0.ch, w0.dcoarse, exp_q[i].dc));
            check(w1.tfine2 >= 10'(exp_q[i].f2 - 1) && w1.tfine2 <= 10'(exp_q[i].f2 + 1),
                  $sformatf("ch %0d tfine2 %0d want %0d", w0.ch, w1.tfine2, exp_q[i].f2));
          end
          if (pri || mode_backup) exp_q[i].got_pri = 1; else exp_q[i].got_sec = 1;
        end
      end
      check(found, $sformatf("unexpected event ch %0d tc %0d on %s", w0.ch, w0.tcoarse, pri ? "primary" : "secondary"));
    end
  endtask

  for (genvar L = 0; L < 2; L++) begin : g_rx
    logic [9:0]  sh = 0;
    int          nb = -1;
    int          idx = -1;
    logic [7:0]  sof;
    logic [63:0] fr;
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

  // ---------------- mechanism counters from the chip's strobes ----------------
  int n_lost = 0, n_refresh = 0, n_lowe = 0, n_valid = 0;
  int n_l0acc = 0, n_l0rej = 0, n_l1acc = 0, n_l1rej = 0;
  for (genvar c = 0; c < NCHT; c++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_ch[c].u_ch.stat[0]) n_valid++;
      if (dut.g_ch[c].u_ch.stat[1]) n_lowe++;
      if (dut.g_ch[c].u_ch.stat[2]) n_lost++;
      if (dut.g_ch[c].u_ch.stat[3]) n_refresh++;
    end
  end
  for (genvar g = 0; g < NCHT / 4; g++) begin : g_gmon
    always @(posedge clk) if (rst_n) begin
      if (dut.l0_stat[g][0]) n_l0acc++;
      if (dut.l0_stat[g][1]) n_l0rej++;
      if (dut.l1_stat[g][0]) n_l1acc++;
      if (dut.l1_stat[g][1]) n_l1rej++;
      check(!dut.l0_stat[g][2] && !dut.l1_stat[g][2], "event expired in a trigger filter");
    end
  end

  // ---------------- stimulus ----------------
  task automatic random_hits(input int c, input int until_tc);
    while (int'(tc) < until_tc) begin
      int  kind, n2, r;
      real d, d2;
      repeat ($urandom_range(300, 1600)) @(negedge clk);
      r    = $urandom_range(0, 99);
      kind = (r < 70) ? 0 : (r < 90) ? 1 : 2;
      d    = 0.2 + 0.01 * $urandom_range(0, 280);
      d2   = 0.2 + 0.01 * $urandom_range(0, 280);
      n2   = $urandom_range(1, 2);
      hit(c, kind, d, n2, d2, 0);
    end
  endtask

  logic [63:0] g0v, c3v, c7v, g1v;
  initial begin
    ch_cfg_t cc;
    glb0_t   g0;
    glb1_t   g1;
    for (int c = 0; c < NCHT; c++) begin
      t1[c] = 0; t2[c] = 0; ee[c] = 0;
      ecur[c] = 20 + 7 * c;
      e_current[c] = 10'(ecur[c]);
    end
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (200) @(negedge clk);
    // short Resync: time tag only
    resync = 1; repeat (2) @(negedge clk); resync = 0;
    repeat (10) @(negedge clk);
    check(dut.tcoarse == tc, "time tag mirror after short Resync");

    // configuration
    g0 = glb0_t'(glb0_default()); g0.cnt_period = 5'd11; g0v = 64'(g0);
    cfg_write(chip_id, N_CH, g0v);
    cc = ch_cfg_t'(ch_cfg_default()); cc.cnt_enable = 1; cc.cnt_mode = CNT_LOW_E; c3v = 64'(cc);
    cfg_write(chip_id, 3, c3v);
    // internal generator first, so channel 7 never sees the raw 40 MHz clock
    g1 = '0; g1.tp_internal = 1; g1.tp_period = 16'd200; g1.tp_length = 8'd1; g1v = 64'(g1);
    cfg_write(chip_id, N_CH + 1, g1v);
    cc = ch_cfg_t'(ch_cfg_default()); cc.tp_enable = 1; c7v = 64'(cc);
    cfg_write(chip_id, 7, c7v);
    cfg_write(5'd4, N_CH + 2, 64'hFFFF_FFFF_FFFF_FFFF);   // another chip's command: ignored
    cfg_read(2, N_CH);
    cfg_read(3, 3);
    wait_cmds();
    check(aldo_dac_a == 8'd0 && aldo_en == 1'b0, "command for another chip ignored");
    check(ch_cfg_o[3] == c3v, "channel 3 register written");
  end

  // test pulse clock: 40 MHz, rising 1 ns after a clock negedge
  initial begin
    @(posedge rst_n);
    @(negedge clk); #1.0;
    forever begin tp_in = 1; #12.5; tp_in = 0; #12.5; end
  end

  initial begin
    wait (rst_n);
    repeat (4000) @(negedge clk);
    // phase A: random hits on channels 0..30 (31 stays idle for the refresh)
    fork
      for (int c = 0; c < NCHT - 1; c++) begin
        automatic int cc = c;
        if (cc != 7) fork random_hits(cc, 4000 + 6000); join_none
      end
      begin
        // burst on channel 5 that fills all eight buffer sets
        repeat (2500) @(negedge clk);
        for (int i = 0; i < 14; i++) begin
          fork hit(5, 0, 1.5, 1, 1.0, 1); join_none
          repeat (6) @(negedge clk);
        end
      end
    join_none
  end

  initial begin : main
    glb0_t g0;
    wait (rst_n);
    // wait for phase A to drain (last hit near tc 10000 plus the L1
    // latency) and for idle channel 31 to pass its 100 us refresh
    repeat (12000) @(negedge clk);
    cfg_write(chip_id, 7, ch_cfg_default());  // stop test pulses
    wait_cmds();
    repeat (5000) @(negedge clk);
    check(n_replies >= 2, "register read replies");
    if (reply_q.size() >= 2) begin
      check(reply_q[0] == g0v[31:0], $sformatf("read-back of global 0 low word %h want %h", reply_q[1], g0v[31:0]));
      check(reply_q[1] == c3v[63:32], $sformatf("read-back of channel 3 high word %h want %h", reply_q[3], c3v[63:32]));
    end
    foreach (exp_q[i])
      if (!exp_q[i].optional) begin
        check(exp_q[i].got_pri == exp_q[i].l1, $sformatf("ch %0d tc %0d primary: got %0d want %0d", exp_q[i].ch, exp_q[i].tcv, exp_q[i].got_pri, exp_q[i].l1));
        check(exp_q[i].got_sec == exp_q[i].l0, $sformatf("ch %0d tc %0d secondary: got %0d want %0d", exp_q[i].ch, exp_q[i].tcv, exp_q[i].got_sec, exp_q[i].l0));
      end
    exp_q.delete();

    // Resync with chain clear, then backup link mode: L1 data on the secondary link
    g0 = glb0_t'(glb0_default()); g0.link_mode = LINK_L1_BACKUP; g0.cnt_period = 5'd11;
    cfg_write(chip_id, N_CH, 64'(g0));
    cfg_write(chip_id, N_CH + 1, 64'd0);
    wait_cmds();
    mode_backup = 1;
    resync = 1; repeat (8) @(negedge clk); resync = 0;
    repeat (10) @(negedge clk);
    check(dut.tcoarse == tc, "time tag mirror after Resync with chain clear");
    for (int i = 0; i < 10; i++) begin
      fork hit(i, 0, 0.5 + 0.2 * i, 1, 2.0, 0); join_none
      repeat (50) @(negedge clk);
    end
    repeat (4 * L1LAT + 1000) @(negedge clk);
    foreach (exp_q[i])
      check(exp_q[i].got_pri == exp_q[i].l1, $sformatf("backup mode ch %0d tc %0d: got %0d want %0d", exp_q[i].ch, exp_q[i].tcv, exp_q[i].got_pri, exp_q[i].l1));

    // full reset: configuration back to defaults
    resync = 1; repeat (20) @(negedge clk); resync = 0;
    repeat (10) @(negedge clk);
    check(ch_cfg_o[3] == ch_cfg_default(), "full Resync restores channel configuration");
    mode_backup = 0;
    begin
      int nr;
      nr = reply_q.size();
      cfg_read(3, N_CH);
      wait_cmds();
      repeat (200) @(negedge clk);
      check(reply_q.size() == nr + 1 && reply_q[reply_q.size()-1] == glb0_default() >> 32, "read-back after full reset");
    end

    // mechanisms
    $display("valid=%0d lowE=%0d lost=%0d refresh=%0d tp=%0d L0acc=%0d L0rej=%0d L1acc=%0d L1rej=%0d cntframes=%0d (sum %0d, lowE hits ch3 counted) replies=%0d backup=%0d pri=%0d sec=%0d",
             n_valid, n_lowe, n_lost, n_refresh, n_tp, n_l0acc, n_l0rej, n_l1acc, n_l1rej, n_cnt_frames, cnt_sum, n_replies, n_backup_ev, n_pri_ev, n_sec_ev);
    check(n_valid > 0,  "mechanism: valid events");
    check(n_lowe > 0,   "mechanism: low-energy rejects");
    check(n_lost > 0,   "mechanism: buffer-full losses");
    check(n_refresh > 0, "mechanism: idle refresh");
    check(n_tp > 0,     "mechanism: internal test pulses");
    check(n_l0acc > 0 && n_l0rej > 0, "mechanism: L0 accept and reject");
    check(n_l1acc > 0 && n_l1rej > 0, "mechanism: L1 accept and reject");
    check(n_cnt_frames > 0, "mechanism: counter frames");
    check(n_replies > 0, "mechanism: command replies");
    check(n_backup_ev > 0, "mechanism: backup link mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
