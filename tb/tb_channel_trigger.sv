`timescale 1ns/1ps
// tb_channel_trigger -- drives the three discriminator inputs of one channel
// with random hit types at random sub-cycle times, and plays the digitiser
// by holding each used buffer set busy for a random time. For every hit the
// bench checks the channel's reaction:
//  * T1 with T2 and E: one ev_valid, on the expected buffer set (round
//    robin), with the time tag of the clock edge after the T1 edge, the TAC2
//    flag and coarse difference for the T1 falling edge, and TAC1 started
//    in the trigger cycle;
//  * T1 with T2 but no E: one st_lowe strobe and no event;
//  * T1 alone: only the st_t1 strobe, no TAC start;
//  * a hit while the next buffer set is still busy: st_lost.
// With REFRESH set to 300 cycles an idle channel must re-arm (st_refresh)
// and move to the next buffer set. The digital test pulse must act as a
// valid hit when enabled and be ignored otherwise.
module tb_channel_trigger;
  import tofhir2_pkg::*;
  localparam int REF = 300;
  logic clk = 0, rst_n = 0, clear = 0, do_t1 = 0, do_t2 = 0, do_e = 0, tp = 0;
  ch_cfg_t cfg;
  logic [15:0] tc = 0;
  logic [7:0] buf_busy = 0;
  logic tac1_start, tac2_start, qac_int, ev_valid, ev_tac2, st_t1, st_lowe, st_lost, st_refresh;
  logic [2:0] buf_sel, ev_buf;
  logic [15:0] ev_tcoarse;
  logic [5:0] ev_dcoarse;
  channel_trigger #(.REFRESH(REF)) dut (.clk, .rst_n, .clear, .do_t1, .do_t2, .do_e, .tp, .cfg, .tcoarse(tc), .buf_busy,
    .tac1_start, .tac2_start, .buf_sel, .qac_int, .ev_valid, .ev_buf, .ev_tcoarse, .ev_dcoarse, .ev_tac2,
    .st_t1, .st_lowe, .st_lost, .st_refresh);
  always #3.125 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  always @(posedge clk) if (rst_n) tc <= tc + 1;
  // strobe counters, cleared by the stimulus
  int n_ev = 0, n_lowe = 0, n_lost = 0, n_ref = 0, n_t1 = 0, n_tac1 = 0;
  int tot_ev = 0, tot_lowe = 0, tot_lost = 0, tot_ref = 0;
  logic [2:0] last_buf; logic [15:0] last_tc; logic [5:0] last_dc; logic last_tac2;
  int hold [8];
  bit forced = 0;     // buffers forced busy by the bench
  always @(posedge clk) if (rst_n) begin
    if (ev_valid) begin
      n_ev++; tot_ev++; last_buf = ev_buf; last_tc = ev_tcoarse; last_dc = ev_dcoarse; last_tac2 = ev_tac2;
      if (!forced) check(!buf_busy[ev_buf], "event on a free buffer set");
      buf_busy[ev_buf] <= 1'b1;
      hold[ev_buf] = $urandom_range(5, 80);
    end
    for (int b = 0; b < 8; b++) if (buf_busy[b] && !(ev_valid && ev_buf == 3'(b)) && hold[b] < 1000) begin
      hold[b]--; if (hold[b] == 0) buf_busy[b] <= 1'b0;
    end
    n_lowe += st_lowe; n_lost += st_lost; n_ref += st_refresh; n_t1 += st_t1; n_tac1 += tac1_start;
    tot_lowe += st_lowe; tot_lost += st_lost; tot_ref += st_refresh;
  end
  task automatic clr(); n_ev = 0; n_lowe = 0; n_lost = 0; n_ref = 0; n_t1 = 0; n_tac1 = 0; endtask
  int exp_buf = 0;
  task automatic hit(input int kind, input int n2);
    real d; logic [15:0] t_exp;
    d = 0.2 + 0.01 * $urandom_range(0, 280);
    clr();
    @(negedge clk); #(d);
    if (kind != 2) do_t2 = 1;
    if (kind == 0) do_e = 1;
    #0.05 do_t1 = 1;
    t_exp = tc;           // the next rising edge loads tc+1, tags with the current value
    @(negedge clk);
    repeat (n2 - 1) @(negedge clk);
    #(d); do_t1 = 0;
    repeat (3) @(negedge clk);
    do_t2 = 0; do_e = 0;
    repeat (8) @(negedge clk);
    check(n_t1 == 1, "one T1 strobe");
    if (kind == 2) check(n_ev == 0 && n_lowe == 0 && n_tac1 == 0, "T1 alone starts nothing");
    else begin
      check(n_tac1 > 0, "TAC1 started");
      if (kind == 0) begin
        check(n_ev == 1 && n_lowe == 0, $sformatf("valid hit gives one event (%0d)", n_ev));
        check(last_buf == 3'(exp_buf), $sformatf("buffer set %0d want %0d", last_buf, exp_buf));
        check(last_tc == t_exp, $sformatf("coarse time %0d want %0d", last_tc, t_exp));
        check(last_tac2 == (n2 <= 3), "TAC2 flag (T1 falling edge inside the window)");
        if (n2 <= 3) check(last_dc == 6'(n2), $sformatf("coarse difference %0d want %0d", last_dc, n2));
      end else check(n_ev == 0 && n_lowe == 1, "low-energy hit rejected");
      exp_buf = (exp_buf + 1) % 8;
    end
  endtask
  initial begin
    cfg = ch_cfg_t'(ch_cfg_default());
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (5) @(negedge clk);
    for (int i = 0; i < 400; i++) begin
      int r;
      r = $urandom_range(0, 9);
      // wait until the next buffer set is free, so no hit is lost here
      while (buf_busy[exp_buf]) @(negedge clk);
      hit(r < 6 ? 0 : r < 8 ? 1 : 2, $urandom_range(1, 4));
    end
    // all buffer sets busy: hits are lost
    for (int b = 0; b < 8; b++) hold[b] = 5000;
    repeat (2) @(negedge clk);
    buf_busy = '1; forced = 1;
    clr();
    for (int i = 0; i < 5; i++) begin
      @(negedge clk); do_t1 = 1; do_t2 = 1; do_e = 1; repeat (3) @(negedge clk); do_t1 = 0; do_t2 = 0; do_e = 0;
      repeat (10) @(negedge clk);
    end
    check(n_lost >= 4 && n_ev <= 1, $sformatf("lost hits counted (%0d)", n_lost));
    for (int b = 0; b < 8; b++) hold[b] = 1;
    repeat (50) @(negedge clk);
    forced = 0;
    // idle refresh
    clr();
    repeat (3 * REF + 50) @(negedge clk);
    check(n_ref == 3, $sformatf("idle refresh every %0d cycles (%0d)", REF, n_ref));
    // test pulse
    clr();
    cfg.tp_enable = 0;
    @(negedge clk); tp = 1; repeat (2) @(negedge clk); tp = 0; repeat (10) @(negedge clk);
    check(n_t1 == 0 && n_ev == 0, "test pulse ignored when disabled");
    cfg.tp_enable = 1;
    @(negedge clk); tp = 1; repeat (2) @(negedge clk); tp = 0; repeat (10) @(negedge clk);
    check(n_ev == 1, "test pulse gives an event when enabled");
    check(tot_ev > 100 && tot_lowe > 20, "event mix");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
