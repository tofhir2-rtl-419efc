`timescale 1ns/1ps
// tb_channel -- one complete channel (trigger generator, TAC and QAC
// models, ADC, digitiser, counter). The bench plays the discriminators with
// hits at known sub-cycle times and a constant energy current, and checks
// each event frame: coarse time, buffer set (round robin), TAC1 and TAC2
// fine times (10 ps bins plus a 16-bin pedestal, +-1 bin), coarse TAC2-TAC1
// difference, QAC (window of 4 cycles times the current) and flags. The
// counter is set to count low-energy rejects; the counts in its frames must
// add up to the low-energy hits sent. A burst of hits closer than the
// digitisation time must produce lost-hit strobes, and the events that are
// sent must still be correct.
module tb_channel;
  import tofhir2_pkg::*;
  localparam real TCK = 6.25;
  logic clk = 0, rst_n = 0, clear = 0, do_t1 = 0, do_t2 = 0, do_e = 0, tp = 0, out_valid, out_ready = 0;
  ch_cfg_t cfg;
  logic [15:0] tc = 0;
  logic [9:0] e_current = 37;
  logic [31:0] out_data;
  logic [3:0] stat;
  channel dut (.clk, .rst_n, .clear, .ch_id(5'd11), .cfg, .cnt_period(5'd10), .tcoarse(tc),
               .do_t1, .do_t2, .do_e, .tp, .e_current, .out_valid, .out_ready, .out_data, .stat);
  always #(TCK/2) clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  always @(posedge clk) if (rst_n) tc <= tc + 1;
  typedef struct { int tcv; int f1; int dc; int f2; bit opt; int b; bit rs; } exp_t;
  exp_t q [$];
  int n_lowe_hits = 0, n_lost = 0, n_ev = 0, n_opt_missing = 0;
  longint cnt_sum = 0;
  int trig_count = 0, boff = 0;
  bit after_burst = 0;    // the first hit after a burst re-learns the buffer set offset
  function automatic int fine_of(real dt_ns);
    return 16 + int'($floor(dt_ns * 100.0 + 1e-6));
  endfunction
  task automatic hit(input bit with_e, input real d, input int n2, input real d2, input bit opt);
    exp_t e;
    @(negedge clk);
    #(d - 0.1); do_t2 = 1; do_e = with_e;
    #0.1 do_t1 = 1;
    e.tcv = tc; e.f1 = fine_of(TCK/2 - d); e.opt = opt; e.b = trig_count; e.rs = after_burst;
    if (!opt) begin trig_count++; if (with_e) after_burst = 0; end else after_burst = 1;
    #(n2 * TCK + d2 - d); do_t1 = 0;
    e.dc = n2; e.f2 = fine_of(TCK/2 - d2);
    if (with_e) q.push_back(e); else n_lowe_hits++;
    #(6.0); do_t2 = 0; do_e = 0;
  endtask
  always @(posedge clk) if (rst_n) n_lost += stat[2];
  int sec = 0; logic [31:0] w0;
  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (!sec) w0 = out_data;
    else begin
      word0_t a; word1_t c;
      a = word0_t'(w0); c = word1_t'(out_data);
      check(a.ch == 5'd11, "channel number");
      if (a.ftype == FT_COUNTER) cnt_sum += out_data[23:0];
      else begin
        bit found; found = 0;
        while (!found && q.size() > 0) begin
          exp_t e; e = q.pop_front();
          if (int'(a.tcoarse) == e.tcv) begin
            found = 1; n_ev++;
            if (e.rs) boff = int'(a.buf_id) - e.b;
            if (!e.opt) check(a.buf_id == 3'(e.b + boff), $sformatf("buffer set %0d want %0d", a.buf_id, 3'(e.b + boff)));
            check(c.tfine1 >= 10'(e.f1 - 1) && c.tfine1 <= 10'(e.f1 + 1), $sformatf("tfine1 %0d want %0d", c.tfine1, e.f1));
            check(c.tfine2 >= 10'(e.f2 - 1) && c.tfine2 <= 10'(e.f2 + 1), $sformatf("tfine2 %0d want %0d", c.tfine2, e.f2));
            check(a.dcoarse == 6'(e.dc), $sformatf("dcoarse %0d want %0d", a.dcoarse, e.dc));
            check(c.qfine == 10'(4 * e_current), $sformatf("qfine %0d want %0d", c.qfine, 4 * e_current));
            check(c.flags == 2'b11, "flags");
          end else begin
            check(e.opt, $sformatf("event at tc %0d missing", e.tcv));
            n_opt_missing++;
          end
        end
        check(found, $sformatf("unexpected event tc %0d", a.tcoarse));
      end
    end
    sec = 1 - sec;
  end
  initial begin
    cfg = ch_cfg_t'(ch_cfg_default());
    cfg.cnt_enable = 1; cfg.cnt_mode = CNT_LOW_E;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (20) @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      repeat ($urandom_range(20, 60)) @(negedge clk);
      if (i % 50 == 25) begin
        // burst: hits every 6 cycles exhaust the eight buffer sets
        for (int k = 0; k < 14; k++) begin
          hit(1, 1.0, 1, 2.0, 1);
          repeat (4) @(negedge clk);
        end
      end else
        hit($urandom_range(0, 4) != 0, 0.2 + 0.01 * $urandom_range(0, 280), $urandom_range(1, 3),
            0.2 + 0.01 * $urandom_range(0, 280), 0);
    end
    repeat (3000) @(negedge clk);
    check(q.size() == 0, $sformatf("%0d events not received", q.size()));
    check(cnt_sum == n_lowe_hits, $sformatf("counter frames hold %0d low-energy rejects, %0d sent", cnt_sum, n_lowe_hits));
    check(n_lost > 0 && n_opt_missing > 0, $sformatf("burst lost hits (%0d strobes, %0d missing)", n_lost, n_opt_missing));
    check(n_ev > 200, "events received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
