`timescale 1ns/1ps
// tb_trigger_filter -- one trigger level with a latency of 30 bins. The
// bench runs a coarse time tag, sends a random trigger bit for every 25 ns
// bin 30 bins late (as the trigger line does), and feeds event frames
// stamped with the current time plus some counter frames. Both outputs
// stall at random.
// Phase 1 (short stalls): the next-level output must carry every frame in
// order, the link output every accepted event and every non-event frame, in
// order, and the accept/reject strobes must match the trigger bits.
// Phase 2 (the next level stalls for longer than the 256-bin trigger memory
// reaches back, so decisions are overwritten before the events are read): late
// events must be dropped (expired strobe), and what comes out must still be
// an in-order subsequence with correct decisions. Accept + reject + expired
// must equal the number of events.
module tb_trigger_filter;
  import tofhir2_pkg::*;
  localparam int LAT = 30;
  logic clk = 0, rst_n = 0, clear = 0;
  logic trig_stb = 0, trig_bit = 0;
  logic [13:0] trig_bin = 0, bin_now;
  logic in_valid = 0, in_ready, next_valid, next_ready = 0, link_valid, link_ready = 0;
  logic [31:0] in_data = 0, next_data, link_data;
  logic ev_accept, ev_reject, ev_expired;
  logic [15:0] tc = 0;
  assign bin_now = tc[15:2];
  trigger_filter #(.FIFO_DEPTH(64), .MEM_DEPTH(256)) dut (.clk, .rst_n, .clear, .trig_stb, .trig_bit, .trig_bin,
    .bin_now, .latency(14'(LAT)), .in_valid, .in_ready, .in_data, .next_valid, .next_ready, .next_data,
    .link_valid, .link_ready, .link_data, .ev_accept, .ev_reject, .ev_expired);
  always #3.125 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  bit dec [16384];
  initial for (int i = 0; i < 16384; i++) dec[i] = 1'($urandom);
  always @(posedge clk) if (rst_n) begin
    tc <= tc + 1;
    trig_stb <= (tc[1:0] == 2'd3);
    trig_bin <= tc[15:2];
    trig_bit <= dec[14'(tc[15:2] - LAT)];
  end
  typedef struct { logic [63:0] f; bit ev; bit acc; } fr_t;
  fr_t nq [$], lq [$];
  int n_ev = 0, n_acc = 0, n_rej = 0, n_exp = 0, skipped = 0;
  bit phase2 = 0, long_stall = 0;
  always @(posedge clk) if (rst_n) begin
    n_acc += ev_accept; n_rej += ev_reject; n_exp += ev_expired;
  end
  // output checkers
  for (genvar L = 0; L < 2; L++) begin : g_out
    int sec = 0; logic [31:0] w0;
    always @(posedge clk) if (rst_n && (L == 0 ? next_valid && next_ready : link_valid && link_ready)) begin
      logic [31:0] x;
      x = L == 0 ? next_data : link_data;
      if (!sec) w0 = x;
      else begin
        logic [63:0] f; bit found;
        f = {w0, x}; found = 0;
        while (!found && (L == 0 ? nq.size() : lq.size()) > 0) begin
          fr_t e;
          e = (L == 0) ? nq.pop_front() : lq.pop_front();
          if (e.f == f) found = 1;
          else begin
            check(phase2 && e.ev, $sformatf("output %0d: frame %h skipped outside phase 2", L, e.f));
            if (L == 0) skipped++;
          end
        end
        check(found, $sformatf("output %0d: frame %h not expected", L, f));
      end
      sec = 1 - sec;
    end
  end
  always @(negedge clk) begin
    next_ready <= long_stall ? 1'b0 : ($urandom_range(0, 2) != 0);
    link_ready <= ($urandom_range(0, 2) != 0);
  end
  task automatic send(input logic [63:0] f);
    for (int w = 0; w < 2; w++) begin
      in_valid = 1; in_data = w ? f[31:0] : f[63:32];
      @(posedge clk); while (!in_ready) @(posedge clk);
      @(negedge clk); in_valid = 0;
    end
  endtask
  task automatic traffic(input int n);
    for (int i = 0; i < n; i++) begin
      fr_t e; word0_t w;
      repeat ($urandom_range(0, 12)) @(negedge clk);
      w = word0_t'($urandom);
      e.ev = ($urandom_range(0, 9) != 0);
      w.ftype = e.ev ? FT_EVENT : FT_COUNTER;
      w.tcoarse = tc;
      e.f = {32'(w), $urandom};
      e.acc = !e.ev || dec[tc[15:2]];
      n_ev += e.ev;
      nq.push_back(e);
      if (e.acc) lq.push_back(e);
      send(e.f);
    end
  endtask
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (4 * LAT + 20) @(negedge clk);
    traffic(1500);
    repeat (4 * LAT + 400) @(negedge clk);
    check(nq.size() == 0 && lq.size() == 0, $sformatf("phase 1 drained (%0d/%0d left)", nq.size(), lq.size()));
    check(n_exp == 0 && n_acc + n_rej == n_ev, $sformatf("phase 1 strobes acc %0d rej %0d exp %0d events %0d", n_acc, n_rej, n_exp, n_ev));
    phase2 = 1;
    fork
      traffic(600);
      repeat (5) begin
        repeat (300) @(negedge clk);
        long_stall = 1; repeat (4 * 300) @(negedge clk); long_stall = 0;   // longer than the 256-bin memory
      end
    join
    repeat (4 * LAT + 600) @(negedge clk);
    // events left unmatched in the next-level queue were dropped as well
    skipped += nq.size();
    check(n_exp > 0, "late events expired");
    check(n_acc + n_rej + n_exp == n_ev, $sformatf("strobes acc %0d rej %0d exp %0d events %0d", n_acc, n_rej, n_exp, n_ev));
    check(skipped == n_exp, $sformatf("dropped frames %0d = expired strobes %0d", skipped, n_exp));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #3ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
