`timescale 1ns/1ps
// tb_trigger_buffer -- the trigger buffer of a group of four channels with
// L0 latency 10 bins and L1 latency 60 bins. Four sources send event frames
// stamped with the current coarse time (and a few counter frames) while the
// L0 and L1 link outputs stall at random. Every event must appear on the L0
// output exactly when its bin's L0 bit was set and on the L1 output exactly
// when its L1 bit was set (the L1 level sees all events, whatever the L0
// decision), each source's frames in order; counter frames appear on both.
module tb_trigger_buffer;
  import tofhir2_pkg::*;
  localparam int L0LAT = 10, L1LAT = 60;
  logic clk = 0, rst_n = 0, clear = 0;
  logic trig_stb = 0, l0_bit = 0, l1_bit = 0;
  logic [13:0] trig_bin = 0, bin_now;
  logic [3:0] in_valid, in_ready;
  logic [3:0][31:0] in_data;
  logic l0_valid, l0_ready = 0, l1_valid, l1_ready = 0;
  logic [31:0] l0_data, l1_data;
  logic [2:0] l0_stat, l1_stat;
  logic [15:0] tc = 0;
  assign bin_now = tc[15:2];
  trigger_buffer #(.MEM_DEPTH(256)) dut (.clk, .rst_n, .clear, .trig_stb, .l0_bit, .l1_bit, .trig_bin, .bin_now,
    .l0_latency(14'(L0LAT)), .l1_latency(14'(L1LAT)), .in_valid, .in_ready, .in_data,
    .l0_valid, .l0_ready, .l0_data, .l1_valid, .l1_ready, .l1_data, .l0_stat, .l1_stat);
  always #3.125 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  bit d0 [16384], d1 [16384];
  initial for (int i = 0; i < 16384; i++) begin d0[i] = 1'($urandom); d1[i] = ($urandom_range(0, 3) == 0); end
  always @(posedge clk) if (rst_n) begin
    tc <= tc + 1;
    trig_stb <= (tc[1:0] == 2'd3);
    trig_bin <= tc[15:2];
    l0_bit <= d0[14'(tc[15:2] - L0LAT)];
    l1_bit <= d1[14'(tc[15:2] - L1LAT)];
  end
  logic [63:0] q0 [4][$], q1 [4][$];
  int n_out [2], n_in = 0, n_stat [2];
  for (genvar s = 0; s < 4; s++) begin : g_src
    logic v = 0; logic [31:0] dd = 0;
    assign in_valid[s] = v;
    assign in_data[s] = dd;
    initial begin
      @(posedge rst_n);
      repeat (200) @(negedge clk);
      for (int i = 0; i < 400; i++) begin
        word0_t w; logic [63:0] f; bit ev;
        repeat ($urandom_range(0, 40)) @(negedge clk);
        w = word0_t'($urandom); w.ch = 5'(s);
        ev = ($urandom_range(0, 9) != 0);
        w.ftype = ev ? FT_EVENT : FT_COUNTER;
        w.tcoarse = tc;
        f = {32'(w), $urandom};
        if (!ev || d0[tc[15:2]]) q0[s].push_back(f);
        if (!ev || d1[tc[15:2]]) q1[s].push_back(f);
        n_in += ev;
        for (int k = 0; k < 2; k++) begin
          v = 1; dd = k ? f[31:0] : f[63:32];
          @(posedge clk); while (!in_ready[s]) @(posedge clk);
          @(negedge clk); v = 0;
        end
      end
    end
  end
  for (genvar L = 0; L < 2; L++) begin : g_out
    int sec = 0; logic [31:0] w0;
    always @(negedge clk) if (L == 0) l0_ready <= ($urandom_range(0, 3) != 0); else l1_ready <= ($urandom_range(0, 3) != 0);
    always @(posedge clk) if (rst_n) begin
      if ((L == 0) ? l0_stat[1:0] != 0 : l1_stat[1:0] != 0) n_stat[L]++;
      check(((L == 0) ? l0_stat[2] : l1_stat[2]) == 0, "no event expires");
      if (L == 0 ? l0_valid && l0_ready : l1_valid && l1_ready) begin
        logic [31:0] x;
        x = (L == 0) ? l0_data : l1_data;
        if (!sec) w0 = x;
        else begin
          logic [63:0] f, e; int s;
          f = {w0, x}; s = w0[28:27];
          check(((L == 0) ? q0[s].size() : q1[s].size()) > 0, $sformatf("L%0d: unexpected frame %h", L, f));
          if (((L == 0) ? q0[s].size() : q1[s].size()) > 0) begin
            e = (L == 0) ? q0[s].pop_front() : q1[s].pop_front();
            check(f == e, $sformatf("L%0d source %0d: frame %h want %h", L, s, f, e));
          end
          n_out[L]++;
        end
        sec = 1 - sec;
      end
    end
  end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (40000) @(negedge clk);
    for (int s = 0; s < 4; s++) check(q0[s].size() == 0 && q1[s].size() == 0, $sformatf("source %0d: all frames delivered", s));
    check(n_stat[0] == n_in && n_stat[1] == n_in, $sformatf("every event decided at both levels (%0d %0d of %0d)", n_stat[0], n_stat[1], n_in));
    check(n_out[0] > 100 && n_out[1] > 50, "frames on both outputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #3ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
