`timescale 1ns/1ps
// tb_cfg_rx -- drives the 80 Mb/s 8b/10b command line (one bit every two
// clock cycles, K28.5 idle) with random write, read-low, read-high and
// SEU-read commands for this chip (id 13) and for other chips, plus
// occasional corrupted characters. The bench checks alignment, that writes
// for this chip produce one 'we' pulse with the right address and data,
// that commands for other chips and broken commands do nothing, and that
// each read gives one two-word reply frame {id, cmd, reply type, address}
// then the requested data, under random back-pressure.
module tb_cfg_rx;
  import tofhir2_pkg::*;
  import code8b10b_pkg::*;
  logic clk = 0, rst_n = 0, rx = 0, we, rp_valid, rp_ready = 0, aligned, code_err;
  logic [5:0] addr;
  logic [63:0] wdata, rdata;
  logic [31:0] rp_data;
  logic [15:0] seu = 16'h1234;
  logic [4:0] id = 5'd13;
  cfg_rx dut (.clk, .rst_n, .rx, .chip_id(id), .align_mode(1'b0), .we, .addr, .wdata, .rdata,
              .seu_count(seu), .rp_valid, .rp_ready, .rp_data, .aligned, .code_err);
  always #3.125 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  logic [63:0] mem [64];
  assign rdata = mem[addr];
  typedef struct { bit k; logic [7:0] d; bit bad; } ch_t;
  ch_t q [$];
  logic rd = 0;
  initial begin
    @(posedge rst_n);
    forever begin
      ch_t s; enc_t en;
      if (q.size() > 0) s = q.pop_front(); else begin s.k = 1; s.d = K28_5; s.bad = 0; end
      en = encode(s.d, s.k, rd); rd = en.rd;
      if (s.bad) en.code = 10'b1111011110;      // not a valid character, no comma
      for (int b = 9; b >= 0; b--) begin
        @(negedge clk); rx = en.code[b]; @(negedge clk);
      end
    end
  end
  task automatic put(input bit k, input logic [7:0] d, input bit bad = 0);
    ch_t s; s.k = k; s.d = d; s.bad = bad; q.push_back(s);
  endtask
  logic [63:0] exp_w [$];   // {addr, data} pairs packed below
  logic [5:0]  exp_a [$];
  logic [63:0] exp_r [$];   // expected reply frames
  int n_we = 0, n_rp = 0, n_err = 0;
  always @(posedge clk) if (rst_n) begin
    if (we) begin
      n_we++;
      check(exp_a.size() > 0, "unexpected write");
      if (exp_a.size() > 0) begin
        logic [5:0] a; logic [63:0] dd;
        a = exp_a.pop_front(); dd = exp_w.pop_front();
        check(addr == a && wdata == dd, $sformatf("write %0d=%h want %0d=%h", addr, wdata, a, dd));
        mem[addr] <= wdata;
      end
    end
    if (code_err) n_err++;
  end
  int second = 0; logic [31:0] w0;
  always @(negedge clk) rp_ready <= ($urandom_range(0, 3) == 0);
  always @(posedge clk) if (rst_n && rp_valid && rp_ready) begin
    if (!second) w0 = rp_data;
    else begin
      logic [63:0] e;
      n_rp++;
      check(exp_r.size() > 0, "unexpected reply");
      if (exp_r.size() > 0) begin
        e = exp_r.pop_front();
        check({w0, rp_data} == e, $sformatf("reply %h %h want %h", w0, rp_data, e));
      end
    end
    second = 1 - second;
  end
  initial begin
    for (int i = 0; i < 64; i++) mem[i] = {$urandom, $urandom};
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (100) @(negedge clk);
    check(aligned, "aligned on the idle commas");
    for (int n = 0; n < 300; n++) begin
      int cmd, a; bit mine, bad; logic [63:0] v; logic [4:0] cid;
      cmd = $urandom_range(1, 4); a = $urandom_range(0, 34);
      mine = ($urandom_range(0, 3) != 0); cid = mine ? id : 5'(id + $urandom_range(1, 31));
      bad = ($urandom_range(0, 19) == 0);
      v = {$urandom, $urandom};
      if (mine && !bad) begin
        if (cmd == 1) begin exp_a.push_back(6'(a)); exp_w.push_back(v); end
        else exp_r.push_back({cid, 3'(cmd), 2'(FT_REPLY), 6'(a), 16'h0,
                              cmd == 2 ? mem[a][31:0] : cmd == 3 ? mem[a][63:32] : {16'h0, seu}});
      end
      put(1, K28_0); put(0, {cid, 3'(cmd)}); put(0, 8'(a), bad && cmd != 1);
      if (cmd == 1) for (int i = 7; i >= 0; i--) put(0, v[8*i +: 8], bad && i == 3);
      while (q.size() > 0) @(negedge clk);
      repeat (170) @(negedge clk);    // the command and its reply complete
    end
    repeat (200) @(negedge clk);
    check(exp_a.size() == 0 && exp_r.size() == 0, $sformatf("all commands executed (%0d writes, %0d replies pending)", exp_a.size(), exp_r.size()));
    check(n_err > 0, "corrupted characters flagged");
    check(n_we > 20 && n_rp > 20, "writes and replies seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
