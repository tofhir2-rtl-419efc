`timescale 1ns/1ps
// tb_link_mux -- L0, L1 and reply sources send numbered two-word frames in
// each of the three link modes while both links stall at random. The bench
// checks where every frame goes: mode 0 L1 and replies on the primary link,
// L0 on the secondary; mode 1 L1 on the secondary (backup), replies on the
// primary, L0 dropped; mode 2 L1 frames alternating between the links,
// replies on the primary, L0 dropped. Frames must stay whole and in order
// and no L1 or reply frame may be lost.
module tb_link_mux;
  import tofhir2_pkg::*;
  logic clk = 0, rst_n = 0;
  link_mode_e mode = LINK_L1_L0;
  logic [2:0] v, r;            // 0 L0, 1 L1, 2 reply
  logic [2:0][31:0] d;
  logic pri_valid, pri_ready = 0, sec_valid, sec_ready = 0;
  logic [31:0] pri_data, sec_data;
  link_mux dut (.clk, .rst_n, .mode,
    .l0_valid(v[0]), .l0_ready(r[0]), .l0_data(d[0]),
    .l1_valid(v[1]), .l1_ready(r[1]), .l1_data(d[1]),
    .rp_valid(v[2]), .rp_ready(r[2]), .rp_data(d[2]),
    .pri_valid, .pri_ready, .pri_data, .sec_valid, .sec_ready, .sec_data);
  always #3.125 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  int sent [3], nxt [3];
  bit run = 0;
  // word: {source[31:30], word[29], frame number}
  for (genvar s = 0; s < 3; s++) begin : g_src
    logic w = 0, vv = 0;
    assign v[s] = vv;
    assign d[s] = {2'(s), w, 29'(sent[s])};
    always @(posedge clk) if (rst_n) begin
      if (vv && r[s]) begin
        if (w) begin sent[s]++; vv <= 0; end
        w <= !w;
      end else if (!vv && run && $urandom_range(0, 5) == 0) vv <= 1;
    end
  end
  int l1_alt = 0;       // mode 2: link expected for the next L1 frame (0 pri, 1 sec)
  for (genvar L = 0; L < 2; L++) begin : g_sink
    int sec = 0, cur = 0;
    always @(negedge clk) if (L == 0) pri_ready <= ($urandom_range(0, 2) != 0); else sec_ready <= ($urandom_range(0, 2) != 0);
    always @(posedge clk) if (rst_n && (L == 0 ? pri_valid && pri_ready : sec_valid && sec_ready)) begin
      logic [31:0] x; int s;
      x = (L == 0) ? pri_data : sec_data;
      s = x[31:30];
      if (!sec) begin
        cur = s;
        check(x[29] == 0, "frame starts with word 0");
        case (mode)
          LINK_L1_L0:     check(L == 0 ? s != 0 : s == 0, $sformatf("mode 0: source %0d on link %0d", s, L));
          LINK_L1_BACKUP: check(L == 0 ? s == 2 : s == 1, $sformatf("mode 1: source %0d on link %0d", s, L));
          default: begin
            check(s != 0 && (s == 2 ? L == 0 : 1'b1), $sformatf("mode 2: source %0d on link %0d", s, L));
            if (s == 1) begin check(L == l1_alt, "mode 2: L1 frames alternate"); l1_alt = 1 - l1_alt; end
          end
        endcase
        if (s != 0) check(x[28:0] == 29'(nxt[s]), $sformatf("source %0d frame %0d want %0d", s, x[28:0], nxt[s]));
      end else begin
        check(s == cur && x[29] == 1, "frame kept whole");
        if (s != 0) nxt[s]++;
      end
      sec = 1 - sec;
    end
  end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int m = 0; m < 6; m++) begin
      mode = link_mode_e'(m % 3);
      run = 1;
      repeat (3000) @(negedge clk);
      run = 0;
      repeat (300) @(negedge clk);          // drain before changing mode
      check(sent[1] == nxt[1] && sent[2] == nxt[2], $sformatf("mode %0d: all L1 (%0d/%0d) and reply (%0d/%0d) frames delivered", m % 3, nxt[1], sent[1], nxt[2], sent[2]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
