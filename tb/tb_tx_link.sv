`timescale 1ns/1ps
// tb_tx_link -- whole transmit link: frames in, DDR bit pairs out. The bench
// deserialises dq (dq[1] then dq[0] each cycle), aligns on the K28.5 comma,
// decodes every 10-bit character (checking code and running disparity), and
// checks that the frames come out unchanged and in order, with the start
// character of their type and idle characters between them.
module tb_tx_link;
  import tofhir2_pkg::*;
  import code8b10b_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, frame_start;
  logic [31:0] in_data = 0;
  logic [1:0] dq;
  tx_link dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .dq, .frame_start);
  always #3.125 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  logic [63:0] sent [$];
  logic [9:0] sh = 0;
  int nb = -1, idx = -1, nfr = 0, rd = 0, nchar = 0;   // rd 0: not known yet
  logic [7:0] sof;
  logic [63:0] fr;
  always @(negedge clk) if (rst_n) begin
    for (int j = 1; j >= 0; j--) begin
      sh = {sh[8:0], dq[j]};
      if (nb >= 0) nb++;
      if (nb < 0 && (sh == 10'b0011111010 || sh == 10'b1100000101)) nb = 10;
      if (nb == 10) begin
        dec_t d;
        int ones;
        nb = 0; nchar++;
        d = decode(sh);
        check(!d.err, $sformatf("undecodable %b", sh));
        ones = $countones(sh);
        if (rd != 0) check(ones == 5 || (ones == 6 && rd < 0) || (ones == 4 && rd > 0), "running disparity");
        if (ones == 6) rd = 1;
        if (ones == 4) rd = -1;
        if (d.k) begin
          check(d.data == K28_5 || idx < 0, "K inside a frame");
          if (d.data != K28_5) begin sof = d.data; idx = 0; fr = 0; end
        end else begin
          check(idx >= 0, "data outside a frame");
          fr = {fr[55:0], d.data}; idx++;
          if (idx == 8) begin
            logic [63:0] e;
            idx = -1; nfr++;
            e = sent.pop_front();
            check(fr == e, $sformatf("frame %h want %h", fr, e));
            check(sof == (e[55:54] == FT_COUNTER ? K28_2 : e[55:54] == FT_REPLY ? K28_3 : K28_1), "start character");
          end
        end
      end
    end
  end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int f = 0; f < 300; f++) begin
      logic [63:0] v;
      v = {$urandom, $urandom};
      v[55:54] = 2'($urandom_range(0, 2));
      if (f % 3 != 0) repeat ($urandom_range(0, 80)) @(negedge clk);
      for (int w = 0; w < 2; w++) begin
        in_valid = 1; in_data = w ? v[31:0] : v[63:32];
        @(posedge clk); while (!in_ready) @(posedge clk);
        if (w) sent.push_back(v);
        @(negedge clk); in_valid = 0;
      end
    end
    repeat (300) @(negedge clk);
    check(nfr == 300, $sformatf("%0d frames received", nfr));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
