`timescale 1ns/1ps
// tb_pack -- random event, counter and reply frames (two 32-bit words each)
// are offered with random gaps while 'take' comes every fifth cycle, as from
// the serialiser. The bench checks the character stream: K28.5 while idle,
// one start character per frame chosen by frame type (K28.1 event, K28.2
// counter, K28.3 reply), then the eight bytes most significant first, and
// every frame delivered once and in order.
module tb_pack;
  import tofhir2_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, take = 0, k_o, frame_start;
  logic [31:0] in_data = 0;
  logic [7:0] byte_o;
  pack dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .take, .byte_o, .k_o, .frame_start);
  always #3.125 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  logic [63:0] sent [$];
  logic [63:0] fr;
  int tcnt = 0, idx = -1, nfr = 0, nidle = 0;
  logic [7:0] sof;
  always @(posedge clk) if (rst_n) begin
    if (take) begin
      if (k_o) begin
        check(idx < 0, "K character inside a frame");
        if (byte_o == K28_5) nidle++;
        else begin
          sof = byte_o; idx = 0; fr = 0;
          check(frame_start, "frame_start with the start character");
        end
      end else begin
        check(idx >= 0, "data byte outside a frame");
        fr = {fr[55:0], byte_o}; idx++;
        if (idx == 8) begin
          logic [63:0] e;
          idx = -1;
          check(sent.size() > 0, "frame never sent");
          if (sent.size() > 0) begin
            logic [1:0] ft;
            e = sent.pop_front();
            ft = e[23+32:22+32];
            check(fr == e, $sformatf("frame %h want %h", fr, e));
            check(sof == (ft == FT_COUNTER ? K28_2 : ft == FT_REPLY ? K28_3 : K28_1), "start character by type");
          end
          nfr++;
        end
      end
    end
  end
  always @(negedge clk) begin
    tcnt = (tcnt == 4) ? 0 : tcnt + 1;
    take <= (tcnt == 0);
  end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int f = 0; f < 300; f++) begin
      logic [63:0] v;
      v = {$urandom, $urandom};
      v[55:54] = 2'($urandom_range(0, 2));
      repeat ($urandom_range(0, 60)) @(negedge clk);
      for (int w = 0; w < 2; w++) begin
        in_valid = 1; in_data = w ? v[31:0] : v[63:32];
        @(posedge clk); while (!in_ready) @(posedge clk);
        if (w) sent.push_back(v);
        @(negedge clk); in_valid = 0;
      end
    end
    repeat (200) @(negedge clk);
    check(nfr == 300 && sent.size() == 0, $sformatf("%0d frames delivered", nfr));
    check(nidle > 0, "idle characters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
