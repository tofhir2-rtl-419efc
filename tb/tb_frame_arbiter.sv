`timescale 1ns/1ps
// tb_frame_arbiter -- four sources push numbered two-word frames with random
// gaps while the sink stalls at random. The bench checks that the two words
// of a frame are never separated, that each source's frames come out in
// order and complete, and that no source waits for more than N frames of
// the others while it is requesting (round-robin fairness).
module tb_frame_arbiter;
  localparam int N = 4, NF = 400;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready;
  logic [N-1:0][31:0] in_data;
  logic out_valid, out_ready = 0;
  logic [31:0] out_data;
  frame_arbiter #(.N(N)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data);
  always #3.125 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  int sent [N], got [N], wsel [N];
  int waitfr [N];
  // word = {src[31:30], word index [29], frame number}
  for (genvar s = 0; s < N; s++) begin : g_src
    logic v = 0; logic w = 0;
    assign in_valid[s] = v;
    assign in_data[s]  = {2'(s), w, 29'(sent[s])};
    always @(posedge clk) if (rst_n) begin
      if (v && in_ready[s]) begin
        if (w) begin sent[s]++; w <= 0; v <= 0; end else w <= 1;
      end
      if ((!v || (in_ready[s] && w)) && sent[s] + (v && in_ready[s] && w) < NF && $urandom_range(0, 3) == 0) v <= 1;
    end
  end
  logic second = 0; int cur = 0;
  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int s; s = out_data[31:30];
    if (!second) begin
      cur = s;
      check(out_data[29] == 0, "frame starts with word 0");
      check(out_data[28:0] == 29'(got[s]), $sformatf("src %0d frame %0d want %0d", s, out_data[28:0], got[s]));
      for (int o = 0; o < N; o++) if (o != s) begin
        if (in_valid[o] && !in_data[o][29]) waitfr[o]++; else waitfr[o] = 0;
        check(waitfr[o] <= N, $sformatf("source %0d starved", o));
      end
      waitfr[s] = 0;
    end else begin
      check(s == cur && out_data[29] == 1, "second word from the same source");
      got[s]++;
    end
    second = !second;
  end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (20000) @(negedge clk);
    for (int s = 0; s < N; s++) check(got[s] == NF, $sformatf("source %0d delivered %0d of %0d", s, got[s], NF));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
