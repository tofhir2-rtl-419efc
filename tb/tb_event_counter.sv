`timescale 1ns/1ps
// tb_event_counter -- random strobes on all four inputs, random counting
// mode and period, and a back end that stalls at random. The bench checks
// that counter frames carry the channel number and the counter frame type,
// that their time tags are spaced by whole periods, and that the counts in
// all frames add up to the number of strobes of the selected kind.
module tb_event_counter;
  import tofhir2_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, enable = 0, out_ready = 0, out_valid;
  cnt_mode_e mode = CNT_T1;
  logic [4:0] period = 6;
  logic [15:0] tc = 0;
  logic [3:0] strobes = 0;
  logic [31:0] out_data;
  event_counter dut (.clk, .rst_n, .clear, .ch_id(5'd21), .enable, .mode, .period, .tcoarse(tc),
                     .strobes, .out_valid, .out_ready, .out_data);
  always #3.125 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  longint total = 0, got = 0;
  int nfr = 0, second = 0, stall = 1;
  bit quiet = 1;
  logic [15:0] tc0;
  always @(posedge clk) if (rst_n) begin
    tc <= tc + 1;
    if (enable && strobes[mode]) total++;
    if (out_valid && out_ready) begin
      if (!second) begin
        word0_t w; w = word0_t'(out_data);
        check(w.ch == 5'd21 && w.ftype == FT_COUNTER, "counter frame header");
        if (nfr == 0) tc0 = w.tcoarse;
        check(((w.tcoarse - tc0) & 16'((1 << period) - 1)) == 0, "frame time tags a whole number of periods apart");
      end else begin
        check(out_data[31:24] == 0, "upper byte of count word");
        got += out_data[23:0]; nfr++;
      end
      second = !second;
    end
  end
  always @(negedge clk) begin
    strobes   <= quiet ? 4'd0 : 4'($urandom);
    out_ready <= stall ? ($urandom_range(0, 9) == 0) : 1'b1;
  end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 12; r++) begin
      // new mode and period, counter cleared
      enable = 0; quiet = 1;
      repeat (40) @(negedge clk);
      clear = 1; @(negedge clk); clear = 0;
      mode = cnt_mode_e'(r % 4); period = 5'($urandom_range(4, 8)); stall = r % 2;
      total = 0; got = 0; nfr = 0; second = 0;
      enable = 1; quiet = 0;
      repeat (3000) @(negedge clk);
      // stop the strobes; within a few periods every count has been sent
      quiet = 1;
      repeat (3 * (1 << period) + 200) @(negedge clk);
      check(got == total, $sformatf("mode %0d period %0d: frames hold %0d of %0d", r % 4, period, got, total));
      check(nfr > 3, "frames sent");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
