`timescale 1ns/1ps
// tb_tmr_cfg -- writes random values to random registers and reads them back;
// injects single-bit upsets into one copy and checks that the voted
// outputs never change, that 'mismatch' rises and clears again within the
// four-stage synchroniser delay plus one cycle, and that the SEU counter
// counts each correction. Reset values (channel and global defaults) are
// checked first.
module tb_tmr_cfg;
  import tofhir2_pkg::*;
  logic clk = 0, rst_n = 0, we = 0, inj_en = 0, mismatch;
  logic [5:0] waddr = 0, raddr = 0, inj_reg = 0;
  logic [63:0] wdata = 0, rdata;
  logic [N_REGS-1:0][63:0] regs;
  logic [15:0] seu_count;
  logic [1:0] inj_copy = 0;
  logic [5:0] inj_bit = 0;
  tmr_cfg dut (.clk, .rst_n, .we, .waddr, .wdata, .raddr, .rdata, .regs, .seu_count, .mismatch,
               .inj_en, .inj_copy, .inj_reg, .inj_bit);
  always #3.125 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  logic [63:0] model [N_REGS];
  always @(posedge clk) if (rst_n)
    for (int i = 0; i < N_REGS; i++) check(regs[i] == model[i], $sformatf("voted register %0d", i));
  initial begin
    for (int i = 0; i < N_REGS; i++) model[i] = (i < N_CH) ? ch_cfg_default() : (i == N_CH) ? glb0_default() : 64'd0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 400; n++) begin
      int a;
      a = $urandom_range(0, N_REGS - 1);
      wdata = {$urandom, $urandom}; waddr = 6'(a); we = 1;
      @(negedge clk); we = 0; model[a] = wdata;
      raddr = 6'($urandom_range(0, N_REGS - 1)); #1;
      check(rdata == model[raddr], $sformatf("read register %0d", raddr));
    end
    // out-of-range write and read
    waddr = 6'd60; wdata = '1; we = 1; @(negedge clk); we = 0;
    raddr = 6'd60; #1; check(rdata == 0, "read beyond the last register gives 0");
    for (int n = 0; n < 300; n++) begin
      int n_before, cyc;
      n_before = seu_count;
      inj_copy = 2'($urandom_range(0, 2)); inj_reg = 6'($urandom_range(0, N_REGS - 1)); inj_bit = 6'($urandom);
      inj_en = 1; @(negedge clk); inj_en = 0;
      check(mismatch, "upset detected");
      cyc = 0;
      while (mismatch && cyc < 20) begin @(negedge clk); cyc++; end
      check(cyc >= 4 && cyc <= 5, $sformatf("upset repaired after %0d cycles", cyc));
      check(seu_count == 16'(n_before + 1), "SEU counter counts the correction");
      repeat ($urandom_range(0, 5)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
