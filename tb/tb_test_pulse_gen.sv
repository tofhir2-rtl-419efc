`timescale 1ns/1ps
// tb_test_pulse_gen -- runs the internal generator with random period and
// length on a 40 MHz tp_in clock and checks the pulse spacing and width
// counted in tp_in cycles; then checks that with the internal generator
// off the external tp_in is passed through, and that the target bit routes
// the pulse to the digital or the analog output only.
module tb_test_pulse_gen;
  logic rst_n = 0, tp_in = 0, tp_internal = 0, tp_target = 0;
  logic [15:0] period = 0;
  logic [7:0] length = 0;
  logic tp_digital, tp_analog;
  test_pulse_gen dut (.rst_n, .tp_in, .tp_internal, .tp_target, .period, .length, .tp_digital, .tp_analog);
  always #12.5 tp_in = ~tp_in;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  int hi = 0, lo = 0, npulse = 0;
  logic p_q = 0;
  initial begin
    #40 rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      int per, len;
      per = $urandom_range(3, 60); len = $urandom_range(1, per - 1);
      @(negedge tp_in);
      tp_internal = 1; tp_target = r[0]; period = 16'(per); length = 8'(len);
      repeat (2 * per + 2) @(negedge tp_in);            // settle
      // measure over several periods, sampling just before each rising edge
      begin
        int run_hi, run_lo, nh;
        bit seen_lo;
        seen_lo = 0;
        run_hi = 0; run_lo = 0; nh = 0;
        for (int c = 0; c < 6 * per; c++) begin
          logic p, other;
          @(negedge tp_in);
          p     = tp_target ? tp_analog : tp_digital;
          other = tp_target ? tp_digital : tp_analog;
          check(!other, "pulse only on the selected output");
          if (p) begin
            if (run_lo > 0 && nh > 0) check(run_lo == per - len, $sformatf("gap %0d want %0d", run_lo, per - len));
            run_lo = 0; run_hi++;
          end else begin
            if (run_hi > 0) begin if (seen_lo) check(run_hi == len, $sformatf("width %0d want %0d", run_hi, len)); nh++; npulse++; end
            run_hi = 0; run_lo++; seen_lo = 1;
          end
        end
        check(nh >= 4, "pulses generated");
      end
    end
    // external test pulse passes through
    tp_internal = 0; tp_target = 0;
    for (int c = 0; c < 50; c++) begin
      #3; check(tp_digital == tp_in && !tp_analog, "external pulse to digital");
      #7;
    end
    tp_target = 1;
    for (int c = 0; c < 50; c++) begin
      #3; check(tp_analog == tp_in && !tp_digital, "external pulse to analog");
      #7;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
