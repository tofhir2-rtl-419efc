`timescale 1ns/1ps
// tb_channel_digitizer -- plays the trigger generator (valid events on free
// buffer sets, round robin, up to eight waiting) and the ADC (conversions of
// random length whose result encodes the selected input and buffer set). The
// bench checks the conversion sequence TAC1, TAC2 (three-measurement mode
// only), QAC on the event's buffer set, that the buffer set is busy from the
// event until its QAC is converted, and the two output words of each event,
// in order, under random back-pressure, in both measurement modes.
module tb_channel_digitizer;
  import tofhir2_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, three_meas = 1;
  logic ev_valid = 0, ev_tac2 = 0, adc_start, adc_done = 0, out_valid, out_ready = 0;
  logic [2:0] ev_buf = 0, rd_sel;
  logic [15:0] ev_tcoarse = 0;
  logic [5:0] ev_dcoarse = 0;
  logic [7:0] busy;
  logic [1:0] adc_mux;
  logic [9:0] adc_code = 0;
  logic [31:0] out_data;
  channel_digitizer dut (.clk, .rst_n, .clear, .ch_id(5'd17), .three_meas, .ev_valid, .ev_buf, .ev_tcoarse,
    .ev_dcoarse, .ev_tac2, .busy, .adc_start, .adc_mux, .rd_sel, .adc_done, .adc_code, .out_valid, .out_ready, .out_data);
  always #3.125 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  function automatic logic [9:0] code_of(input logic [1:0] m, input logic [2:0] b, input logic [15:0] tcv);
    return {m, b, tcv[4:0]};
  endfunction
  typedef struct { logic [2:0] b; logic [15:0] tc; logic [5:0] dc; bit t2; bit tm; } ev_t;
  ev_t q [$], conv [$];
  logic [7:0] mbusy = 0;        // expected busy sets
  // ADC model
  int cnt = -1; logic [1:0] m_q; logic [2:0] b_q;
  int step = 0;
  logic qac_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_valid) mbusy[ev_buf] = 1;
    if (adc_done && qac_done) mbusy[b_q] = 0;   // the DUT frees the set when it takes the QAC result
    qac_done <= 0;
    adc_done <= 0;
    if (adc_start) begin
      check(cnt < 0, "start while converting");
      cnt = $urandom_range(1, 6); m_q = adc_mux; b_q = rd_sel;
      check(conv.size() > 0, "conversion without an event");
      if (conv.size() > 0) begin
        ev_t e; e = conv[0];
        check(b_q == e.b, $sformatf("conversion on buffer set %0d want %0d", b_q, e.b));
        check(m_q == (step == 0 ? 2'd0 : (step == 1 && e.tm) ? 2'd1 : 2'd2), $sformatf("conversion order: input %0d at step %0d", m_q, step));
      end
    end else if (cnt > 0) begin
      cnt--;
      if (cnt == 0) begin
        ev_t e; e = conv[0];
        adc_done <= 1; qac_done <= (m_q == 2'd2); adc_code <= code_of(m_q, b_q, e.tc); cnt = -1;
        step++;
        if (m_q == 2'd2) begin step = 0; void'(conv.pop_front()); end
      end
    end
  end
  // output checker
  int sec = 0, n_out = 0; logic [31:0] w0;
  always @(negedge clk) out_ready <= ($urandom_range(0, 2) != 0);
  always @(negedge clk) if (rst_n) check(busy == mbusy, $sformatf("busy %b want %b", busy, mbusy));
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      if (!sec) w0 = out_data;
      else begin
        ev_t e; word0_t a; word1_t c;
        a = word0_t'(w0); c = word1_t'(out_data);
        e = q.pop_front();
        check(a.ch == 5'd17 && a.ftype == FT_EVENT && a.buf_id == e.b && a.tcoarse == e.tc && a.dcoarse == e.dc,
              $sformatf("word 0 %h", w0));
        check(c.tfine1 == code_of(0, e.b, e.tc) && c.qfine == code_of(2, e.b, e.tc) &&
              c.tfine2 == (e.tm ? code_of(1, e.b, e.tc) : 10'd0) && c.flags == {e.t2, e.tm}, $sformatf("word 1 %h", out_data));
        n_out++;
      end
      sec = 1 - sec;
    end
  end
  initial begin
    int nb;
    nb = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 1500; i++) begin
      ev_t e;
      if (i == 750) begin
        while (q.size() > 0) @(negedge clk);
        repeat (5) @(negedge clk);
        three_meas = 0;
      end
      repeat ((i % 200 < 40) ? 0 : $urandom_range(0, 30)) @(negedge clk);   // bursts
      while (mbusy[nb] || busy[nb]) @(negedge clk);
      e.b = 3'(nb); e.tc = 16'($urandom); e.dc = 6'($urandom); e.t2 = 1'($urandom); e.tm = three_meas;
      ev_valid = 1; ev_buf = e.b; ev_tcoarse = e.tc; ev_dcoarse = e.dc; ev_tac2 = e.t2;
      q.push_back(e); conv.push_back(e);
      @(negedge clk); ev_valid = 0;
      nb = (nb + 1) % 8;
    end
    repeat (500) @(negedge clk);
    check(n_out == 1500 && q.size() == 0, $sformatf("%0d events sent", n_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2ms; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
