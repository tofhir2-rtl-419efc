`timescale 1ns/1ps
// channel -- one TOFHIR2 channel behind its discriminators.
//
// Holds the trigger generator, the two TAC banks and the QAC bank (analog
// buffers, behavioural models), the SAR ADC (behavioural model), the
// digitisation sequencer and the 24-bit monitoring counter. Event frames and
// counter frames leave on one two-word frame stream, merged round-robin.
// The discriminator outputs are asynchronous inputs; e_current is a per-cycle
// sample standing for the energy-branch current integrated by the QAC.
module channel
  import tofhir2_pkg::*;
#(
  parameter int unsigned REFRESH = REFRESH_CYCLES
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic [4:0]      ch_id,
  input  ch_cfg_t         cfg,
  input  logic [4:0]      cnt_period,
  input  logic [TC_W-1:0] tcoarse,
  input  logic            do_t1,        // delayed T1 discriminator
  input  logic            do_t2,
  input  logic            do_e,
  input  logic            tp,           // digital test pulse
  input  logic [9:0]      e_current,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [31:0]     out_data,
  output logic [3:0]      stat          // {refresh, lost, low-E reject, valid} strobes
);
  localparam int unsigned BW = $clog2(N_BUF);

  logic            tac1_start, tac2_start, qac_int;
  logic [BW-1:0]   buf_sel, rd_sel, ev_buf;
  logic            ev_valid, ev_tac2;
  logic [TC_W-1:0] ev_tcoarse;
  logic [5:0]      ev_dcoarse;
  logic [N_BUF-1:0] busy;
  logic            st_t1, st_lowe, st_lost, st_refresh;
  logic            adc_start, adc_busy, adc_done;
  logic [1:0]      adc_mux;
  logic [ADC_W-1:0] adc_code;
  real             v_tac1, v_tac2, v_qac, v_adc;

  channel_trigger #(.NB(N_BUF), .REFRESH(REFRESH)) u_trig (
    .clk, .rst_n, .clear, .do_t1, .do_t2, .do_e, .tp, .cfg, .tcoarse, .buf_busy(busy),
    .tac1_start, .tac2_start, .buf_sel, .qac_int,
    .ev_valid, .ev_buf, .ev_tcoarse, .ev_dcoarse, .ev_tac2,
    .st_t1, .st_lowe, .st_lost, .st_refresh
  );

  tac_bank #(.N_BUF(N_BUF)) u_tac1 (.clk, .start(tac1_start), .sel(buf_sel), .rd_sel, .vout(v_tac1));
  tac_bank #(.N_BUF(N_BUF)) u_tac2 (.clk, .start(tac2_start), .sel(buf_sel), .rd_sel, .vout(v_tac2));
  qac_bank #(.N_BUF(N_BUF)) u_qac  (.clk, .integrate(qac_int), .sel(buf_sel), .i_in(e_current),
                                    .base(cfg.qac_base), .rd_sel, .vout(v_qac));

  always_comb begin
    unique case (adc_mux)
      2'd1:    v_adc = v_tac2;
      2'd2:    v_adc = v_qac;
      default: v_adc = v_tac1;
    endcase
  end

  sar_adc #(.BITS(ADC_W), .CONV_CYCLES(4)) u_adc (
    .clk, .rst_n, .start(adc_start), .vin(v_adc), .busy(adc_busy), .done(adc_done), .code(adc_code)
  );

  logic        d_valid, d_ready, c_valid, c_ready;
  logic [31:0] d_data, c_data;

  channel_digitizer #(.NB(N_BUF)) u_dig (
    .clk, .rst_n, .clear, .ch_id, .three_meas(cfg.three_meas),
    .ev_valid, .ev_buf, .ev_tcoarse, .ev_dcoarse, .ev_tac2, .busy,
    .adc_start, .adc_mux, .rd_sel, .adc_done, .adc_code,
    .out_valid(d_valid), .out_ready(d_ready), .out_data(d_data)
  );

  event_counter u_cnt (
    .clk, .rst_n, .clear, .ch_id, .enable(cfg.cnt_enable), .mode(cfg.cnt_mode), .period(cnt_period),
    .tcoarse, .strobes({ev_valid, st_lost, st_lowe, st_t1}),
    .out_valid(c_valid), .out_ready(c_ready), .out_data(c_data)
  );

  logic [1:0] arb_ready;
  frame_arbiter #(.N(2)) u_arb (
    .clk, .rst_n, .in_valid({c_valid, d_valid}), .in_ready(arb_ready), .in_data({c_data, d_data}),
    .out_valid, .out_ready, .out_data
  );
  assign d_ready = arb_ready[0];
  assign c_ready = arb_ready[1];
  assign stat    = {st_refresh, st_lost, st_lowe, ev_valid};
endmodule
