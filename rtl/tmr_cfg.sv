`timescale 1ns/1ps
// tmr_cfg -- configuration register file with triple modular redundancy.
//
// N_REGS registers of REG_W bits (32 channel registers and three global
// ones) are each held in three copies. Every output bit is the majority of
// its three copies, so a single upset never reaches the logic. The
// disagreement of any two copies is detected combinationally; that
// asynchronous detection passes through a chain of SYNC_STAGES registers
// before it triggers correction, which rewrites all three copies of every
// register with the voted value and increments a saturating counter of
// corrected upsets (readable over the configuration link). A write stores the
// same value in all three copies. Triplication, majority voting, the
// four-register synchroniser and the upset counter follow the chip; the
// correction granularity (all registers at once) is this design's.
// The inj_* port flips one stored bit; it exists to emulate a particle hit in
// simulation and is tied off in the chip.
module tmr_cfg
  import tofhir2_pkg::*;
#(
  parameter int unsigned N     = N_REGS,
  parameter int unsigned W     = REG_W,
  parameter int unsigned SYNC_STAGES = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 we,
  input  logic [5:0]           waddr,
  input  logic [W-1:0]         wdata,
  input  logic [5:0]           raddr,
  output logic [W-1:0]         rdata,
  output logic [N-1:0][W-1:0]  regs,        // voted contents
  output logic [15:0]          seu_count,
  output logic                 mismatch,    // copies currently disagree
  input  logic                 inj_en,
  input  logic [1:0]           inj_copy,
  input  logic [5:0]           inj_reg,
  input  logic [$clog2(W)-1:0] inj_bit
);
  logic [N-1:0][W-1:0] c0, c1, c2;
  logic [SYNC_STAGES-1:0] sync;
  logic                   correct;

  function automatic logic [W-1:0] reset_value(input int unsigned i);
    if (i < N_CH)            return ch_cfg_default();
    else if (i == N_CH)      return glb0_default();
    else                     return '0;
  endfunction

  always_comb begin
    logic any;
    any = 1'b0;
    for (int unsigned i = 0; i < N; i++) begin
      regs[i] = (c0[i] & c1[i]) | (c1[i] & c2[i]) | (c0[i] & c2[i]);
      any     = any | (|((c0[i] ^ c1[i]) | (c1[i] ^ c2[i])));
    end
    mismatch = any;
  end

  assign rdata   = (32'(raddr) < N) ? regs[raddr] : '0;
  assign correct = sync[SYNC_STAGES-1];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      sync      <= '0;
      seu_count <= '0;
      for (int unsigned i = 0; i < N; i++) begin
        c0[i] <= reset_value(i); c1[i] <= reset_value(i); c2[i] <= reset_value(i);
      end
    end else begin
      sync <= correct ? '0 : {sync[SYNC_STAGES-2:0], mismatch};
      if (correct) begin
        c0 <= regs; c1 <= regs; c2 <= regs;
        if (seu_count != 16'hFFFF) seu_count <= seu_count + 16'd1;
      end
      if (we && 32'(waddr) < N) begin
        c0[waddr] <= wdata; c1[waddr] <= wdata; c2[waddr] <= wdata;
      end
      if (inj_en && 32'(inj_reg) < N) begin
        unique case (inj_copy)
          2'd0:    c0[inj_reg][inj_bit] <= ~c0[inj_reg][inj_bit];
          2'd1:    c1[inj_reg][inj_bit] <= ~c1[inj_reg][inj_bit];
          default: c2[inj_reg][inj_bit] <= ~c2[inj_reg][inj_bit];
        endcase
      end
    end
endmodule
