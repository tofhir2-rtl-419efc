`timescale 1ns/1ps
// cfg_rx -- 80 Mb/s multi-drop configuration receiver.
//
// The serial line is sampled every BIT_CYCLES clock cycles into a 10-bit
// window. A K28.5 comma in the window (either disparity) fixes the character
// boundary; with align_mode = 1 only the first comma after reset does, with
// align_mode = 0 every comma re-aligns. Characters are 8b/10b decoded and fed
// to a command parser:
//   K28.0, {chip_id[4:0], cmd[2:0]}, address, [8 data bytes, MSB first]
//   cmd 1: write the 64-bit register 'address'
//   cmd 2: read the low 32 bits of register 'address'
//   cmd 3: read the high 32 bits of register 'address'
//   cmd 4: read the corrected-upset counter
// Commands whose chip ID differs from this chip's are ignored, so up to 32
// chips can share one line. A read produces a two-word reply frame,
// word 0 = {chip_id, cmd, FT_REPLY, address[5:0], 16'h0}, word 1 = data; it is
// sent on the primary link. A K character or a decoding error abandons the
// command in progress. The link rate, 8b/10b coding, multi-drop use and 5-bit
// chip ID follow the chip; the command format is this design's.
module cfg_rx
  import tofhir2_pkg::*;
  import code8b10b_pkg::*;
#(
  parameter int unsigned BIT_CYCLES = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rx,
  input  logic [4:0]        chip_id,
  input  logic              align_mode,
  // register file access
  output logic              we,
  output logic [5:0]        addr,
  output logic [REG_W-1:0]  wdata,
  input  logic [REG_W-1:0]  rdata,     // register 'addr', voted
  input  logic [15:0]       seu_count,
  // reply frames
  output logic              rp_valid,
  input  logic              rp_ready,
  output logic [31:0]       rp_data,
  output logic              aligned,
  output logic              code_err   // one cycle per undecodable character
);
  // ---------------- bit sampling and alignment ----------------
  logic [$clog2(BIT_CYCLES+1)-1:0] ph;
  logic [9:0] win;
  logic [3:0] bitcnt;
  logic       sym_stb;
  logic       comma;

  assign comma = (win == 10'b0011111010) || (win == 10'b1100000101);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      ph <= '0; win <= '0; bitcnt <= '0; aligned <= 1'b0; sym_stb <= 1'b0;
    end else begin
      sym_stb <= 1'b0;
      if (32'(ph) == BIT_CYCLES - 1) begin
        ph  <= '0;
        win <= {win[8:0], rx};
      end else ph <= ph + 1'b1;
      // evaluate the window in the cycle after a new bit entered it
      if (32'(ph) == 0) begin
        if (comma && (!aligned || !align_mode)) begin
          aligned <= 1'b1;
          bitcnt  <= 4'd0;
          sym_stb <= 1'b1;
        end else if (aligned) begin
          if (bitcnt == 4'd9) begin
            bitcnt  <= 4'd0;
            sym_stb <= 1'b1;
          end else bitcnt <= bitcnt + 4'd1;
        end
      end
    end

  logic       c_valid, c_k, c_err;
  logic [7:0] c_data;
  dec8b10b u_dec (.clk, .rst_n, .in_valid(sym_stb), .sym(win),
                  .out_valid(c_valid), .data(c_data), .k(c_k), .err(c_err));

  assign code_err = c_valid && c_err;

  // ---------------- command parser ----------------
  typedef enum logic [2:0] {P_IDLE, P_HDR, P_ADDR, P_DATA, P_EXEC} pstate_e;
  pstate_e     st;
  logic [2:0]  cmd;
  logic        mine;
  logic [3:0]  nbytes;
  logic        rp_second;   // word 1 of the reply is on rp_data
  logic [31:0] rp_word1;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= P_IDLE; cmd <= '0; mine <= 1'b0; nbytes <= '0; addr <= '0; wdata <= '0;
      we <= 1'b0; rp_valid <= 1'b0; rp_data <= '0; rp_second <= 1'b0; rp_word1 <= '0;
    end else begin
      we <= 1'b0;
      if (rp_valid && rp_ready) begin
        if (!rp_second) begin
          rp_data   <= rp_word1;
          rp_second <= 1'b1;
        end else begin
          rp_valid  <= 1'b0;
          rp_second <= 1'b0;
        end
      end
      if (c_valid) begin
        if (c_err || (c_k && c_data != K28_0)) st <= P_IDLE;
        else if (c_k) st <= P_HDR;
        else unique case (st)
          P_HDR: begin
            mine <= (c_data[7:3] == chip_id);
            cmd  <= c_data[2:0];
            st   <= P_ADDR;
          end
          P_ADDR: begin
            addr   <= c_data[5:0];
            nbytes <= '0;
            st     <= (cmd == 3'd1) ? P_DATA : P_EXEC;
          end
          P_DATA: begin
            wdata  <= {wdata[REG_W-9:0], c_data};
            nbytes <= nbytes + 4'd1;
            if (nbytes == 4'd7) st <= P_EXEC;
          end
          default: ;
        endcase
      end
      if (st == P_EXEC) begin
        st <= P_IDLE;
        if (mine) begin
          if (cmd == 3'd1) we <= 1'b1;
          else if ((cmd == 3'd2 || cmd == 3'd3 || cmd == 3'd4) && !rp_valid) begin
            rp_valid  <= 1'b1;
            rp_second <= 1'b0;
            rp_data   <= {chip_id, cmd, 2'(FT_REPLY), addr, 16'h0000};
            unique case (cmd)
              3'd2:    rp_word1 <= rdata[31:0];
              3'd3:    rp_word1 <= rdata[63:32];
              default: rp_word1 <= {16'h0000, seu_count};
            endcase
          end
        end
      end
    end
endmodule
