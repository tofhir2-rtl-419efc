`timescale 1ns/1ps
// pack -- frame-to-byte packer in front of a link's 8b/10b encoder (PACK).
//
// Frames arrive as two 32-bit words (valid/ready). A frame is sent as nine
// characters: a K-code naming the frame type (K28.1 event, K28.2 counter,
// K28.3 command reply) followed by the eight bytes, word 0 first, most
// significant byte first. With no frame to send the link idles on the
// K28.5 comma. 'take' is the encoder's request for the next character; the
// character on byte/k is held until then. The next frame is collected while
// the current one is sent, so frames follow back to back. The byte-wide
// output follows the chip's block diagram; the framing is this design's own.
module pack
  import tofhir2_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  input  logic        take,
  output logic [7:0]  byte_o,
  output logic        k_o,
  output logic        frame_start     // first character of a frame taken
);
  logic [63:0] nxt;        // frame being collected
  logic [1:0]  nxt_words;
  logic [63:0] cur;        // frame being sent
  logic [3:0]  idx;        // 0: idle/start symbol, 1..8: bytes
  logic        sending;
  word0_t      w0;

  assign in_ready = (nxt_words != 2'd2);
  assign w0       = word0_t'(nxt[63:32]);

  always_comb begin
    if (!sending) begin
      k_o = 1'b1;
      if (nxt_words == 2'd2)
        unique case (w0.ftype)
          FT_COUNTER: byte_o = K28_2;
          FT_REPLY:   byte_o = K28_3;
          default:    byte_o = K28_1;
        endcase
      else
        byte_o = K28_5;
    end else begin
      k_o    = 1'b0;
      byte_o = cur[8*(8-idx) +: 8];
    end
  end

  assign frame_start = take && !sending && (nxt_words == 2'd2);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      nxt       <= '0;
      nxt_words <= '0;
      cur       <= '0;
      idx       <= '0;
      sending   <= 1'b0;
    end else begin
      if (take) begin
        if (frame_start) begin
          cur     <= nxt;
          sending <= 1'b1;
          idx     <= 4'd1;
        end else if (sending) begin
          if (idx == 4'd8) begin
            sending <= 1'b0;
            idx     <= 4'd0;
          end else idx <= idx + 4'd1;
        end
      end
      if (frame_start) nxt_words <= 2'd0;
      if (in_valid && in_ready && !frame_start) begin
        if (nxt_words == 2'd0) nxt[63:32] <= in_data;
        else                   nxt[31:0]  <= in_data;
        nxt_words <= nxt_words + 2'd1;
      end
    end
endmodule
