`timescale 1ns/1ps
// trigger_filter -- one trigger level (L0 or L1) of the event filter.
//
// Frames (two 32-bit words) enter a FIFO. The trigger bits of this level
// arrive once per 25 ns bin and are written into a circular trigger memory
// at the bin they refer to, 'latency' bins before the bin (trig_bin) in
// which they arrived; each entry keeps the upper bits of its bin number as a tag and a
// valid bit. The MATCH logic looks up the head event's bin (coarse time tag
// divided by four). When the entry for that bin is present the decision is
// taken: every event goes on to the next level (out_next) and an accepted
// event also goes to the link (out_link); both copies are handed over word by
// word with independent valid/ready handshakes. If the head event's bin is
// more than two bins past due and its entry is missing or overwritten, the
// event has expired and is dropped. Counter and reply frames are not
// filtered: they go to both outputs. The FIFO / trigger memory / MATCH
// structure and the forwarding rule follow the chip; the sizes, the tag scheme
// and the expiry rule are this design's.
// Lint note: the linter reports rst_n as used both as an asynchronous and a
// synchronous reset (SYNCASYNCNET). Every flop here resets asynchronously;
// the message comes from the array of valid bits and is harmless.
module trigger_filter
  import tofhir2_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 256,   // words
  parameter int unsigned MEM_DEPTH  = 1024   // 25 ns bins, power of two
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  // trigger bits
  input  logic             trig_stb,
  input  logic             trig_bit,
  input  logic [BIN_W-1:0] trig_bin,      // bin in which the bit arrived
  input  logic [BIN_W-1:0] bin_now,
  input  logic [BIN_W-1:0] latency,
  // event frames in
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [31:0]      in_data,
  // to the next level
  output logic             next_valid,
  input  logic             next_ready,
  output logic [31:0]      next_data,
  // to the link
  output logic             link_valid,
  input  logic             link_ready,
  output logic [31:0]      link_data,
  // statistics
  output logic             ev_accept,     // one cycle per accepted event
  output logic             ev_reject,     // one cycle per rejected event
  output logic             ev_expired     // one cycle per dropped late event
);
  localparam int unsigned MW = $clog2(MEM_DEPTH);
  localparam int unsigned TW = BIN_W - MW;

  // ---------------- trigger memory ----------------
  logic [MEM_DEPTH-1:0] mem_valid;
  logic [TW-1:0]        mem_tag [MEM_DEPTH];
  logic                 mem_acc [MEM_DEPTH];
  logic [BIN_W-1:0]     wbin;

  assign wbin = trig_bin - latency;

  always_ff @(posedge clk)
    if (trig_stb) begin
      mem_tag[wbin[MW-1:0]] <= wbin[BIN_W-1:MW];
      mem_acc[wbin[MW-1:0]] <= trig_bit;
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)      mem_valid <= '0;
    else if (clear)  mem_valid <= '0;
    else if (trig_stb) mem_valid[wbin[MW-1:0]] <= 1'b1;

  // ---------------- event FIFO ----------------
  logic        f_valid, f_ready;
  logic [31:0] f_data;
  logic [$clog2(FIFO_DEPTH+1)-1:0] f_count;

  sync_fifo #(.W(32), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .clear,
    .in_valid, .in_ready, .in_data,
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data),
    .count(f_count)
  );

  // ---------------- MATCH ----------------
  typedef enum logic [1:0] {M_HEAD, M_W0, M_W1, M_DROP} mstate_e;
  mstate_e          st;
  word0_t           h;
  logic [BIN_W-1:0] ebin, age;
  logic             hit, acc, expired;
  logic             to_link;
  logic             sent_next, sent_link;
  logic             moving;

  assign h       = word0_t'(f_data);
  assign ebin    = h.tcoarse[TC_W-1:2];
  assign hit     = mem_valid[ebin[MW-1:0]] && (mem_tag[ebin[MW-1:0]] == ebin[BIN_W-1:MW]);
  assign acc     = mem_acc[ebin[MW-1:0]];
  assign age     = bin_now - latency - ebin;                 // bins past due
  assign expired = !hit && (age >= BIN_W'(3)) && !age[BIN_W-1];

  assign moving     = (st == M_W0) || (st == M_W1);
  assign next_valid = moving && f_valid && !sent_next;
  assign link_valid = moving && f_valid && to_link && !sent_link;
  assign next_data  = f_data;
  assign link_data  = f_data;

  logic done_next, done_link, word_done;
  assign done_next = sent_next || next_ready;
  assign done_link = !to_link || sent_link || link_ready;
  assign word_done = moving && f_valid && done_next && done_link;
  // a dropped frame: word 0 leaves in M_HEAD, word 1 in M_DROP
  assign f_ready   = word_done || ((st == M_DROP) && f_valid) ||
                     ((st == M_HEAD) && f_valid && (h.ftype == FT_EVENT) && !hit && expired);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= M_HEAD; to_link <= 1'b0; sent_next <= 1'b0; sent_link <= 1'b0;
      ev_accept <= 1'b0; ev_reject <= 1'b0; ev_expired <= 1'b0;
    end else if (clear) begin
      st <= M_HEAD; sent_next <= 1'b0; sent_link <= 1'b0;
      ev_accept <= 1'b0; ev_reject <= 1'b0; ev_expired <= 1'b0;
    end else begin
      ev_accept <= 1'b0; ev_reject <= 1'b0; ev_expired <= 1'b0;
      unique case (st)
        M_HEAD: if (f_valid) begin
          if (h.ftype != FT_EVENT) begin
            to_link <= 1'b1; st <= M_W0;
          end else if (hit) begin
            to_link   <= acc;
            ev_accept <= acc;
            ev_reject <= !acc;
            st        <= M_W0;
          end else if (expired) begin
            ev_expired <= 1'b1;
            st         <= M_DROP;
          end
        end
        M_W0, M_W1: begin
          if (word_done) begin
            sent_next <= 1'b0; sent_link <= 1'b0;
            st <= (st == M_W0) ? M_W1 : M_HEAD;
          end else begin
            if (next_valid && next_ready) sent_next <= 1'b1;
            if (link_valid && link_ready) sent_link <= 1'b1;
          end
        end
        M_DROP: if (f_valid) st <= M_HEAD;   // second word popped here
        default: st <= M_HEAD;
      endcase
    end
endmodule
