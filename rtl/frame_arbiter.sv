`timescale 1ns/1ps
// frame_arbiter -- round-robin merge of N two-word frame streams into one.
//
// All streams carry frames of exactly two 32-bit words. When idle the
// arbiter grants the first requesting input after the last one served and
// keeps the grant until both words of that frame have passed, so frames are
// never interleaved. A grant costs one idle cycle. Each input is a
// valid/ready word stream.
module frame_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N-1:0]      in_valid,
  output logic [N-1:0]      in_ready,
  input  logic [N-1:0][31:0] in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [31:0]       out_data
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] grant, last, pick;
  logic          locked, second, found;

  always_comb begin
    pick  = last;
    found = 1'b0;
    for (int unsigned j = 1; j <= N; j++) begin
      int unsigned c;
      c = (int'(last) + j) % N;
      if (!found && in_valid[c]) begin
        pick  = IW'(c);
        found = 1'b1;
      end
    end
  end

  always_comb begin
    in_ready  = '0;
    out_valid = locked && in_valid[grant];
    out_data  = in_data[grant];
    if (locked) in_ready[grant] = out_ready;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      grant <= '0; last <= IW'(N - 1); locked <= 1'b0; second <= 1'b0;
    end else if (!locked) begin
      if (found) begin
        grant  <= pick;
        locked <= 1'b1;
        second <= 1'b0;
      end
    end else if (out_valid && out_ready) begin
      if (second) begin
        locked <= 1'b0;
        last   <= grant;
      end
      second <= ~second;
    end
endmodule
