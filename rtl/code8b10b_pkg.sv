`timescale 1ns/1ps
// code8b10b_pkg -- 8b/10b line code (IBM/Widmer-Franaszek) used by the
// 80 Mb/s configuration input and the two 320 Mb/s output links.
//
// A symbol is written abcdei_fghj with bit 'a' in bit 9; it is sent bit 9
// first. encode() takes the running disparity before the symbol (0 = RD-,
// 1 = RD+) and returns the symbol and the running disparity after it. Only the
// K28.y control characters are supported, which is all the links use.
// decode() inverts the tables; it flags sub-blocks that are not code words but
// does not check running disparity.
package code8b10b_pkg;

  typedef struct packed {
    logic [9:0] code;
    logic       rd;
  } enc_t;

  typedef struct packed {
    logic [7:0] data;
    logic       k;
    logic       err;
  } dec_t;

  function automatic logic [11:0] tab6(input logic [4:0] x);
    logic [11:0] c6;
    // 5b/6b sub-block, {RD+ code, RD- code}, abcdei with a in the MSB
    unique case (x)
      5'd0: c6 = {6'b011000, 6'b100111};
      5'd1: c6 = {6'b100010, 6'b011101};
      5'd2: c6 = {6'b010010, 6'b101101};
      5'd3: c6 = {6'b110001, 6'b110001};
      5'd4: c6 = {6'b001010, 6'b110101};
      5'd5: c6 = {6'b101001, 6'b101001};
      5'd6: c6 = {6'b011001, 6'b011001};
      5'd7: c6 = {6'b000111, 6'b111000};
      5'd8: c6 = {6'b000110, 6'b111001};
      5'd9: c6 = {6'b100101, 6'b100101};
      5'd10: c6 = {6'b010101, 6'b010101};
      5'd11: c6 = {6'b110100, 6'b110100};
      5'd12: c6 = {6'b001101, 6'b001101};
      5'd13: c6 = {6'b101100, 6'b101100};
      5'd14: c6 = {6'b011100, 6'b011100};
      5'd15: c6 = {6'b101000, 6'b010111};
      5'd16: c6 = {6'b100100, 6'b011011};
      5'd17: c6 = {6'b100011, 6'b100011};
      5'd18: c6 = {6'b010011, 6'b010011};
      5'd19: c6 = {6'b110010, 6'b110010};
      5'd20: c6 = {6'b001011, 6'b001011};
      5'd21: c6 = {6'b101010, 6'b101010};
      5'd22: c6 = {6'b011010, 6'b011010};
      5'd23: c6 = {6'b000101, 6'b111010};
      5'd24: c6 = {6'b001100, 6'b110011};
      5'd25: c6 = {6'b100110, 6'b100110};
      5'd26: c6 = {6'b010110, 6'b010110};
      5'd27: c6 = {6'b001001, 6'b110110};
      5'd28: c6 = {6'b001110, 6'b001110};
      5'd29: c6 = {6'b010001, 6'b101110};
      5'd30: c6 = {6'b100001, 6'b011110};
      5'd31: c6 = {6'b010100, 6'b101011};
    endcase
    return c6;
  endfunction

  function automatic logic [7:0] tab4(input logic [2:0] y, input logic k);
    logic [7:0] c4;
    if (!k) begin
    unique case (y)
      3'd0: c4 = {4'b0100, 4'b1011};
      3'd1: c4 = {4'b1001, 4'b1001};
      3'd2: c4 = {4'b0101, 4'b0101};
      3'd3: c4 = {4'b0011, 4'b1100};
      3'd4: c4 = {4'b0010, 4'b1101};
      3'd5: c4 = {4'b1010, 4'b1010};
      3'd6: c4 = {4'b0110, 4'b0110};
      3'd7: c4 = {4'b0001, 4'b1110};
    endcase
    end else begin
    unique case (y)
      3'd0: c4 = {4'b0100, 4'b1011};
      3'd1: c4 = {4'b1001, 4'b0110};
      3'd2: c4 = {4'b0101, 4'b1010};
      3'd3: c4 = {4'b0011, 4'b1100};
      3'd4: c4 = {4'b0010, 4'b1101};
      3'd5: c4 = {4'b1010, 4'b0101};
      3'd6: c4 = {4'b0110, 4'b1001};
      3'd7: c4 = {4'b1000, 4'b0111};
    endcase
    end
    return c4;
  endfunction

  function automatic enc_t encode(input logic [7:0] d, input logic k, input logic rd_in);
    logic [4:0]  x;
    logic [2:0]  y;
    logic [11:0] p6;
    logic [7:0]  p4;
    logic [5:0]  s6;
    logic [3:0]  s4;
    logic        rd;
    logic        alt7;
    enc_t        r;
    x  = k ? 5'd28 : d[4:0];
    y  = d[7:5];
    p6 = k ? {6'b110000, 6'b001111} : tab6(x);
    s6 = rd_in ? p6[11:6] : p6[5:0];
    rd = ($countones(s6) == 3) ? rd_in : ~rd_in;
    // alternate D.x.7 avoids a run of five equal bits
    alt7 = !k && (y == 3'd7) &&
           ((!rd && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
            ( rd && (x == 5'd11 || x == 5'd13 || x == 5'd14)));
    p4 = alt7 ? {4'b1000, 4'b0111} : tab4(y, k);
    s4 = rd ? p4[7:4] : p4[3:0];
    if ($countones(s4) != 2) rd = ~rd;
    r.code = {s6, s4};
    r.rd   = rd;
    return r;
  endfunction

  function automatic dec_t decode(input logic [9:0] sym);
    logic [5:0] c6;
    logic [3:0] c4;
    logic [4:0] x;
    logic [2:0] y;
    logic       ok6, ok4, k28;
    dec_t       r;
    c6  = sym[9:4];
    k28 = 1'b0;
    unique case (c6)
      6'b000101: begin x = 5'd23; ok6 = 1'b1; end
      6'b000110: begin x = 5'd8; ok6 = 1'b1; end
      6'b000111: begin x = 5'd7; ok6 = 1'b1; end
      6'b001001: begin x = 5'd27; ok6 = 1'b1; end
      6'b001010: begin x = 5'd4; ok6 = 1'b1; end
      6'b001011: begin x = 5'd20; ok6 = 1'b1; end
      6'b001100: begin x = 5'd24; ok6 = 1'b1; end
      6'b001101: begin x = 5'd12; ok6 = 1'b1; end
      6'b001110: begin x = 5'd28; ok6 = 1'b1; end
      6'b010001: begin x = 5'd29; ok6 = 1'b1; end
      6'b010010: begin x = 5'd2; ok6 = 1'b1; end
      6'b010011: begin x = 5'd18; ok6 = 1'b1; end
      6'b010100: begin x = 5'd31; ok6 = 1'b1; end
      6'b010101: begin x = 5'd10; ok6 = 1'b1; end
      6'b010110: begin x = 5'd26; ok6 = 1'b1; end
      6'b010111: begin x = 5'd15; ok6 = 1'b1; end
      6'b011000: begin x = 5'd0; ok6 = 1'b1; end
      6'b011001: begin x = 5'd6; ok6 = 1'b1; end
      6'b011010: begin x = 5'd22; ok6 = 1'b1; end
      6'b011011: begin x = 5'd16; ok6 = 1'b1; end
      6'b011100: begin x = 5'd14; ok6 = 1'b1; end
      6'b011101: begin x = 5'd1; ok6 = 1'b1; end
      6'b011110: begin x = 5'd30; ok6 = 1'b1; end
      6'b100001: begin x = 5'd30; ok6 = 1'b1; end
      6'b100010: begin x = 5'd1; ok6 = 1'b1; end
      6'b100011: begin x = 5'd17; ok6 = 1'b1; end
      6'b100100: begin x = 5'd16; ok6 = 1'b1; end
      6'b100101: begin x = 5'd9; ok6 = 1'b1; end
      6'b100110: begin x = 5'd25; ok6 = 1'b1; end
      6'b100111: begin x = 5'd0; ok6 = 1'b1; end
      6'b101000: begin x = 5'd15; ok6 = 1'b1; end
      6'b101001: begin x = 5'd5; ok6 = 1'b1; end
      6'b101010: begin x = 5'd21; ok6 = 1'b1; end
      6'b101011: begin x = 5'd31; ok6 = 1'b1; end
      6'b101100: begin x = 5'd13; ok6 = 1'b1; end
      6'b101101: begin x = 5'd2; ok6 = 1'b1; end
      6'b101110: begin x = 5'd29; ok6 = 1'b1; end
      6'b110001: begin x = 5'd3; ok6 = 1'b1; end
      6'b110010: begin x = 5'd19; ok6 = 1'b1; end
      6'b110011: begin x = 5'd24; ok6 = 1'b1; end
      6'b110100: begin x = 5'd11; ok6 = 1'b1; end
      6'b110101: begin x = 5'd4; ok6 = 1'b1; end
      6'b110110: begin x = 5'd27; ok6 = 1'b1; end
      6'b111000: begin x = 5'd7; ok6 = 1'b1; end
      6'b111001: begin x = 5'd8; ok6 = 1'b1; end
      6'b111010: begin x = 5'd23; ok6 = 1'b1; end
      6'b001111, 6'b110000: begin x = 5'd28; ok6 = 1'b1; k28 = 1'b1; end
      default: begin x = 5'd0; ok6 = 1'b0; end
    endcase
    // after the RD+ form of K28 the 4b sub-block is the complemented table
    c4 = (c6 == 6'b110000) ? ~sym[3:0] : sym[3:0];
    unique case (c4)
      4'b0001: begin y = 3'd7; ok4 = 1'b1; end
      4'b0010: begin y = 3'd4; ok4 = 1'b1; end
      4'b0011: begin y = 3'd3; ok4 = 1'b1; end
      4'b0100: begin y = 3'd0; ok4 = 1'b1; end
      4'b0101: begin y = 3'd2; ok4 = 1'b1; end
      4'b0110: begin y = 3'd6; ok4 = 1'b1; end
      4'b0111: begin y = 3'd7; ok4 = 1'b1; end
      4'b1000: begin y = 3'd7; ok4 = 1'b1; end
      4'b1001: begin y = 3'd1; ok4 = 1'b1; end
      4'b1010: begin y = 3'd5; ok4 = 1'b1; end
      4'b1011: begin y = 3'd0; ok4 = 1'b1; end
      4'b1100: begin y = 3'd3; ok4 = 1'b1; end
      4'b1101: begin y = 3'd4; ok4 = 1'b1; end
      4'b1110: begin y = 3'd7; ok4 = 1'b1; end
      default: begin y = 3'd0; ok4 = 1'b0; end
    endcase
    r.data = {y, x};
    r.k    = k28;
    r.err  = !(ok6 && ok4);
    return r;
  endfunction

endpackage
