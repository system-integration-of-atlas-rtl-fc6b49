// enc_8b10b: 8b/10b encoder with running disparity.
//
// Each byte HGF EDCBA is coded as a 6-bit sub-block abcdei (from EDCBA) and
// a 4-bit sub-block fghj (from HGF) using the standard Widmer-Franaszek
// tables. Where a sub-block has two forms, the one that moves the running
// disparity back towards zero is taken, so the line stays DC balanced, which
// is why the hub codes its elink data this way. Control symbols (k = 1) are
// K28.0-K28.7, K23.7, K27.7, K29.7 and K30.7; other k inputs are coded as data.
//
// Interface: one symbol per clock when `en` is high. dout = {a,b,c,d,e,i,f,g,h,j}
// (bit 9 = a, sent first) is registered, so it appears one clock after the
// byte. After reset dout holds K28.5 in its RD- form and the running
// disparity is the one that symbol leaves (positive), so a serializer may
// send the reset value as the first idle symbol.
// The use of 8b/10b follows the paper; the bit order is this design's choice.
module enc_8b10b (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic [7:0] din,
  input  logic       k,
  output logic [9:0] dout
);

  // 6b code for EDCBA with negative running disparity ("RD-" column).
  function automatic logic [5:0] code6_neg(input logic [4:0] x);
    case (x)
      5'd0: return 6'b100111;  5'd1: return 6'b011101;  5'd2: return 6'b101101;
      5'd3: return 6'b110001;  5'd4: return 6'b110101;  5'd5: return 6'b101001;
      5'd6: return 6'b011001;  5'd7: return 6'b111000;  5'd8: return 6'b111001;
      5'd9: return 6'b100101;  5'd10: return 6'b010101; 5'd11: return 6'b110100;
      5'd12: return 6'b001101; 5'd13: return 6'b101100; 5'd14: return 6'b011100;
      5'd15: return 6'b010111; 5'd16: return 6'b011011; 5'd17: return 6'b100011;
      5'd18: return 6'b010011; 5'd19: return 6'b110010; 5'd20: return 6'b001011;
      5'd21: return 6'b101010; 5'd22: return 6'b011010; 5'd23: return 6'b111010;
      5'd24: return 6'b110011; 5'd25: return 6'b100110; 5'd26: return 6'b010110;
      5'd27: return 6'b110110; 5'd28: return 6'b001110; 5'd29: return 6'b101110;
      5'd30: return 6'b011110; default: return 6'b101011;
    endcase
  endfunction

  // A code with disparity 0 is used for both signs, except D.07 (111000/000111).
  // Unbalanced codes are complemented for positive running disparity.
  function automatic logic [5:0] code6(input logic [4:0] x, input logic kk, input logic rd_pos);
    logic [5:0] c;
    c = (kk && x == 5'd28) ? 6'b001111 : code6_neg(x);
    if (rd_pos && ($countones(c) != 3 || c == 6'b111000)) c = ~c;
    return c;
  endfunction

  function automatic logic [3:0] code4(input logic [2:0] y, input logic kk, input logic [4:0] x,
                                       input logic rd_pos);
    logic [3:0] c;
    if (kk) begin
      case (y)  // K column, RD- forms
        3'd0: c = 4'b1011; 3'd1: c = 4'b0110; 3'd2: c = 4'b1010; 3'd3: c = 4'b1100;
        3'd4: c = 4'b1101; 3'd5: c = 4'b0101; 3'd6: c = 4'b1001; default: c = 4'b0111;
      endcase
      if (rd_pos) c = ~c;
    end else begin
      case (y)
        3'd0: c = 4'b1011; 3'd1: c = 4'b1001; 3'd2: c = 4'b0101; 3'd3: c = 4'b1100;
        3'd4: c = 4'b1101; 3'd5: c = 4'b1010; 3'd6: c = 4'b0110;
        default: begin
          // Alternate D.x.A7 avoids a run of five equal bits across the sub-blocks.
          if ((!rd_pos && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
              ( rd_pos && (x == 5'd11 || x == 5'd13 || x == 5'd14))) c = 4'b0111;
          else c = 4'b1110;
        end
      endcase
      if (rd_pos && ($countones(c) != 2 || c == 4'b1100)) c = ~c;
    end
    return c;
  endfunction

  // Running disparity after a sub-block: unchanged if balanced.
  function automatic logic rd_after(input logic rd_pos, input int unsigned ones, input int unsigned half);
    if (ones > half) return 1'b1;
    if (ones < half) return 1'b0;
    return rd_pos;
  endfunction

  logic       rd;  // 1 = positive running disparity
  logic [5:0] c6;
  logic [3:0] c4;
  logic       rd6, rd4;

  always_comb begin
    c6  = code6(din[4:0], k, rd);
    rd6 = rd_after(rd, $countones(c6), 3);
    c4  = code4(din[7:5], k, din[4:0], rd6);
    rd4 = rd_after(rd6, $countones(c4), 2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd   <= 1'b1;            // disparity after the reset symbol below
      dout <= 10'b0011111010;  // K28.5, RD-
    end else if (en) begin
      rd   <= rd4;
      dout <= {c6, c4};
    end
  end

endmodule
