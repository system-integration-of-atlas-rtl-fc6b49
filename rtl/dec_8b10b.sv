// dec_8b10b: 8b/10b decoder with code-violation and disparity checks.
//
// The 10-bit symbol {a,b,c,d,e,i,f,g,h,j} (bit 9 = a) is split into its 6b and
// 4b sub-blocks; each sub-block is looked up in the standard code tables (both
// disparity forms). A 6b block that is the K28 comma form selects the control
// table for the 4b block; a 6b block of x = 23, 27, 29 or 30 followed by the
// alternate 7 form (0111/1000) is K.x.7, as in the standard code.
//
// code_err is set for a sub-block found in no table. disp_err is set when a
// sub-block's disparity is not allowed for the running disparity the decoder
// keeps (the same rule as the encoder: an unbalanced sub-block sets it to
// its sign, a balanced one leaves it). Checks are per sub-block only.
//
// Interface: one symbol per clock when `en` is high; outputs are registered
// and valid one clock later (`valid`). The running disparity starts negative.
module dec_8b10b (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic [9:0] din,
  output logic       valid,
  output logic [7:0] dout,
  output logic       k,
  output logic       code_err,
  output logic       disp_err
);

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

  logic       rd;
  logic [5:0] s6;
  logic [3:0] s4;
  logic [4:0] x;
  logic [2:0] y;
  logic       found6, found4, is_k28, is_kx7, bad_disp;
  logic       rd6, rd4;
  logic [5:0] c6;
  logic       m6;

  always_comb begin
    s6 = din[9:4];
    s4 = din[3:0];
    x = '0; y = '0; found6 = 1'b0; found4 = 1'b0;
    is_k28 = (s6 == 6'b001111) || (s6 == 6'b110000);
    is_kx7 = 1'b0;
    // At most one table entry matches, so the index is the OR of the matches.
    for (int i = 0; i < 32; i++) begin
      c6 = code6_neg(5'(i));
      m6 = (s6 == c6) || (s6 == ~c6 && ($countones(c6) != 3 || c6 == 6'b111000));
      x      = x | (m6 ? 5'(i) : 5'd0);
      found6 = found6 | m6;
    end
    if (is_k28) begin
      x = 5'd28; found6 = 1'b1;
    end
    if (is_k28) begin
      case (s4)
        4'b1011, 4'b0100: begin y = 3'd0; found4 = 1'b1; end
        4'b0110, 4'b1001: begin y = 3'd1; found4 = 1'b1; end
        4'b1010, 4'b0101: begin y = 3'd2; found4 = 1'b1; end
        4'b1100, 4'b0011: begin y = 3'd3; found4 = 1'b1; end
        4'b1101, 4'b0010: begin y = 3'd4; found4 = 1'b1; end
        4'b0111, 4'b1000: begin y = 3'd7; found4 = 1'b1; end
        default: ;
      endcase
      // K28.2/K28.5 and K28.1/K28.6 share 4b patterns; the 6b sign decides.
      if (s6 == 6'b001111) begin  // 6b had disparity +2: 4b is the RD+ form
        case (s4)
          4'b0101: y = 3'd2;  4'b1010: y = 3'd5;
          4'b1001: y = 3'd1;  4'b0110: y = 3'd6;
          default: ;
        endcase
      end else begin              // 110000: 4b is the RD- form
        case (s4)
          4'b1010: y = 3'd2;  4'b0101: y = 3'd5;
          4'b0110: y = 3'd1;  4'b1001: y = 3'd6;
          default: ;
        endcase
      end
    end else begin
      case (s4)
        4'b1011, 4'b0100: begin y = 3'd0; found4 = 1'b1; end
        4'b1001:          begin y = 3'd1; found4 = 1'b1; end
        4'b0101:          begin y = 3'd2; found4 = 1'b1; end
        4'b1100, 4'b0011: begin y = 3'd3; found4 = 1'b1; end
        4'b1101, 4'b0010: begin y = 3'd4; found4 = 1'b1; end
        4'b1010:          begin y = 3'd5; found4 = 1'b1; end
        4'b0110:          begin y = 3'd6; found4 = 1'b1; end
        4'b1110, 4'b0001, 4'b0111, 4'b1000: begin y = 3'd7; found4 = 1'b1; end
        default: ;
      endcase
      is_kx7 = (s4 == 4'b0111 || s4 == 4'b1000) &&
               (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30);
    end

    // Disparity bookkeeping, same rule as the encoder.
    bad_disp = 1'b0;
    if (($countones(s6) > 3 && rd) || ($countones(s6) < 3 && !rd) ||
        (s6 == 6'b111000 && rd) || (s6 == 6'b000111 && !rd)) bad_disp = 1'b1;
    rd6 = ($countones(s6) > 3) ? 1'b1 : ($countones(s6) < 3) ? 1'b0 : rd;
    if (($countones(s4) > 2 && rd6) || ($countones(s4) < 2 && !rd6) ||
        (s4 == 4'b1100 && rd6 && !is_k28) || (s4 == 4'b0011 && !rd6 && !is_k28)) bad_disp = 1'b1;
    rd4 = ($countones(s4) > 2) ? 1'b1 : ($countones(s4) < 2) ? 1'b0 : rd6;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd <= 1'b0; valid <= 1'b0; dout <= '0; k <= 1'b0; code_err <= 1'b0; disp_err <= 1'b0;
    end else begin
      valid <= en;
      if (en) begin
        rd       <= rd4;
        dout     <= {y, x};
        k        <= is_k28 || is_kx7;
        code_err <= !(found6 && found4);
        disp_err <= bad_disp;
      end
    end
  end

endmodule
