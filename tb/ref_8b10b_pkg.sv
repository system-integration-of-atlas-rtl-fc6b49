// ref_8b10b_pkg: reference 8b/10b encoder and table-search decoder for the
// testbenches, written from the published code tables independently of the
// RTL encoder and decoder. Also the reference packet bytes of a hub message.
package ref_8b10b_pkg;
  localparam logic [5:0] T6 [32] = '{6'b100111,6'b011101,6'b101101,6'b110001,6'b110101,6'b101001,
    6'b011001,6'b111000,6'b111001,6'b100101,6'b010101,6'b110100,6'b001101,6'b101100,6'b011100,
    6'b010111,6'b011011,6'b100011,6'b010011,6'b110010,6'b001011,6'b101010,6'b011010,6'b111010,
    6'b110011,6'b100110,6'b010110,6'b110110,6'b001110,6'b101110,6'b011110,6'b101011};
  localparam logic [3:0] T4D [8] = '{4'b1011,4'b1001,4'b0101,4'b1100,4'b1101,4'b1010,4'b0110,4'b1110};
  localparam logic [3:0] T4K [8] = '{4'b1011,4'b0110,4'b1010,4'b1100,4'b1101,4'b0101,4'b1001,4'b0111};

  function automatic logic [9:0] ref_enc(input logic kk, input logic [7:0] b, inout logic rd);
    logic [5:0] c6; logic [3:0] c4; int x, y;
    x = b[4:0]; y = b[7:5];
    c6 = (kk && x == 28) ? 6'b001111 : T6[x];
    if (rd && ($countones(c6) != 3 || c6 == 6'b111000)) c6 = ~c6;
    if ($countones(c6) != 3) rd = ($countones(c6) > 3);
    if (kk) begin
      c4 = T4K[y];
      if (rd) c4 = ~c4;
    end else begin
      c4 = T4D[y];
      if (y == 7 && ((!rd && (x == 17 || x == 18 || x == 20)) || (rd && (x == 11 || x == 13 || x == 14))))
        c4 = 4'b0111;
      if (rd && ($countones(c4) != 2 || c4 == 4'b1100)) c4 = ~c4;
    end
    if ($countones(c4) != 2) rd = ($countones(c4) > 2);
    return {c6, c4};
  endfunction

  // Decode by searching all 256 data and the control bytes in both disparities.
  // Returns 1 and fills k/b when found.
  function automatic bit ref_dec(input logic [9:0] s, output logic k, output logic [7:0] b);
    logic [7:0] ks [12] = '{8'h1C,8'h3C,8'h5C,8'h7C,8'h9C,8'hBC,8'hDC,8'hFC,8'hF7,8'hFB,8'hFD,8'hFE};
    for (int r = 0; r < 2; r++) begin
      for (int v = 0; v < 256; v++) begin
        logic rd; rd = r[0];
        if (ref_enc(1'b0, 8'(v), rd) == s) begin k = 0; b = 8'(v); return 1; end
      end
      foreach (ks[i]) begin
        logic rd; rd = r[0];
        if (ref_enc(1'b1, ks[i], rd) == s) begin k = 1; b = ks[i]; return 1; end
      end
    end
    k = 0; b = 0;
    return 0;
  endfunction

  // Packet byte i of a message given as its fields (layout of the elink packet).
  function automatic logic [7:0] ref_byte(input logic [4:0] bus, input logic [10:0] id,
      input logic rtr, input logic [3:0] dlc, input logic [63:0] data, input int i);
    if (i == 0) return {3'b0, bus};
    if (i == 1) return {4'b0, rtr, id[10:8]};
    if (i == 2) return id[7:0];
    if (i == 3) return {4'b0, dlc};
    return data[63 - 8*(i-4) -: 8];
  endfunction
endpackage
