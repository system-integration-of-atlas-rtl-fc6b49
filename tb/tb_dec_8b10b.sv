// tb_dec_8b10b: every data byte and every valid control symbol is encoded in
// both running disparities by a reference encoder written here from the
// code tables and decoded by the block; symbols outside the code must be
// flagged, and a symbol of the wrong disparity must raise disp_err.
module tb_dec_8b10b;
  logic clk = 0, rst_n = 0, en = 0;
  logic [9:0] din = 0;
  logic valid, k, code_err, disp_err;
  logic [7:0] dout;
  int checks = 0, failures = 0;

  dec_8b10b dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s din=%b", what, din); end
  endtask

  // Reference tables (RD- forms); the RD+ form is the complement when unbalanced
  // or for the D.07 / x.3 pairs.
  localparam logic [5:0] T6 [32] = '{6'b100111,6'b011101,6'b101101,6'b110001,6'b110101,6'b101001,
    6'b011001,6'b111000,6'b111001,6'b100101,6'b010101,6'b110100,6'b001101,6'b101100,6'b011100,
    6'b010111,6'b011011,6'b100011,6'b010011,6'b110010,6'b001011,6'b101010,6'b011010,6'b111010,
    6'b110011,6'b100110,6'b010110,6'b110110,6'b001110,6'b101110,6'b011110,6'b101011};
  localparam logic [3:0] T4D [8] = '{4'b1011,4'b1001,4'b0101,4'b1100,4'b1101,4'b1010,4'b0110,4'b1110};
  localparam logic [3:0] T4K [8] = '{4'b1011,4'b0110,4'b1010,4'b1100,4'b1101,4'b0101,4'b1001,4'b0111};

  logic rd_ref;

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

  task automatic put(input logic [9:0] sym);
    @(negedge clk); din = sym; en = 1;
    @(posedge clk); #1;
  endtask

  logic [7:0] ks [12] = '{8'h1C,8'h3C,8'h5C,8'h7C,8'h9C,8'hBC,8'hDC,8'hFC,8'hF7,8'hFB,8'hFD,8'hFE};

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    rd_ref = 0;
    // Two passes so every symbol is seen in both disparities.
    for (int pass = 0; pass < 3; pass++) begin
      for (int b = 0; b < 256; b++) begin
        put(ref_enc(1'b0, 8'(b), rd_ref));
        check(valid && dout == 8'(b) && !k && !code_err && !disp_err, "data symbol");
      end
      foreach (ks[i]) begin
        put(ref_enc(1'b1, ks[i], rd_ref));
        check(valid && dout == ks[i] && k && !code_err && !disp_err, "control symbol");
      end
    end
    // Not in the code: all zeros, all ones, 6b 111111.
    put(10'b0000000000); check(code_err, "all zeros flagged");
    put(10'b1111110000); check(code_err, "111111 flagged");
    // Wrong disparity: two K28.5 RD- forms in a row.
    @(negedge clk); rst_n = 0; @(negedge clk); rst_n = 1;
    put(10'b0011111010); check(!disp_err && k && dout == 8'hBC, "K28.5 first");
    put(10'b0011111010); check(disp_err, "K28.5 repeated RD- form flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
