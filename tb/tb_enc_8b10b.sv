// tb_enc_8b10b: checks code words from the published 8b/10b tables, then a
// long random stream for DC balance (running disparity stays within +-1)
// and maximum run length 5.
module tb_enc_8b10b;
  logic clk = 0, rst_n = 0, en = 0, k = 0;
  logic [7:0] din = 0;
  logic [9:0] dout;
  int checks = 0, failures = 0;

  enc_8b10b dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(input logic kk, input logic [7:0] b);
    @(negedge clk); k = kk; din = b; en = 1;
    @(posedge clk); #1;
  endtask

  int disp = 0;   // cumulative ones - zeros since reset; RD- start means 0 or +2 allowed
  int run = 0, maxrun = 0;
  logic last = 1'b0;

  task automatic stream_check();
    for (int i = 9; i >= 0; i--) begin
      if (dout[i] == last) run++; else run = 1;
      last = dout[i];
      if (run > maxrun) maxrun = run;
    end
    disp += 2 * $countones(dout) - 10;
    check(disp == 0 || disp == 2, "running disparity");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    check(dout == 10'b0011111010, "reset symbol K28.5 RD-");
    send(1, 8'hBC); check(dout == 10'b1100000101, "K28.5 after reset symbol"); // -> RD-
    // Known symbols, starting from RD-.
    send(1, 8'hBC); check(dout == 10'b0011111010, "K28.5 RD-");   // -> RD+
    send(1, 8'hBC); check(dout == 10'b1100000101, "K28.5 RD+");   // -> RD-
    send(0, 8'h00); check(dout == 10'b1001110100, "D0.0 RD-");    // stays RD-
    send(1, 8'hBC); check(dout == 10'b0011111010, "K28.5 RD- again"); // -> RD+
    send(0, 8'h00); check(dout == 10'b0110001011, "D0.0 RD+");    // stays RD+
    send(0, 8'hB5); check(dout == 10'b1010101010, "D21.5");       // stays RD+
    send(0, 8'hEB); check(dout == 10'b1101001000, "D11.7 RD+ (A7)"); // -> RD-
    send(0, 8'hF1); check(dout == 10'b1000110111, "D17.7 RD- (A7)"); // -> RD+
    send(1, 8'hFD); check(dout == 10'b0100010111, "K29.7 RD+");   // stays RD+
    send(1, 8'hFB); check(dout == 10'b0010010111, "K27.7 RD+");   // stays RD+
    send(1, 8'h3C); check(dout == 10'b1100000110, "K28.1 RD+");   // -> RD-
    send(0, 8'h03); check(dout == 10'b1100011011, "D3.0 RD-");    // -> RD+
    // Random stream from a fresh reset.
    @(negedge clk); rst_n = 0; en = 0; @(negedge clk); rst_n = 1;
    last = 1'b0; run = 1; disp = 2;  // reset symbol 0011111010 counted
    for (int i = 0; i < 4000; i++) begin
      logic kk; logic [7:0] b;
      kk = ($urandom % 8) == 0;
      b = kk ? 8'hBC : 8'($urandom);
      send(kk, b);
      stream_check();
    end
    check(maxrun <= 5, "run length <= 5");
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
