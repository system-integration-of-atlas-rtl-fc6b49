// tb_watchdog: regular kicks keep it quiet; withheld kicks make wd_rst rise
// exactly TIMEOUT cycles after the last kick, stay high RST_LEN cycles, and
// increment the recovery counter. Single-bit upsets of one copy of the
// triplicated state are outvoted (no early or late timeout, mismatch seen for
// one clock), and two copies upset in the same bit change the timing.
module tb_watchdog;
  localparam int TO = 100, RL = 5;
  logic clk = 0, rst_n = 0, kick = 0, wd_rst;
  logic [7:0] wd_count;
  logic tmr_mismatch;
  logic [2:0][63:0] upset = '0;
  int checks = 0, failures = 0;

  watchdog #(.TIMEOUT(TO), .RST_LEN(RL)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    int n;
    repeat (2) @(posedge clk); rst_n = 1;
    // Kicks every 90 cycles: no timeout.
    for (int i = 0; i < 20; i++) begin
      repeat (89) begin @(negedge clk); check(!wd_rst, "quiet while kicked"); end
      @(negedge clk); kick = 1; @(negedge clk); kick = 0;
    end
    check(wd_count == 0, "no recovery while kicked");
    // Hang: count cycles to wd_rst.
    for (int r = 1; r <= 3; r++) begin
      n = 0;
      while (!wd_rst) begin @(negedge clk); n++; end
      check(n == TO, "timeout after TIMEOUT cycles");
      check(wd_count == 8'(r), "recovery counted");
      n = 0;
      while (wd_rst) begin @(negedge clk); n++; end
      check(n == RL, "reset pulse length");
    end
    // Upsets while counting towards a timeout. Timer is bits [6:0] (TO = 100),
    // rst_cnt [9:7], wd_rst bit 10, wd_count [18:11].
    @(negedge clk); kick = 1; @(negedge clk); kick = 0;
    n = 0;
    for (int c = 0; c < 3; c++) begin
      upset[c][5] = 1; upset[(c+1)%3][10] = 1; upset[(c+2)%3][14] = 1;
      @(negedge clk); n++;
      upset = '0;
      check(tmr_mismatch, "single upsets seen as a mismatch");
      check(!wd_rst && wd_count == 8'd3, "single upsets outvoted");
      @(negedge clk); n++;
      check(!tmr_mismatch, "copies repaired after one clock");
    end
    while (!wd_rst) begin @(negedge clk); n++; end
    check(n == TO, "timeout unchanged by single upsets");
    check(wd_count == 8'd4, "recovery counted after upsets");
    while (wd_rst) @(negedge clk);
    // Two copies upset in the same timer bit: the voted timer jumps by 32.
    @(negedge clk); kick = 1; @(negedge clk); kick = 0;
    upset[0][5] = 1; upset[2][5] = 1;
    @(negedge clk); upset = '0;
    n = 1;
    while (!wd_rst) begin @(negedge clk); n++; end
    check(n == TO - 32, "double upset not corrected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
