// tb_spi_master: transfers random words to randomly selected switch models
// (write and read-back), checks the data returned, that only the selected
// chip select moves, and the transfer length of (2*WIDTH+2)*CLK_DIV clocks.
module tb_spi_master;
  localparam int N = 4, W = 16, DIV = 3;
  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done, sclk, mosi;
  logic [1:0] cs_sel = 0;
  logic [W-1:0] tx_data = 0, rx_data;
  logic [N-1:0] cs_n, miso, state;
  int checks = 0, failures = 0;

  spi_master #(.N_CS(N), .WIDTH(W), .CLK_DIV(DIV)) dut (.*);
  for (genvar i = 0; i < N; i++) begin : g_dev
    vcan_switch_model #(.INIT(i % 2)) u_dev (.sclk, .mosi, .cs_n(cs_n[i]), .miso(miso[i]), .state(state[i]));
  end

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  logic [N-1:0] model;
  int cs_moves;
  logic [N-1:0] cs_prev;
  always @(posedge clk) begin
    if (rst_n && cs_n != cs_prev) begin
      if ((cs_n | cs_prev) != '1 && $countones(cs_n ^ cs_prev) != 1) cs_moves++;
    end
    cs_prev = cs_n;
  end

  initial begin
    int t0, sel;
    logic v;
    cs_moves = 0; cs_prev = '1;
    for (int i = 0; i < N; i++) model[i] = i % 2;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      sel = $urandom % N; v = $urandom;
      @(negedge clk);
      cs_sel = 2'(sel); tx_data = {1'b1, 14'($urandom), v}; start = 1;
      t0 = $time / 10;
      @(negedge clk); start = 0;
      check(busy, "busy during transfer");
      @(posedge done);
      check(($time / 10) - t0 == (2 * W + 2) * DIV, "transfer length");
      check(rx_data[0] == model[sel], "old state returned");
      check(rx_data[W-1:1] == '0, "upper bits zero");
      @(negedge clk);
      model[sel] = v;
      check(state == model, "device states after write");
    end
    check(cs_moves == 0, "one chip select at a time");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
