// tb_sync_fifo: random pushes and pops against a queue reference model;
// checks order, data, full/empty flags and the level count.
module tb_sync_fifo;
  localparam int W = 12, D = 8;
  logic clk = 0, rst_n = 0;
  logic wr_valid, wr_ready, rd_valid, rd_ready;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(D):0] level;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  int fulls = 0;
  bit held = 0;  // a write was offered and not taken at the last edge

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    wr_valid = 0; rd_ready = 0; wr_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      check(level == q.size(), "level");
      check(rd_valid == (q.size() != 0), "rd_valid");
      check(wr_ready == (q.size() != D), "wr_ready");
      if (rd_valid) check(rd_data == q[0], "data order");
      if (!wr_ready) fulls++;
      // phases: mostly-write, mostly-read, mixed
      if (!held) begin
        wr_valid = ($urandom % 100) < ((cyc / 500) % 2 == 0 ? 80 : 30);
        wr_data  = W'($urandom);
      end
      rd_ready = ($urandom % 100) < ((cyc / 500) % 2 == 0 ? 30 : 80);
      @(posedge clk);
      #1;
    end
    check(fulls > 0, "full reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (rd_valid && rd_ready) void'(q.pop_front());
    if (wr_valid && wr_ready) q.push_back(wr_data);
    held = wr_valid && !wr_ready;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
