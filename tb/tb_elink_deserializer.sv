// tb_elink_deserializer: sends reference-encoded commas and data with a
// random bit offset and checks that the block locks within ten symbols, then
// delivers exactly the sent symbols; then corrupts the stream to make it
// lose lock and checks that it locks again at a new offset.
module tb_elink_deserializer;
  import ref_8b10b_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [1:0] din = 0;
  logic chk_valid = 0, chk_err = 0;
  logic [9:0] sym;
  logic sym_valid, locked;
  logic [7:0] slips;
  int checks = 0, failures = 0;

  elink_deserializer #(.LOCK_ERRS(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  bit bits [$];
  logic rd = 0;
  logic [9:0] expq [$];
  bit track = 0;

  task automatic add_sym(input logic kk, input logic [7:0] b, input bit expect_it);
    logic [9:0] s;
    s = ref_enc(kk, b, rd);
    for (int i = 9; i >= 0; i--) bits.push_back(s[i]);
    if (expect_it) expq.push_back(s);
  endtask

  // Feed two bits per clock; commas fill the line whenever the queue runs low.
  int shift_req = 0;
  always @(negedge clk) begin
    if (shift_req != 0) begin
      for (int i = 0; i < shift_req; i++) bits.push_back(1'b1);
      shift_req = 0;
    end
    while (bits.size() < 12) add_sym(1, 8'hBC, 0);
    din[1] = bits.pop_front();
    din[0] = bits.pop_front();
  end

  function automatic bit is_comma(input logic [9:0] w);
    return w == 10'b0011111010 || w == 10'b1100000101;
  endfunction

  int got = 0, lock_sym = 0;
  always @(posedge clk) if (rst_n && sym_valid && track) begin
    if (expq.size() != 0 && !is_comma(sym)) begin
      check(sym == expq[0], "symbol after lock");
      void'(expq.pop_front());
      got++;
    end
  end

  initial begin
    int off;
    off = 1 + $urandom % 9;
    for (int i = 0; i < off; i++) bits.push_back(1'($urandom));
    for (int i = 0; i < 14; i++) add_sym(1, 8'hBC, 0);
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (5 * 14) @(posedge clk);
    check(locked, "locked within 14 symbols");
    check(slips <= 10, "slip count");
    track = 1;
    @(negedge clk);
    for (int i = 0; i < 200; i++) add_sym(0, 8'($urandom), 1);
    repeat (5 * 220) @(posedge clk);
    check(got == 200, "all data symbols delivered in order");
    // Shift the stream by three bits, then the decoder reports errors.
    shift_req = 3;
    repeat (20) @(posedge clk);
    @(negedge clk);
    // LOCK_ERRS - 1 errors keep the lock, a good symbol clears the count,
    // LOCK_ERRS errors in a row drop it.
    for (int i = 0; i < 3; i++) begin chk_valid = 1; chk_err = 1; @(negedge clk); end
    check(locked, "lock kept after LOCK_ERRS-1 errors");
    chk_err = 0; @(negedge clk);
    for (int i = 0; i < 3; i++) begin chk_valid = 1; chk_err = 1; @(negedge clk); end
    check(locked, "good symbol restarts the error count");
    @(negedge clk);
    chk_valid = 0; chk_err = 0;
    check(!locked, "lock lost after LOCK_ERRS errors");
    repeat (5 * 14) @(posedge clk);
    check(locked, "locked again");
    got = 0;
    @(negedge clk);
    for (int i = 0; i < 50; i++) add_sym(0, 8'($urandom), 1);
    repeat (5 * 70) @(posedge clk);
    check(got == 50, "data after relock");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
