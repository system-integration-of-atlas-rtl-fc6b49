// tb_tmr_reg: loads random values, injects single upsets (must never reach
// q, must raise mismatch for one cycle and be repaired at the next edge),
// and double upsets of the same bit (reach q, flagged by mismatch).
module tb_tmr_reg;
  localparam int W = 8;
  logic clk = 0, rst_n = 0, en = 0, mismatch;
  logic [W-1:0] d = 0, q;
  logic [2:0][W-1:0] upset = '0;
  int checks = 0, failures = 0;

  tmr_reg #(.WIDTH(W), .RESET_VAL(8'h3C)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    logic [W-1:0] ref_q;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    check(q == 8'h3C && !mismatch, "reset value");
    ref_q = 8'h3C;
    for (int it = 0; it < 200; it++) begin
      // load or hold
      en = $urandom % 2; d = $urandom;
      if (en) ref_q = d;
      // single upset in a random copy and bit
      upset = '0;
      if (it % 3 == 0) upset[$urandom % 3][$urandom % W] = 1'b1;
      @(negedge clk);
      en = 0; upset = '0;
      check(q == ref_q, "voted value unaffected by single upset");
      check(mismatch == (it % 3 == 0), "mismatch flags an upset copy");
      @(negedge clk);
      check(q == ref_q && !mismatch, "upset repaired by feedback");
    end
    // Two copies upset in the same bit: cannot be corrected, is flagged.
    upset = '0; upset[0][2] = 1; upset[1][2] = 1;
    @(negedge clk); upset = '0;
    check(q == (ref_q ^ 8'h04), "double upset reaches output");
    check(mismatch, "double upset flagged");
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
