// tb_bus_control: 16 switch models start in random states. Checks the
// read-back after reset (no switch changes), ON/OFF/READ commands against a
// reference mask and their status messages, that a reset in the middle of
// operation leaves every switch as it was, and that a single upset of the
// triplicated shadow register does not change vcan_en.
module tb_bus_control;
  import mopshub_pkg::*;
  localparam int NB = 16, DIV = 2;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, stat_valid, stat_ready = 0, init_done, tmr_mismatch;
  logic [7:0] cmd_op = 0;
  logic [3:0] cmd_bus = 0;
  hub_msg_t stat_msg;
  logic [NB-1:0] vcan_en, spi_cs_n, spi_miso, sw_state;
  logic [2:0][NB-1:0] upset = '0;
  logic spi_sclk, spi_mosi;
  int checks = 0, failures = 0;

  bus_control #(.NB(NB), .CLK_DIV(DIV)) dut (.*);
  for (genvar i = 0; i < NB; i++) begin : g_sw
    vcan_switch_model #(.INIT((i * 7 + 3) % 5 < 2)) u_sw (
      .sclk(spi_sclk), .mosi(spi_mosi), .cs_n(spi_cs_n[i]), .miso(spi_miso[i]), .state(sw_state[i]));
  end
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  logic [NB-1:0] ref_mask;

  task automatic command(input logic [7:0] op, input int b);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_op = op; cmd_bus = 4'(b); cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    if (op == OP_VCAN_ON) ref_mask[b] = 1;
    if (op == OP_VCAN_OFF) ref_mask[b] = 0;
    while (!stat_valid) @(negedge clk);
    check(stat_msg.bus == ADDR_BUS_CTRL, "status from Bus Control address");
    check(stat_msg.frame.data[63:56] == op && stat_msg.frame.data[51:48] == 4'(b), "status op and bus");
    check(stat_msg.frame.data[47:32] == 16'(ref_mask), "status mask");
    check(stat_msg.frame.data[24] == 1'b1, "status ok");
    stat_ready = 1; @(negedge clk); stat_ready = 0;
    check(sw_state == ref_mask && vcan_en == ref_mask, "switches follow command");
  endtask

  initial begin
    logic [NB-1:0] prev_sw;
    repeat (2) @(posedge clk);
    prev_sw = sw_state;
    ref_mask = sw_state;
    rst_n = 1;
    wait (init_done);
    @(negedge clk);
    check(vcan_en == prev_sw, "read-back after reset");
    check(sw_state == prev_sw, "reset does not switch anything");
    for (int i = 0; i < 30; i++) begin
      int r = $urandom % 3;
      command(r == 0 ? OP_VCAN_ON : r == 1 ? OP_VCAN_OFF : OP_VCAN_READ, $urandom % NB);
    end
    // Reset in the middle of a read-back, then again after.
    prev_sw = sw_state;
    @(negedge clk); cmd_op = OP_VCAN_READ; cmd_bus = 4'd5; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    repeat (7) @(negedge clk);
    rst_n = 0; repeat (3) @(negedge clk); rst_n = 1;
    check(vcan_en == '0 && !init_done, "shadow cleared by reset");
    wait (init_done);
    @(negedge clk);
    check(sw_state == prev_sw, "switch states preserved over reset");
    check(vcan_en == prev_sw, "shadow restored by read-back");
    // Single upset of the shadow register.
    upset[1][3] = 1'b1; @(negedge clk); upset = '0;
    check(vcan_en == prev_sw && tmr_mismatch, "upset outvoted and flagged");
    @(negedge clk);
    check(!tmr_mismatch, "upset repaired");
    command(OP_VCAN_ON, 3);
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
