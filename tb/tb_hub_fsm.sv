// tb_hub_fsm: checks the hub FSM on its own. Simple responders stand in for
// the elink (link_locked), Bus Control (init_done, a command ready after a
// few clocks), the CAN Node Interface (can_ready at random) and Bus Monitor
// (busy for 10 clocks after a start). The testbench checks the bring-up
// order, that every downstream message reaches the right place exactly once
// and unchanged, that unknown addresses are counted as dropped, the
// heartbeat (high only in the waiting states), the period of automatic
// scans (MON_PERIOD + 1 clocks from start to start when idle) and that an
// upset in one copy of the state register changes nothing.
module tb_hub_fsm;
  import mopshub_pkg::*;

  localparam int MP = 50;
  logic clk = 0, rst_n = 0;
  logic link_locked = 0, bc_init_done = 0, dn_valid = 0, can_ready = 0, bc_cmd_ready = 0;
  logic mon_busy = 0;
  hub_msg_t dn_msg = '0, can_msg;
  logic dn_ready, can_valid, bc_cmd_valid, mon_start, sys_run, kick, tmr_mismatch;
  logic [7:0] bc_cmd_op;
  logic [3:0] bc_cmd_bus;
  logic [15:0] dropped;
  logic [2:0][2:0] upset = '0;
  int checks = 0, failures = 0;

  hub_fsm #(.MON_PERIOD(MP)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // Responders.
  int mon_left = 0, bc_wait = 0, n_mon_start = 0, n_can = 0, n_bc = 0;
  hub_msg_t exp_q [$];
  always @(posedge clk) if (rst_n) begin
    if (mon_start) begin
      n_mon_start++;
      mon_left = 10;
      check(!mon_busy, "no start while busy");
    end
    if (can_valid && can_ready) begin
      n_can++;
      check(exp_q.size() != 0 && can_msg == exp_q[0], "CAN message");
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
    if (bc_cmd_valid && bc_cmd_ready) begin
      n_bc++;
      check(exp_q.size() != 0 && bc_cmd_op == exp_q[0].frame.data[63:56] &&
            bc_cmd_bus == exp_q[0].frame.data[51:48], "Bus Control command");
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
    check(kick == (dut.st_q == 3'd1 || dut.st_q == 3'd3), "heartbeat only while waiting");
  end
  always @(negedge clk) begin
    can_ready    = ($urandom_range(0, 3) == 0);
    bc_cmd_ready = bc_cmd_valid && (bc_wait++ % 4 == 3);
    mon_busy = (mon_left > 0);
    if (mon_left > 0) mon_left--;
  end

  task automatic send(input hub_msg_t m);
    @(negedge clk);
    dn_msg = m; dn_valid = 1;
    do @(posedge clk); while (!dn_ready);
    @(negedge clk);
    dn_valid = 0;
  endtask

  initial begin
    hub_msg_t m;
    longint t0, t1; int d0, s0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);
    check(!sys_run && kick && !dn_ready, "waits for the elink");
    link_locked = 1;
    repeat (20) @(posedge clk);
    check(!sys_run && !kick, "waits for VCAN read-back");
    bc_init_done = 1;
    repeat (2) @(posedge clk);
    check(sys_run && kick, "running");

    // Random mix of CAN, Bus Control, Bus Monitor and unknown addresses.
    d0 = dropped;
    for (int i = 0; i < 200; i++) begin
      int kind;
      kind = $urandom_range(0, 9);
      m.frame.id = 11'($urandom); m.frame.rtr = 1'($urandom); m.frame.dlc = 4'($urandom);
      m.frame.data = {$urandom, $urandom};
      if (kind < 6) begin m.bus = 5'($urandom_range(0, 15)); exp_q.push_back(m); end
      else if (kind < 8) begin m.bus = ADDR_BUS_CTRL; exp_q.push_back(m); end
      else if (kind < 9) m.bus = ADDR_BUS_MON;
      else m.bus = 5'($urandom_range(18, 31));
      send(m);
    end
    repeat (20) @(posedge clk);
    check(exp_q.size() == 0, "every message delivered");
    check(n_can > 50 && n_bc > 10 && n_mon_start > 5, "all destinations used");
    $display("can=%0d bc=%0d mon_starts=%0d dropped=%0d", n_can, n_bc, n_mon_start, dropped - d0);
    check(dropped != 16'(d0), "unknown addresses dropped");

    // Automatic scans while idle: start to start is MON_PERIOD + 1 clocks.
    s0 = n_mon_start;
    wait (n_mon_start == s0 + 1); t0 = $time;
    wait (n_mon_start == s0 + 2); t1 = $time;
    check((t1 - t0) / 10 == MP + 1, "scan period");
    $display("scan period %0d clocks", (t1 - t0) / 10);

    // Single upset in one copy of the state: corrected, state unchanged.
    @(negedge clk); upset[2] = 3'b101;
    @(posedge clk); #1;
    check(tmr_mismatch && sys_run && dut.st_q == 3'd3, "upset masked");
    @(negedge clk); upset = '0;
    @(posedge clk); #1;
    check(!tmr_mismatch && dut.st_q == 3'd3, "upset repaired");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog: testbench timed out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
