// tb_can_node_interface: four buses with two MOPS stand-ins each. Requests
// go to random buses and nodes (and broadcasts, which make two replies
// arbitrate on one bus); every reply must come out upstream exactly once,
// tagged with its bus, under random back-pressure. Checks also that a
// message waits (dn_ready low) while its controller is busy.
module tb_can_node_interface;
  import mopshub_pkg::*;
  localparam int NB = 4, BRP = 2, NTQ = 8, SP = 5;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] can_rx, can_tx, ev_tx_done, ev_tx_fail, ev_arb_lost, ev_err;
  logic [NB-1:0][1:0] node_tx;
  logic dn_valid = 0, dn_ready, up_valid, up_ready = 0;
  hub_msg_t dn_msg, up_msg;
  logic [15:0] rx_overflows;
  int n_ans [NB][2];
  int checks = 0, failures = 0;

  can_node_interface #(.NB(NB), .BRP(BRP), .NTQ(NTQ), .SAMPLE_TQ(SP)) dut (.*);

  for (genvar b = 0; b < NB; b++) begin : g_bus
    assign can_rx[b] = can_tx[b] & node_tx[b][0] & node_tx[b][1];
    for (genvar n = 0; n < 2; n++) begin : g_node
      mops_model #(.NODE_ID(n + 1), .BRP(BRP), .NTQ(NTQ), .SAMPLE_TQ(SP)) u_mops (
        .clk, .rst_n, .can_rx(can_rx[b]), .can_tx(node_tx[b][n]), .n_answered(n_ans[b][n]));
    end
  end
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  hub_msg_t expq [$];
  int got = 0, waits = 0, lost = 0, dones = 0;
  always @(negedge clk) up_ready = ($urandom % 4) != 0;
  always @(posedge clk) if (rst_n) begin
    lost += $countones(ev_arb_lost);
    dones += $countones(ev_tx_done);
    if (dn_valid && !dn_ready) waits++;
    if (up_valid && up_ready) begin
      int hit = -1;
      foreach (expq[i]) if (expq[i] == up_msg) hit = i;
      check(hit >= 0, "reply expected");
      if (hit >= 0) expq.delete(hit);
      got++;
    end
  end

  initial begin
    int nreq = 0, nexp = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (16 * 14) @(posedge clk);
    for (int i = 0; i < 24; i++) begin
      hub_msg_t m, r;
      int b, node;
      b = $urandom % NB; node = (i % 6 == 5) ? 0 : 1 + $urandom % 2;
      m.bus = 5'(b);
      m.frame.id = node == 0 ? 11'h000 : 11'(12'h600 + node);
      m.frame.rtr = 0; m.frame.dlc = 8; m.frame.data = {$urandom, $urandom};
      for (int n = 1; n <= 2; n++) if (node == 0 || node == n) begin
        r.bus = 5'(b); r.frame.id = 11'(12'h580 + n); r.frame.rtr = 0; r.frame.dlc = 8;
        r.frame.data = m.frame.data ^ {8{8'(n)}};
        expq.push_back(r); nexp++;
      end
      @(negedge clk); dn_msg = m; dn_valid = 1;
      @(posedge clk); while (!dn_ready) @(posedge clk);
      @(negedge clk); dn_valid = 0;
      nreq++;
      repeat ($urandom % 300) @(posedge clk);
    end
    repeat (16 * 1200) @(posedge clk);
    check(got == nexp, "every reply delivered once");
    check(expq.size() == 0, "no reply missing");
    check(dones == nreq, "every request sent");
    check(waits > 0, "a message waited for a busy controller");
    check(rx_overflows == 0, "no overflow");
    $display("broadcast arbitration events: %0d", lost);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
