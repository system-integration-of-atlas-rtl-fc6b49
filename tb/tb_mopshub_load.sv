// tb_mopshub_load: the hub's largest configuration, 16 CAN buses with four
// MOPS stand-ins each (64 nodes), with fast CAN and SPI dividers. The
// testbench plays the back end on the elink: for each node id it sends one
// request on every bus and waits for the 16 replies (the Downstream FIFO
// holds 16 messages; a back end must not send faster than the hub can
// dispatch). Two such rounds run while periodic monitoring scans interleave
// their values. It checks that all 128 replies come back
// intact, tagged with the right bus, with no frame lost in the hub
// (can_rx_overflows = 0) and no packet lost on either elink direction.
module tb_mopshub_load;
  import mopshub_pkg::*;
  import ref_8b10b_pkg::*;

  localparam int BRP = 2, NTQ = 8, SP = 5, BITC = BRP * NTQ, NODES = 4;
  logic clk = 0, rst_n = 0;
  logic [1:0] elink_din = 0, elink_dout;
  logic [N_BUS-1:0] can_rx, can_tx, bc_cs_n, bc_miso, vcan_en, sw_state;
  logic bc_sclk, bc_mosi, bm_sclk, bm_mosi;
  logic [7:0] bm_cs_n, bm_miso;
  logic link_locked, sys_run, tmr_error, ev_mon_scan;
  logic [7:0] wd_count;
  logic [15:0] pkts_rx_ok, pkts_rx_bad, pkts_tx, can_rx_overflows, msgs_dropped;
  logic [N_BUS-1:0] ev_can_tx_done, ev_can_tx_fail, ev_can_arb_lost, ev_can_err;
  logic [2:0][2:0] upset_fsm = '0;
  logic [2:0][N_BUS-1:0] upset_vcan = '0;
  logic [2:0][63:0] upset_wd = '0;
  int checks = 0, failures = 0;

  mopshub_top #(.BRP(BRP), .NTQ(NTQ), .SAMPLE_TQ(SP), .SPI_DIV(2), .MON_PERIOD(20000),
                .WD_TIMEOUT(200000)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  logic [NODES-1:0] node_tx [N_BUS];
  for (genvar b = 0; b < N_BUS; b++) begin : g_bus
    for (genvar n = 0; n < NODES; n++) begin : g_node
      int n_ans;
      mops_model #(.NODE_ID(n + 1), .BRP(BRP), .NTQ(NTQ), .SAMPLE_TQ(SP)) u_node (
        .clk, .rst_n, .can_rx(can_rx[b]), .can_tx(node_tx[b][n]), .n_answered(n_ans));
    end
    assign can_rx[b] = can_tx[b] & (&node_tx[b]);
    vcan_switch_model #(.INIT(1'b1)) u_sw (
      .sclk(bc_sclk), .mosi(bc_mosi), .cs_n(bc_cs_n[b]), .miso(bc_miso[b]), .state(sw_state[b]));
  end
  for (genvar a = 0; a < 8; a++) begin : g_adc
    adc_model #(.ADC_IDX(a)) u_adc (.sclk(bm_sclk), .mosi(bm_mosi), .cs_n(bm_cs_n[a]),
                                    .offset(16'h0), .miso(bm_miso[a]));
  end

  // Back-end transmitter.
  bit txbits [$];
  logic rd_tx = 0;
  task automatic put_sym(input logic k, input logic [7:0] b);
    logic [9:0] s;
    s = ref_enc(k, b, rd_tx);
    for (int i = 9; i >= 0; i--) txbits.push_back(s[i]);
  endtask
  task automatic send_msg(input hub_msg_t m);
    put_sym(1, K27_7);
    for (int i = 0; i < 12; i++)
      put_sym(0, ref_byte(m.bus, m.frame.id, m.frame.rtr, m.frame.dlc, m.frame.data, i));
    put_sym(1, K29_7);
  endtask
  always @(negedge clk) begin
    while (txbits.size() < 12) put_sym(1, K28_5);
    elink_din[1] = txbits.pop_front();
    elink_din[0] = txbits.pop_front();
  end

  // Back-end receiver.
  logic [9:0] win = 0;
  bit rx_lock = 0;
  int rx_cnt = 0, pbytes = -1, up_bad = 0;
  logic [7:0] pkt [12];
  hub_msg_t up_q [$];
  task automatic rx_bit(input logic b);
    logic k; logic [7:0] v;
    win = {win[8:0], b};
    if (!rx_lock) begin
      if (win == 10'b0011111010 || win == 10'b1100000101) begin rx_lock = 1; rx_cnt = 0; end
      return;
    end
    if (++rx_cnt < 10) return;
    rx_cnt = 0;
    if (!ref_dec(win, k, v)) begin up_bad++; return; end
    if (k && v == K27_7) pbytes = 0;
    else if (!k && pbytes >= 0 && pbytes < 12) pkt[pbytes++] = v;
    else if (k && v == K29_7 && pbytes == 12) begin
      hub_msg_t m;
      m.bus = pkt[0][4:0]; m.frame.rtr = pkt[1][3]; m.frame.id = {pkt[1][2:0], pkt[2]};
      m.frame.dlc = pkt[3][3:0];
      for (int i = 0; i < 8; i++) m.frame.data[63 - 8*i -: 8] = pkt[4 + i];
      up_q.push_back(m);
      pbytes = -1;
    end
  endtask
  always @(posedge clk) if (rst_n) begin rx_bit(elink_dout[1]); rx_bit(elink_dout[0]); end

  int n_fail = 0, n_arb = 0, n_err = 0;
  always @(posedge clk) if (rst_n) begin
    n_fail += $countones(ev_can_tx_fail);
    n_arb  += $countones(ev_can_arb_lost);
    n_err  += $countones(ev_can_err);
  end

  // Scoreboard.
  hub_msg_t exp_q [$];
  int n_rep = 0, n_mon = 0, n_unexp = 0;
  always @(posedge clk) begin
    while (up_q.size() != 0) begin
      hub_msg_t m;
      int hit;
      m = up_q.pop_front();
      if (m.bus == ADDR_BUS_MON) n_mon++;
      else begin
        hit = -1;
        foreach (exp_q[i]) if (hit < 0 && exp_q[i] == m) hit = i;
        check(hit >= 0, "reply matches a request");
        if (hit >= 0) begin exp_q.delete(hit); n_rep++; end
        else n_unexp++;
      end
    end
  end

  // One round: for each node id, one request on every bus (16 messages, as
  // many as the Downstream FIFO holds), then wait for the 16 replies, as a
  // back end doing request/response would.
  task automatic round(input int r);
    for (int n = 1; n <= NODES; n++) begin
      int w;
      for (int b = 0; b < N_BUS; b++) begin
        hub_msg_t m, e;
        m.bus = 5'(b); m.frame.id = 11'(12'h600 + n); m.frame.rtr = 0; m.frame.dlc = 8;
        m.frame.data = {8'(r), 8'(b), 8'(n), 8'h00, $urandom};
        e = m; e.frame.id = 11'(12'h580 + n); e.frame.data = m.frame.data ^ {8{8'(n)}};
        exp_q.push_back(e);
        send_msg(m);
      end
      w = 0;
      while (exp_q.size() != 0 && w < 100000) begin @(posedge clk); w++; end
    end
  endtask

  initial begin
    longint t0, t1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (sys_run);
    repeat (12 * BITC) @(posedge clk);
    t0 = $time;
    round(1);
    t1 = $time;
    check(n_rep == N_BUS * NODES, "round 1: every node answered");
    foreach (exp_q[i]) $display("  missing bus=%0d id=%h", exp_q[i].bus, exp_q[i].frame.id);
    $display("round 1: %0d replies in %0d clocks (%0d CAN bit times)", n_rep, (t1 - t0) / 10,
             (t1 - t0) / 10 / BITC);
    round(2);
    check(n_rep == 2 * N_BUS * NODES, "round 2: every node answered");
    check(n_mon >= 32, "monitoring scans interleaved");
    check(n_unexp == 0 && up_bad == 0, "no unexpected or corrupt upstream message");
    check(can_rx_overflows == 0 && pkts_rx_bad == 0 && wd_count == 0, "nothing lost, no recovery");
    check(n_fail == 0 && n_err == 0 && !tmr_error, "no CAN errors or failures");
    $display("replies=%0d monitor values=%0d arbitration losses=%0d", n_rep, n_mon, n_arb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("watchdog: testbench timed out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
