// tb_mopshub_full: the hub at its default parameters (200 MHz clock, CAN at
// 125 kbit/s with 100 clocks per time quantum and 16 quanta per bit, SPI at
// 10 MHz, 1.5 s watchdog). The testbench plays the back end on the elink and
// puts one MOPS stand-in on every CAN bus. It takes the hub through one
// complete operation: elink lock and VCAN read-back at start-up, a VCAN
// command, a CANopen-style request on bus 7 with the node's reply, and one
// monitoring scan. It checks the messages and the CAN bit time (every edge
// of the hub's own frame, up to the end of transmission, falls on a multiple of 1600 clocks from the
// start-of-frame edge).
module tb_mopshub_full;
  import mopshub_pkg::*;
  import ref_8b10b_pkg::*;

  localparam int BITC = 1600;
  logic clk = 0, rst_n = 0;
  logic [1:0] elink_din = 0, elink_dout;
  logic [N_BUS-1:0] can_rx, can_tx, bc_cs_n, bc_miso, vcan_en, sw_state, node_tx;
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
  int ans [N_BUS];

  mopshub_top dut (.*);

  always #2.5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  for (genvar b = 0; b < N_BUS; b++) begin : g_bus
    mops_model #(.NODE_ID(b + 1), .BRP(100), .NTQ(16), .SAMPLE_TQ(11)) u_node (
      .clk, .rst_n, .can_rx(can_rx[b]), .can_tx(node_tx[b]), .n_answered(ans[b]));
    assign can_rx[b] = can_tx[b] & node_tx[b];
    vcan_switch_model #(.INIT(b % 2)) u_sw (
      .sclk(bc_sclk), .mosi(bc_mosi), .cs_n(bc_cs_n[b]), .miso(bc_miso[b]), .state(sw_state[b]));
  end
  for (genvar a = 0; a < 8; a++) begin : g_adc
    adc_model #(.ADC_IDX(a)) u_adc (.sclk(bm_sclk), .mosi(bm_mosi), .cs_n(bm_cs_n[a]),
                                    .offset(16'h0), .miso(bm_miso[a]));
  end

  // Back-end transmitter: K28.5 idle, K27.7 / 12 bytes / K29.7 packets.
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

  // Back-end receiver: comma search, then symbols and packets.
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

  // CAN bit timing of the hub's transmitter on bus 7.
  longint t_sof = -1, n_clk = 0;
  int n_edges = 0, bad_edges = 0;
  logic tx7_q = 1;
  bit tx7_done = 0;
  always @(posedge clk) if (rst_n) begin
    n_clk++;
    if (ev_can_tx_done[7]) tx7_done = 1;
    if (can_tx[7] != tx7_q && !tx7_done) begin
      if (t_sof < 0) t_sof = n_clk;
      else begin
        n_edges++;
        if ((n_clk - t_sof) % BITC != 0) bad_edges++;
      end
    end
    tx7_q <= can_tx[7];
  end

  initial begin
    hub_msg_t m, r;
    logic [15:0] sw0;
    int n_mon;
    repeat (3) @(posedge clk);
    sw0 = sw_state;
    rst_n = 1;
    wait (sys_run);
    check(link_locked && vcan_en == sw0 && sw_state == sw0, "bring-up: lock, VCAN read back");
    repeat (12 * BITC) @(posedge clk);

    // VCAN on for bus 2 (initially off).
    m = '0; m.bus = ADDR_BUS_CTRL; m.frame.dlc = 2; m.frame.data[63:48] = {OP_VCAN_ON, 8'd2};
    send_msg(m);
    wait (up_q.size() != 0);
    r = up_q.pop_front();
    check(r.bus == ADDR_BUS_CTRL && r.frame.data[63:56] == OP_VCAN_ON && r.frame.data[24], "VCAN status");
    check(sw_state[2] && vcan_en == sw_state && r.frame.data[47:32] == sw_state, "VCAN switched on");

    // Request to node 8 on bus 7 and its reply.
    m = '0; m.bus = 7; m.frame.id = 11'h608; m.frame.dlc = 8; m.frame.data = 64'h4018_1001_0000_0000;
    send_msg(m);
    wait (up_q.size() != 0);
    r = up_q.pop_front();
    check(r.bus == 7 && r.frame.id == 11'h588 && r.frame.dlc == 8 &&
          r.frame.data == (m.frame.data ^ {8{8'h08}}), "CAN reply");
    check(ans[7] == 1 && n_edges > 10 && bad_edges == 0, "CAN bit time 1600 clocks (125 kbit/s)");
    $display("hub frame on bus 7: %0d edges, %0d off the 1600-clock grid", n_edges, bad_edges);

    // One monitoring scan: 8 ADCs x 4 channels.
    m = '0; m.bus = ADDR_BUS_MON;
    send_msg(m);
    n_mon = 0;
    while (n_mon < 32) begin
      wait (up_q.size() != 0);
      r = up_q.pop_front();
      check(r.bus == ADDR_BUS_MON, "monitor message");
      begin
        int chan;
        chan = 2 * int'(r.frame.data[63:56]) + int'(r.frame.data[48]);
        check(r.frame.data[47:32] == {4'(chan / 4), 4'(chan % 4), 8'h5A}, "monitor value");
      end
      n_mon++;
    end
    check(up_bad == 0 && pkts_rx_bad == 0 && wd_count == 0 && !tmr_error, "clean run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog: testbench timed out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
