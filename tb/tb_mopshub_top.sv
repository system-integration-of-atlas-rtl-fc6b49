// tb_mopshub_top: end-to-end test of the hub at reduced clock dividers.
// The testbench is the back end on the elink (reference 8b/10b encoder and
// a comma-searching receiver), 16 CAN buses with MOPS stand-ins (two nodes on
// bus 0, none on bus 15), 16 VCAN switch models and 8 ADC models.
// It runs: bring-up with VCAN read-back; CANopen-style requests and replies
// on all buses; a request colliding with a reply (the hub loses
// arbitration); a bus with no node (error flags, retries, failure); VCAN
// on/off commands; requested and periodic monitoring scans; a burst of 16
// simultaneous replies that fills the Upstream FIFO; a corrupted elink
// packet; single upsets of the triplicated registers; a bus stuck dominant
// that hangs the FSM until the watchdog recovers the hub with VCAN unchanged.
// Each of these mechanisms is counted and must occur at least once.
module tb_mopshub_top;
  import mopshub_pkg::*;
  import ref_8b10b_pkg::*;

  localparam int BRP = 2, NTQ = 8, SP = 5, BITC = BRP * NTQ;
  localparam int SPI_DIV = 2, N_ADC = 8, N_CH = 4;
  localparam int WD_TO = 30000, MON_P = 150000, FIFO_D = 4;

  logic clk = 0, rst_n = 0;
  logic [1:0] elink_din = 0, elink_dout;
  logic [N_BUS-1:0] can_rx, can_tx, bc_cs_n, bc_miso, vcan_en, sw_state;
  logic bc_sclk, bc_mosi, bm_sclk, bm_mosi;
  logic [N_ADC-1:0] bm_cs_n, bm_miso;
  logic link_locked, sys_run, tmr_error;
  logic [7:0] wd_count;
  logic [15:0] pkts_rx_ok, pkts_rx_bad, pkts_tx, can_rx_overflows;
  logic [N_BUS-1:0] ev_can_tx_done, ev_can_tx_fail, ev_can_arb_lost, ev_can_err;
  logic ev_mon_scan;
  logic [15:0] msgs_dropped;
  logic [2:0][2:0] upset_fsm = '0;
  logic [2:0][N_BUS-1:0] upset_vcan = '0;
  logic [2:0][63:0] upset_wd = '0;
  logic [15:0] adc_offset = 16'h1234;
  int checks = 0, failures = 0;

  mopshub_top #(.BRP(BRP), .NTQ(NTQ), .SAMPLE_TQ(SP), .SPI_DIV(SPI_DIV), .N_ADC(N_ADC),
                .N_CH(N_CH), .WD_TIMEOUT(WD_TO), .MON_PERIOD(MON_P), .FIFO_DEPTH(FIFO_D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // ------------------------------------------------------------ CAN buses
  logic [N_BUS-1:0] node1_tx, node2_tx, stuck;
  int ans1 [N_BUS];
  int ans2;
  for (genvar b = 0; b < N_BUS; b++) begin : g_bus
    if (b != 15) begin : g_n1
      mops_model #(.NODE_ID(1), .BRP(BRP), .NTQ(NTQ), .SAMPLE_TQ(SP)) u_n1 (
        .clk, .rst_n, .can_rx(can_rx[b]), .can_tx(node1_tx[b]), .n_answered(ans1[b]));
    end else begin : g_none
      assign node1_tx[b] = 1'b1;
    end
    if (b == 0) begin : g_n2
      mops_model #(.NODE_ID(2), .BRP(BRP), .NTQ(NTQ), .SAMPLE_TQ(SP)) u_n2 (
        .clk, .rst_n, .can_rx(can_rx[b]), .can_tx(node2_tx[b]), .n_answered(ans2));
    end else begin : g_no2
      assign node2_tx[b] = 1'b1;
    end
    assign can_rx[b] = can_tx[b] & node1_tx[b] & node2_tx[b] & !stuck[b];
    vcan_switch_model #(.INIT(b % 3 == 0)) u_sw (
      .sclk(bc_sclk), .mosi(bc_mosi), .cs_n(bc_cs_n[b]), .miso(bc_miso[b]), .state(sw_state[b]));
  end
  for (genvar a = 0; a < N_ADC; a++) begin : g_adc
    adc_model #(.ADC_IDX(a)) u_adc (.sclk(bm_sclk), .mosi(bm_mosi), .cs_n(bm_cs_n[a]),
                                    .offset(adc_offset), .miso(bm_miso[a]));
  end

  // ------------------------------------------------- elink, back-end side
  bit txbits [$];
  logic rd_tx = 0;
  task automatic put_sym(input logic k, input logic [7:0] b, input bit corrupt = 0);
    logic [9:0] s;
    if (corrupt) begin rd_tx = ~rd_tx; b = 8'h00; end
    s = ref_enc(k, b, rd_tx);
    for (int i = 9; i >= 0; i--) txbits.push_back(s[i]);
  endtask
  task automatic send_msg(input hub_msg_t m, input bit corrupt = 0);
    put_sym(1, K27_7);
    for (int i = 0; i < 12; i++)
      put_sym(0, ref_byte(m.bus, m.frame.id, m.frame.rtr, m.frame.dlc, m.frame.data, i), corrupt && i == 5);
    put_sym(1, K29_7);
    put_sym(1, K28_5);
  endtask
  always @(negedge clk) begin
    while (txbits.size() < 12) put_sym(1, K28_5);
    elink_din[1] = txbits.pop_front();
    elink_din[0] = txbits.pop_front();
  end

  // Receiver: comma search on the bit stream, then 10-bit symbols.
  logic [9:0] win = 0;
  bit rx_lock = 0;
  int rx_cnt = 0, pstate = 0, pbytes = 0;
  logic [7:0] pkt [12];
  hub_msg_t up_q [$];
  int up_bad = 0;
  task automatic rx_bit(input logic b);
    logic k; logic [7:0] v; bit ok;
    win = {win[8:0], b};
    if (!rx_lock) begin
      if (win == 10'b0011111010 || win == 10'b1100000101) begin rx_lock = 1; rx_cnt = 0; end
      return;
    end
    rx_cnt++;
    if (rx_cnt < 10) return;
    rx_cnt = 0;
    ok = ref_dec(win, k, v);
    if (!ok) begin up_bad++; rx_lock = 0; pstate = 0; return; end
    if (k && v == K27_7) begin pstate = 1; pbytes = 0; end
    else if (pstate == 1 && !k) begin if (pbytes < 12) pkt[pbytes] = v; pbytes++; end
    else if (pstate == 1 && k && v == K29_7) begin
      hub_msg_t m;
      pstate = 0;
      if (pbytes == 12) begin
        m.bus = pkt[0][4:0]; m.frame.rtr = pkt[1][3]; m.frame.id = {pkt[1][2:0], pkt[2]};
        m.frame.dlc = pkt[3][3:0];
        for (int i = 0; i < 8; i++) m.frame.data[63 - 8*i -: 8] = pkt[4 + i];
        up_q.push_back(m);
      end else up_bad++;
    end
  endtask
  always @(posedge clk) if (rst_n) begin rx_bit(elink_dout[1]); rx_bit(elink_dout[0]); end

  // ------------------------------------------------------- upstream checker
  hub_msg_t exp_can [$];
  typedef struct { logic [7:0] op; int bus; logic [15:0] mask; } bc_exp_t;
  bc_exp_t exp_bc [$];
  int n_can_rep = 0, n_bc = 0, n_mon = 0, n_unexp = 0;
  always @(posedge clk) begin
    while (up_q.size() != 0) begin
      hub_msg_t m;
      m = up_q.pop_front();
      if (m.bus < N_BUS) begin
        int hit = -1;
        foreach (exp_can[i]) if (hit < 0 && exp_can[i] == m) hit = i;
        check(hit >= 0, "CAN reply expected");
        if (hit >= 0) exp_can.delete(hit);
        else begin
          n_unexp++;
          $display("  unexpected bus=%0d id=%h dlc=%0d data=%h", m.bus, m.frame.id, m.frame.dlc, m.frame.data);
        end
        n_can_rep++;
      end else if (m.bus == ADDR_BUS_CTRL) begin
        check(exp_bc.size() != 0, "Bus Control status expected");
        if (exp_bc.size() != 0) begin
          check(m.frame.data[63:56] == exp_bc[0].op && m.frame.data[51:48] == 4'(exp_bc[0].bus),
                "status op/bus");
          check(m.frame.data[47:32] == exp_bc[0].mask && m.frame.data[24], "status mask/ok");
          void'(exp_bc.pop_front());
        end
        n_bc++;
      end else if (m.bus == ADDR_BUS_MON) begin
        int chan, a, c;
        chan = 2 * int'(m.frame.data[63:56]) + int'(m.frame.data[48]);
        a = chan / N_CH; c = chan % N_CH;
        check(m.frame.data[47:32] == ({4'(a), 4'(c), 8'h5A} ^ adc_offset), "monitor value");
        n_mon++;
      end else begin
        check(0, "unknown upstream source");
      end
    end
  end

  // ------------------------------------------------------ mechanism counters
  int n_arb = 0, n_err = 0, n_fail = 0, n_fifo_full = 0, n_dn_full = 0, n_tmr = 0, n_scan = 0;
  int n_wait_can = 0, n_lock = 0;
  logic lock_q = 0;
  always @(posedge clk) if (rst_n) begin
    n_arb  += $countones(ev_can_arb_lost);
    n_err  += $countones(ev_can_err);
    n_fail += $countones(ev_can_tx_fail);
    if (dut.u_tx.msg_valid && !dut.u_tx.msg_ready) n_fifo_full++;
    if (tmr_error) n_tmr++;
    if (ev_mon_scan) n_scan++;
    if (!dut.u_rx.f_ready) n_dn_full++;
    if (link_locked && !lock_q) n_lock++;
    lock_q <= link_locked;
    if (dut.can_valid && !dut.can_ready) n_wait_can++;
  end

  // ---------------------------------------------------------------- helpers
  function automatic hub_msg_t sdo(input int b, input int node, input logic [63:0] d);
    hub_msg_t m;
    m.bus = 5'(b); m.frame.id = 11'(12'h600 + node); m.frame.rtr = 0; m.frame.dlc = 8; m.frame.data = d;
    return m;
  endfunction
  task automatic expect_reply(input int b, input int node, input logic [63:0] d);
    hub_msg_t r;
    r.bus = 5'(b); r.frame.id = 11'(12'h580 + node); r.frame.rtr = 0; r.frame.dlc = 8;
    r.frame.data = d ^ {8{8'(node)}};
    exp_can.push_back(r);
  endtask
  task automatic bc_cmd(input logic [7:0] op, input int b);
    hub_msg_t m;
    logic [15:0] mask;
    m = '0; m.bus = ADDR_BUS_CTRL; m.frame.dlc = 2; m.frame.data[63:48] = {op, 8'(b)};
    mask = sw_state;
    if (op == OP_VCAN_ON) mask[b] = 1;
    if (op == OP_VCAN_OFF) mask[b] = 0;
    exp_bc.push_back('{op: op, bus: b, mask: mask});
    send_msg(m);
  endtask
  task automatic wait_clk(input int n);
    repeat (n) @(posedge clk);
  endtask

  task automatic wait_replies(input int max_clk, input string what);
    int t;
    t = 0;
    while (exp_can.size() != 0 && t < max_clk) begin @(posedge clk); t++; end
    check(exp_can.size() == 0, what);
    foreach (exp_can[i]) $display("  missing bus=%0d id=%h", exp_can[i].bus, exp_can[i].frame.id);
  endtask

  initial begin
    logic [15:0] sw0;
    logic [63:0] d;
    int bad0, drop0, arb0, s0;
    stuck = '0;
    wait_clk(3);
    sw0 = sw_state;
    rst_n = 1;
    // Bring-up: elink lock, VCAN read-back, then run.
    wait (sys_run);
    check(link_locked, "elink locked before run");
    check(vcan_en == sw0 && sw_state == sw0, "VCAN read back, nothing switched");
    wait_clk(12 * BITC);

    // One request per bus with a node, plus node 2 on bus 0.
    for (int b = 0; b < 15; b++) begin
      d = {$urandom, $urandom};
      send_msg(sdo(b, 1, d)); expect_reply(b, 1, d);
    end
    d = {$urandom, $urandom};
    send_msg(sdo(0, 2, d)); expect_reply(0, 2, d);
    wait_replies(2000 * BITC, "replies from all buses");
    check(can_rx_overflows == 0, "no CAN receive overflow");

    // Back-to-back requests on bus 0: the hub's second request starts
    // together with node 1's reply and loses arbitration (0x581 < 0x602).
    arb0 = n_arb;
    d = {$urandom, $urandom};
    send_msg(sdo(0, 1, d)); expect_reply(0, 1, d);
    d = {$urandom, $urandom};
    send_msg(sdo(0, 2, d)); expect_reply(0, 2, d);
    wait_replies(600 * BITC, "replies after arbitration");
    check(n_arb > arb0, "hub lost arbitration and retried");

    // Bus without a node: no ACK, error flags, retries, failure. The second
    // request keeps the FSM waiting, so the Downstream FIFO fills up and
    // later packets (to an unused address) are dropped at the elink.
    bad0 = pkts_rx_bad; drop0 = msgs_dropped;
    send_msg(sdo(15, 1, 64'h1));
    send_msg(sdo(15, 1, 64'h2));
    for (int i = 0; i < 24; i++) begin
      hub_msg_t m;
      m = '0; m.bus = 5'd20;
      send_msg(m);
    end
    wait_clk(1200 * BITC);
    check(n_fail == 2, "both transmissions on the empty bus failed");
    check(n_err >= 8, "error flags on the empty bus");
    check(n_dn_full > 0, "Downstream FIFO full");
    check(pkts_rx_bad > bad0, "packets dropped while FIFO full");
    check(msgs_dropped - 16'(drop0) + pkts_rx_bad - 16'(bad0) == 16'd24,
          "unused-address messages either dropped by the FSM or at the FIFO");

    // VCAN commands.
    bc_cmd(OP_VCAN_ON, 1);  wait_clk(3000);
    bc_cmd(OP_VCAN_OFF, 0); wait_clk(3000);
    bc_cmd(OP_VCAN_READ, 7); wait_clk(3000);
    check(exp_bc.size() == 0 && n_bc == 3, "Bus Control status messages");
    check(vcan_en == sw_state && sw_state[1] && !sw_state[0], "switch states follow commands");

    // Requested monitoring scan while the replies of 14 buses arrive: the
    // Upstream FIFO fills and holds back its sources.
    begin
      hub_msg_t m;
      int r0;
      s0 = n_scan; r0 = n_can_rep;
      for (int b = 1; b < 15; b++) begin
        d = {$urandom, $urandom};
        send_msg(sdo(b, 1, d)); expect_reply(b, 1, d);
      end
      wait (n_can_rep > r0);
      m = '0; m.bus = ADDR_BUS_MON;
      send_msg(m);
      wait (n_scan > s0);
      wait_replies(600 * BITC, "replies during a scan");
      wait_clk(N_ADC * N_CH * 80);
    end
    check(n_mon >= N_ADC * N_CH, "monitor values delivered");

    // A corrupted elink packet is dropped.
    bad0 = pkts_rx_bad;
    send_msg(sdo(3, 1, 64'hDEAD), 1);
    wait_clk(2000);
    check(pkts_rx_bad == 16'(bad0 + 1), "corrupted packet counted");

    // Single upsets in the triplicated registers.
    @(negedge clk); upset_fsm[1][0] = 1; upset_vcan[2][4] = 1; upset_wd[0][3] = 1;
    @(negedge clk); upset_fsm = '0; upset_vcan = '0; upset_wd = '0;
    @(negedge clk);
    check(!tmr_error && sys_run && vcan_en == sw_state, "upsets corrected");
    d = {$urandom, $urandom};
    send_msg(sdo(4, 1, d)); expect_reply(4, 1, d);
    wait_replies(400 * BITC, "operation continues after upsets");

    // Periodic scans, without requests.
    s0 = n_scan;
    wait_clk(MON_P + 40 * 100 * SPI_DIV);
    check(n_scan > s0, "periodic monitoring scan");

    // Hang: bus 14 stuck dominant; the second request to it blocks the FSM
    // until the watchdog resets the hub.
    check(up_bad == 0, "upstream elink stream clean");
    sw0 = sw_state;
    stuck[14] = 1;
    send_msg(sdo(14, 1, 64'h11));
    send_msg(sdo(14, 1, 64'h22));
    wait (wd_count == 1);
    check(n_wait_can > WD_TO / 2, "FSM waited on a blocked bus");
    stuck[14] = 0;
    wait (!sys_run);
    wait (sys_run);
    wait_clk(20);
    check(vcan_en == sw0 && sw_state == sw0, "VCAN unchanged by watchdog recovery");
    wait_clk(20 * BITC);
    d = {$urandom, $urandom};
    send_msg(sdo(2, 1, d)); expect_reply(2, 1, d);
    wait_replies(400 * BITC, "hub works after recovery");

    check(n_unexp == 0, "no unexpected upstream message");
    check(n_tmr > 0, "TMR mismatch seen");
    check(n_fifo_full > 0, "Upstream FIFO back-pressure seen");
    $display("mechanisms: link_lock=%0d arb_lost=%0d can_err=%0d tx_fail=%0d up_full=%0d dn_full=%0d tmr=%0d scans=%0d wd=%0d bc=%0d mon=%0d dropped=%0d",
             n_lock, n_arb, n_err, n_fail, n_fifo_full, n_dn_full, n_tmr, n_scan, wd_count, n_bc, n_mon, msgs_dropped);
    check(n_lock >= 2, "elink lock at start and after the watchdog reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog: testbench timed out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
