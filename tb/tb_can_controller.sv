// tb_can_controller: checks the controller bit by bit against a reference
// CAN 2.0A frame builder written here (CRC-15, bit stuffing, field layout).
// The testbench is a second node on a wired-AND bus and runs: frames sent by
// the controller (bus bits compared with the reference, ACK given by the
// testbench), frames received by it (content, and its ACK bit), arbitration
// lost to a lower identifier followed by the automatic retry, a missing ACK
// (error flags, retries, tx_fail) and a stuff error in a received frame.
// Timing: 16 clocks per bit; the bit period is checked on the bus.
module tb_can_controller;
  import mopshub_pkg::*;
  localparam int BRP = 2, NTQ = 8, SAMPLE_TQ = 5, TRIES = 2;
  localparam int BITC = BRP * NTQ;

  logic clk = 0, rst_n = 0;
  logic can_tx, tb_drv = 1, bus;
  logic tx_valid = 0, tx_ready, tx_done, tx_fail, rx_valid, arb_lost, err_flag;
  can_frame_t tx_frame, rx_frame;
  int checks = 0, failures = 0;

  assign bus = can_tx & tb_drv;

  can_controller #(.BRP(BRP), .NTQ(NTQ), .SAMPLE_TQ(SAMPLE_TQ), .MAX_TRIES(TRIES)) dut (
    .clk, .rst_n, .can_rx(bus), .can_tx, .tx_valid, .tx_ready, .tx_frame,
    .tx_done, .tx_fail, .rx_valid, .rx_frame, .arb_lost, .err_flag);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // Event counters.
  int n_done = 0, n_fail = 0, n_rx = 0, n_lost = 0, n_err = 0;
  can_frame_t last_rx;
  always @(posedge clk) if (rst_n) begin
    if (tx_done) n_done++;
    if (tx_fail) n_fail++;
    if (arb_lost) n_lost++;
    if (err_flag) n_err++;
    if (rx_valid) begin n_rx++; last_rx = rx_frame; end
  end

  // Reference: stuffed bit stream from SOF to the end of the CRC, then the
  // unstuffed tail (CRC delimiter, ACK slot, ACK delimiter, 7 x EOF).
  typedef bit bitq_t [$];
  function automatic bitq_t ref_frame(input can_frame_t f);
    bitq_t raw, out;
    bit [14:0] crc = 0;
    int n, run = 0;
    bit last = 1;
    n = f.rtr ? 0 : (f.dlc > 8 ? 8 : f.dlc);
    raw.push_back(0);
    for (int i = 10; i >= 0; i--) raw.push_back(f.id[i]);
    raw.push_back(f.rtr); raw.push_back(0); raw.push_back(0);
    for (int i = 3; i >= 0; i--) raw.push_back(f.dlc[i]);
    for (int i = 0; i < 8 * n; i++) raw.push_back(f.data[63 - i]);
    foreach (raw[i]) begin
      bit fb = raw[i] ^ crc[14];
      crc = {crc[13:0], 1'b0};
      if (fb) crc ^= 15'h4599;
    end
    for (int i = 14; i >= 0; i--) raw.push_back(crc[i]);
    foreach (raw[i]) begin
      out.push_back(raw[i]);
      if (raw[i] == last) run++; else run = 1;
      last = raw[i];
      if (run == 5) begin out.push_back(!last); last = !last; run = 1; end
    end
    out.push_back(1); out.push_back(1); out.push_back(1);   // CRC delim, ACK slot, ACK delim
    repeat (7) out.push_back(1);
    return out;
  endfunction

  function automatic can_frame_t rand_frame();
    can_frame_t f;
    f.id = 11'($urandom); f.rtr = ($urandom % 6) == 0; f.dlc = 4'($urandom % 10);
    f.data = {$urandom, $urandom};
    if (f.rtr) f.data = '0;
    else if (f.dlc < 8) f.data = f.data & ~(64'hFFFF_FFFF_FFFF_FFFF >> (8 * f.dlc));
    return f;
  endfunction

  // Watch the controller send `f`; the testbench ACKs if `ack`.
  // Returns 1 if every bus bit matched.
  task automatic expect_tx(input can_frame_t f, input bit ack, output bit ok);
    bitq_t q;
    int len, ack_pos;
    q = ref_frame(f);
    len = q.size();
    ack_pos = len - 9;
    ok = 1;
    @(negedge bus);
    for (int k = 0; k < len; k++) begin
      if (k == ack_pos && ack) begin
        tb_drv = 0;
      end
      repeat (BITC / 2) @(posedge clk);
      if (k == ack_pos) begin
        if (ack && bus !== 1'b0) ok = 0;
      end else if (bus !== q[k]) ok = 0;
      repeat (BITC - BITC / 2) @(posedge clk);
      tb_drv = 1;
      if (!ok) break;
    end
  endtask

  // Send a frame from the testbench; returns the level seen in the ACK slot.
  task automatic send_frame(input bitq_t q, output bit acked);
    int ack_pos;
    ack_pos = q.size() - 9;
    acked = 0;
    foreach (q[k]) begin
      tb_drv = (k == ack_pos) ? 1'b1 : q[k];
      repeat (BITC - 6) @(posedge clk);
      if (k == ack_pos) acked = (bus == 1'b0);
      repeat (6) @(posedge clk);
    end
    tb_drv = 1;
    repeat (3 * BITC) @(posedge clk);   // intermission
  endtask

  initial begin
    can_frame_t f, g;
    bit ok, acked;
    longint t0, t1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (12 * BITC) @(posedge clk);   // bus integration (11 recessive bits)

    // 1. Frames sent by the controller.
    for (int i = 0; i < 12; i++) begin
      f = rand_frame();
      @(negedge clk); tx_frame = f; tx_valid = 1;
      @(negedge clk); tx_valid = 0;
      expect_tx(f, 1, ok);
      check(ok, "transmitted bits equal reference frame");
      repeat (5 * BITC) @(posedge clk);
      check(n_done == i + 1, "tx_done");
    end

    // Bit period: time between SOF edge and first recessive edge after a known pattern.
    f = '{id: 11'h7FF, rtr: 0, dlc: 4'd0, data: '0};   // SOF 0 then 1s: edge after one bit
    @(negedge clk); tx_frame = f; tx_valid = 1;
    @(negedge clk); tx_valid = 0;
    @(negedge bus); t0 = $time;
    @(posedge bus); t1 = $time;
    check(t1 - t0 == BITC * 10, "bit time 16 clocks");
    repeat (150 * BITC) @(posedge clk);  // finishes without our ACK: errors and retries
    check(n_fail == 1, "tx_fail after missing ACK");
    check(n_err >= TRIES, "error flags on missing ACK");
    repeat (2 * BITC) @(posedge clk);

    // 2. Frames received by the controller.
    for (int i = 0; i < 12; i++) begin
      f = rand_frame();
      send_frame(ref_frame(f), acked);
      check(acked, "controller ACKs a good frame");
      check(n_rx == i + 1 && last_rx == f, "received frame content");
    end

    // 3. Arbitration: the testbench starts the same bit with a lower identifier.
    f = rand_frame(); f.id = 11'h400 | f.id;          // controller: higher id
    g = rand_frame(); g.id = 11'h100 | (g.id & 11'h0FF); // testbench: lower id wins
    @(negedge clk); tx_frame = f; tx_valid = 1;
    @(negedge clk); tx_valid = 0;
    @(negedge can_tx);
    send_frame(ref_frame(g), acked);
    check(n_lost == 1, "arbitration lost once");
    check(acked && last_rx == g, "winner's frame received and acknowledged");
    expect_tx(f, 1, ok);
    check(ok, "retry after lost arbitration");
    repeat (5 * BITC) @(posedge clk);
    check(n_done == 13, "retried frame completed");

    // 4. Stuff error: six equal bits in a received frame.
    begin
      bitq_t q;
      int e0, r0;
      q = ref_frame(rand_frame());
      for (int k = 1; k < 7; k++) q[k] = 0;           // SOF + six dominant bits
      e0 = n_err; r0 = n_rx;
      send_frame(q, acked);
      repeat (30 * BITC) @(posedge clk);
      check(n_err == e0 + 1, "stuff error flagged");
      check(n_rx == r0, "bad frame not delivered");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
