// tb_rx_reader: drives a reference-encoded elink stream (random bit offset,
// comma idle fill) carrying good packets, a packet with a corrupted symbol
// and a packet that is one byte short; checks that exactly the good messages
// leave the Downstream FIFO, in order and intact, and the packet counters.
module tb_rx_reader;
  import mopshub_pkg::*;
  import ref_8b10b_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [1:0] elink_din = 0;
  logic msg_valid, msg_ready = 0, locked;
  hub_msg_t msg;
  logic [15:0] pkts_ok, pkts_bad;
  int checks = 0, failures = 0;

  rx_reader #(.FIFO_DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  bit bits [$];
  logic rd = 0;
  hub_msg_t expq [$];

  task automatic add_sym(input logic kk, input logic [7:0] b, input bit corrupt = 0);
    logic [9:0] s;
    // A corrupted symbol is D0.0 in the form of the wrong running disparity;
    // the stream then continues from the disparity that symbol leaves.
    if (corrupt) begin rd = ~rd; b = 8'h00; end
    s = ref_enc(kk, b, rd);
    for (int i = 9; i >= 0; i--) bits.push_back(s[i]);
  endtask

  task automatic add_pkt(input hub_msg_t m, input int nbytes, input int bad_at);
    add_sym(1, K27_7);
    for (int i = 0; i < nbytes; i++)
      add_sym(0, ref_byte(m.bus, m.frame.id, m.frame.rtr, m.frame.dlc, m.frame.data, i), i == bad_at);
    add_sym(1, K29_7);
    add_sym(1, K28_5);
  endtask

  always @(negedge clk) begin
    while (bits.size() < 12) add_sym(1, K28_5);
    elink_din[1] = bits.pop_front();
    elink_din[0] = bits.pop_front();
  end

  // Consumer with random back-pressure.
  int got = 0;
  always @(negedge clk) msg_ready = ($urandom % 4) != 0;
  always @(posedge clk) if (rst_n && msg_valid && msg_ready) begin
    check(expq.size() != 0 && msg == expq[0], "message content and order");
    if (expq.size() != 0) void'(expq.pop_front());
    got++;
  end

  localparam int NGOOD = 10;
  initial begin
    int off;
    hub_msg_t m;
    off = $urandom % 10;
    for (int i = 0; i < off; i++) bits.push_back(1'($urandom));
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (100) @(posedge clk);
    check(locked, "locked on idle commas");
    @(negedge clk);
    for (int n = 0; n < NGOOD + 2; n++) begin
      m = hub_msg_t'({$urandom, $urandom, $urandom});
      if (n == 3)      add_pkt(m, 12, 6);     // corrupted symbol: dropped
      else if (n == 7) add_pkt(m, 11, -1);    // one byte short: dropped
      else begin add_pkt(m, 12, -1); expq.push_back(m); end
    end
    repeat (5 * 15 * (NGOOD + 2) + 200) @(posedge clk);
    check(got == NGOOD, "all good messages delivered");
    check(pkts_ok == 16'(NGOOD), "good packet counter");
    check(pkts_bad == 16'd2, "bad packet counter");
    check(locked, "still locked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
