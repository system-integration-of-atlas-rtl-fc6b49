// tb_tx_writer: pushes random messages, records the 2-bit output, rebuilds
// 10-bit symbols at the known five-clock boundary, decodes them with the
// reference tables and checks framing, contents, order, running disparity
// and the packet period (15 symbols = 75 clocks for back-to-back packets).
module tb_tx_writer;
  import mopshub_pkg::*;
  import ref_8b10b_pkg::*;
  logic clk = 0, rst_n = 0;
  logic msg_valid = 0, msg_ready;
  hub_msg_t msg;
  logic [1:0] elink_dout;
  logic [15:0] pkts_sent;
  int checks = 0, failures = 0;

  tx_writer #(.FIFO_DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  localparam int NMSG = 12;
  hub_msg_t sent [$];

  initial begin
    msg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (40) @(posedge clk);
    for (int i = 0; i < NMSG; i++) begin
      @(negedge clk);
      msg_valid = 1;
      msg = hub_msg_t'({$urandom, $urandom, $urandom});
      msg.bus = 5'($urandom % 18);
      do @(posedge clk); while (!msg_ready);
      sent.push_back(msg);
      @(negedge clk); msg_valid = 0;
    end
  end

  // Symbol reassembly: the writer loads a symbol at phase 0, the first
  // 2-bit word appears one clock later; phase 0 is the first clock after reset.
  int cyc = 0;
  logic [9:0] cur;
  int nsym = 0;
  int disp = 0;
  int state = 0, bi = 0, got = 0, last_sop = -1;
  int periods_ok = 0;
  logic [4:0] r_bus; logic [10:0] r_id; logic r_rtr; logic [3:0] r_dlc; logic [63:0] r_data;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    cur = {cur[7:0], elink_dout};
    if (cyc >= 2 && (cyc - 2) % 5 == 4) begin : symbol_done
      logic k; logic [7:0] b; bit ok;
      nsym++;
      disp += 2 * $countones(cur) - 10;
      check(disp == 0 || disp == 2, "running disparity");
      ok = ref_dec(cur, k, b);
      check(ok, "symbol in code");
      if (state == 0) begin
        if (k && b == K27_7) begin
          state = 1; bi = 0;
          if (last_sop >= 0 && got < NMSG && cyc - last_sop == 75) periods_ok++;
          last_sop = cyc;
        end else check(k && b == K28_5, "idle is comma");
      end else if (state == 1) begin
        check(!k, "data byte");
        if (got < NMSG)
          check(b == ref_byte(sent[got].bus, sent[got].frame.id, sent[got].frame.rtr,
                              sent[got].frame.dlc, sent[got].frame.data, bi), "byte value");
        bi++;
        if (bi == 12) state = 2;
      end else begin
        check(k && b == K29_7, "end symbol");
        got++;
        state = 0;
      end
    end
  end

  initial begin
    wait (got == NMSG);
    repeat (20) @(posedge clk);
    check(pkts_sent == 16'(NMSG), "packet counter");
    check(periods_ok >= 3, "back-to-back packet period 75 clocks");
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
