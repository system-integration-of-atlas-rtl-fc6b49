// tb_bus_monitor: eight ADC models; two scans with random back-pressure.
// Every channel must arrive once per scan, in order, with the bus number,
// quantity and value the models predict.
module tb_bus_monitor;
  import mopshub_pkg::*;
  localparam int NA = 8, NC = 4, DIV = 2;
  logic clk = 0, rst_n = 0;
  logic start = 0, busy, scan_done, msg_valid, msg_ready = 0;
  hub_msg_t msg;
  logic spi_sclk, spi_mosi;
  logic [NA-1:0] spi_cs_n, spi_miso;
  logic [15:0] offset = 16'h0000;
  int checks = 0, failures = 0;

  bus_monitor #(.N_ADC(NA), .N_CH(NC), .CLK_DIV(DIV)) dut (.*);
  for (genvar i = 0; i < NA; i++) begin : g_adc
    adc_model #(.ADC_IDX(i)) u_adc (.sclk(spi_sclk), .mosi(spi_mosi), .cs_n(spi_cs_n[i]),
                                    .offset, .miso(spi_miso[i]));
  end
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  int k = 0, dones = 0;
  always @(negedge clk) msg_ready = ($urandom % 3) != 0;
  always @(posedge clk) if (rst_n) begin
    if (scan_done) dones++;
    if (msg_valid && msg_ready) begin
      int a, c;
      a = (k % (NA * NC)) / NC; c = k % NC;
      check(msg.bus == ADDR_BUS_MON && msg.frame.dlc == 4'd4, "monitor message header");
      check(msg.frame.data[63:56] == 8'((k % (NA * NC)) / 2), "bus number");
      check(msg.frame.data[55:48] == 8'(k % 2), "quantity");
      check(msg.frame.data[47:32] == ({4'(a), 4'(c), 8'h5A} ^ offset), "value");
      k++;
    end
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 2; s++) begin
      offset = 16'($urandom);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      check(busy, "busy after start");
      wait (dones == s + 1);
      check(k == (s + 1) * NA * NC, "all channels in one scan");
      @(negedge clk);
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
