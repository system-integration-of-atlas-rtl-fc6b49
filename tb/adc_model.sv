// adc_model: behavioural model of one external monitoring ADC with an SPI
// port: a 24-bit transfer carries the channel number in its first 8 bits
// (MSB first) and returns value(channel) in its last 16 bits. The value is
// {ADC_IDX[3:0], channel[3:0], 8'h5A} ^ offset, so a testbench can predict it.
module adc_model #(
  parameter int ADC_IDX = 0
) (
  input  logic        sclk,
  input  logic        mosi,
  input  logic        cs_n,
  input  logic [15:0] offset,
  output logic        miso
);
  logic [7:0]  chan;
  logic [23:0] out_sh;
  int          n;
  initial begin chan = 0; out_sh = 0; n = 0; end
  assign miso = out_sh[23];
  always @(negedge cs_n) begin n = 0; out_sh = '0; end
  always @(posedge sclk) if (!cs_n) begin
    if (n < 8) chan = {chan[6:0], mosi};
    n++;
  end
  always @(negedge sclk) if (!cs_n) begin
    if (n == 8) out_sh = {{4'(ADC_IDX), chan[3:0], 8'h5A} ^ offset, 8'b0};
    else        out_sh = {out_sh[22:0], 1'b0};
  end
endmodule
