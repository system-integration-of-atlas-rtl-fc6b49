// vcan_switch_model: behavioural model of one external VCAN power switch
// with an SPI port, as Bus Control expects it: every 16-bit transfer returns
// the present state in bit 0 (MSB first); if bit 15 of the received word is
// set, bit 0 becomes the new state when cs_n rises. The state is kept
// independently of the FPGA reset.
module vcan_switch_model #(
  parameter bit INIT = 1'b0
) (
  input  logic sclk,
  input  logic mosi,
  input  logic cs_n,
  output logic miso,
  output logic state
);
  logic [15:0] in_sh, out_sh;
  initial begin state = INIT; in_sh = '0; out_sh = '0; end
  assign miso = out_sh[15];
  always @(negedge cs_n) out_sh = {15'b0, state};
  always @(posedge sclk) if (!cs_n) in_sh = {in_sh[14:0], mosi};
  always @(negedge sclk) if (!cs_n) out_sh = {out_sh[14:0], 1'b0};
  always @(posedge cs_n) if (in_sh[15]) state = in_sh[0];
endmodule
