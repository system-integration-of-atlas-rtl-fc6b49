// bus_monitor: reads the supply voltage and current of every CAN bus from
// external SPI ADCs and puts each value into the upstream data stream.
//
// There are N_ADC ADCs (CIC Data 0..7 in the paper's figure), each with
// N_CH channels; channel k = adc*N_CH + ch carries the voltage (k even) or
// the current (k odd) of CAN bus k/2, so 8 x 4 channels cover 16 buses.
// A pulse on start runs one scan over all channels. Each conversion is one
// 24-bit SPI transfer: the channel number goes out in the first 8 bits and
// the 16-bit result comes back in the last 16. Each result becomes one
// message from hub address ADDR_BUS_MON (the ID encoder of the figure) with
// data bytes {bus, quantity (0 = V, 1 = I), value[15:8], value[7:0]}.
// The scan waits while the upstream path is not ready, so no value is lost.
// The channel assignment and the ADC frame format are this design's choice.
module bus_monitor
  import mopshub_pkg::*;
#(
  parameter int unsigned N_ADC   = 8,
  parameter int unsigned N_CH    = 4,
  parameter int unsigned CLK_DIV = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             busy,
  output logic             scan_done,
  output logic             msg_valid,
  input  logic             msg_ready,
  output hub_msg_t         msg,
  output logic             spi_sclk,
  output logic             spi_mosi,
  output logic [N_ADC-1:0] spi_cs_n,
  input  logic [N_ADC-1:0] spi_miso
);

  typedef enum logic [1:0] {S_IDLE, S_CONV, S_WAIT, S_SEND} mon_state_e;
  mon_state_e st;

  localparam int unsigned AW = (N_ADC > 1) ? $clog2(N_ADC) : 1;
  localparam int unsigned CW = (N_CH > 1) ? $clog2(N_CH) : 1;

  logic [AW-1:0] adc;
  logic [CW-1:0] ch;
  logic          spi_start, spi_busy, spi_done;
  logic [23:0]   spi_rx;
  logic [15:0]   value;
  logic [7:0]    chan;     // global channel number adc*N_CH + ch

  spi_master #(.N_CS(N_ADC), .WIDTH(24), .CLK_DIV(CLK_DIV)) u_spi (
    .clk, .rst_n, .start(spi_start), .cs_sel(($clog2(N_ADC))'(adc)),
    .tx_data({8'(ch), 16'h0000}),
    .busy(spi_busy), .done(spi_done), .rx_data(spi_rx),
    .sclk(spi_sclk), .mosi(spi_mosi), .cs_n(spi_cs_n), .miso(spi_miso)
  );

  assign busy = (st != S_IDLE);
  assign chan = 8'(32'(adc) * N_CH + 32'(ch));

  always_comb begin
    msg = '0;
    msg.bus = ADDR_BUS_MON;
    msg.frame.dlc = 4'd4;
    msg.frame.data[63:32] = {1'b0, chan[7:1], 7'b0, chan[0], value};
  end
  assign msg_valid = (st == S_SEND);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; adc <= '0; ch <= '0; spi_start <= 1'b0; value <= '0; scan_done <= 1'b0;
    end else begin
      spi_start <= 1'b0;
      scan_done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin adc <= '0; ch <= '0; st <= S_CONV; end
        S_CONV: if (!spi_busy) begin spi_start <= 1'b1; st <= S_WAIT; end
        S_WAIT: if (spi_done) begin value <= spi_rx[15:0]; st <= S_SEND; end
        S_SEND: if (msg_ready) begin
          if (ch == CW'(N_CH - 1)) begin
            ch <= '0;
            if (adc == AW'(N_ADC - 1)) begin st <= S_IDLE; scan_done <= 1'b1; end
            else begin adc <= adc + 1'b1; st <= S_CONV; end
          end else begin
            ch <= ch + 1'b1; st <= S_CONV;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
