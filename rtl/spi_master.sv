// spi_master: SPI master, mode 0 (clock idles low, data sampled on the rising
// edge), MSB first, with one chip select and one MISO line per device.
//
// Bus Control and Bus Monitor each use one to reach their external devices;
// choosing the device by cs_sel is the DEMUX drawn in front of both blocks.
// A transfer shifts WIDTH bits out on mosi and in from the selected device's
// miso at the same time. SCLK has a period of 2*CLK_DIV clocks (10 MHz from
// 200 MHz by default). The paper names the SPI master but not its mode,
// width or rate; those are this design's choices.
//
// Interface: assert start for one clock with cs_sel and tx_data while busy is
// low; done pulses with rx_data valid when cs_n goes high again. A transfer
// takes (2*WIDTH + 2) * CLK_DIV clocks.
module spi_master #(
  parameter int unsigned N_CS    = 16,
  parameter int unsigned WIDTH   = 16,
  parameter int unsigned CLK_DIV = 10
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [$clog2(N_CS)-1:0] cs_sel,
  input  logic [WIDTH-1:0]        tx_data,
  output logic                    busy,
  output logic                    done,
  output logic [WIDTH-1:0]        rx_data,
  output logic                    sclk,
  output logic                    mosi,
  output logic [N_CS-1:0]         cs_n,
  input  logic [N_CS-1:0]         miso
);

  typedef enum logic [1:0] {S_IDLE, S_LEAD, S_SHIFT, S_TRAIL} spi_state_e;
  spi_state_e st;
  logic [$clog2(CLK_DIV)-1:0]  div;
  logic [$clog2(WIDTH+1)-1:0]  nbit;
  logic [WIDTH-1:0]            sh;
  logic [$clog2(N_CS)-1:0]     sel;
  logic                        half;   // end of a half SCLK period

  assign half = (div == ($bits(div))'(CLK_DIV - 1));
  assign busy = (st != S_IDLE);
  assign mosi = sh[WIDTH-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; div <= '0; nbit <= '0; sh <= '0; sel <= '0;
      sclk <= 1'b0; cs_n <= '1; done <= 1'b0; rx_data <= '0;
    end else begin
      done <= 1'b0;
      div  <= (st == S_IDLE || half) ? '0 : div + 1'b1;
      case (st)
        S_IDLE: if (start) begin
          st <= S_LEAD; sh <= tx_data; sel <= cs_sel; nbit <= '0;
          cs_n <= ~(N_CS'(1) << cs_sel);
        end
        S_LEAD: if (half) st <= S_SHIFT;           // set-up time after CS
        S_SHIFT: if (half) begin
          if (!sclk) begin
            sclk <= 1'b1;                          // rising edge: sample
            rx_data <= {rx_data[WIDTH-2:0], miso[sel]};
          end else begin
            sclk <= 1'b0;                          // falling edge: next bit
            sh   <= {sh[WIDTH-2:0], 1'b0};
            if (nbit == ($bits(nbit))'(WIDTH - 1)) st <= S_TRAIL;
            nbit <= nbit + 1'b1;
          end
        end
        S_TRAIL: if (half) begin
          st <= S_IDLE; cs_n <= '1; done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
