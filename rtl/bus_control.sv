// bus_control: switches the CAN bus supply (VCAN) of each bus on or off.
//
// Every bus has an external SPI power-switch device (one chip select each;
// the DEMUX of the figure). A device answers every 16-bit transfer with its
// present state in bit 0 and, when bit 15 of the word it received is set,
// takes bit 0 of that word as its new state when chip select rises.
//
// The switch state lives in the devices, not in the FPGA: after any reset,
// including a watchdog recovery or a power cycle of the FPGA, this block
// first reads all NB devices back (init_done then rises) and never writes
// them on its own. So a reset leaves VCAN as it was, which is what the paper
// asks of Bus Control. The read-back copy (vcan_en) is held in a
// triple-redundant register.
//
// Commands (cmd_op from mopshub_pkg): OP_VCAN_ON / OP_VCAN_OFF write the
// device of cmd_bus and read it back; OP_VCAN_READ reads it. Each command
// ends with a status message (the ID encoder of the figure) from the hub
// address ADDR_BUS_CTRL: data bytes = {op, bus, vcan_en[15:8], vcan_en[7:0],
// ok}, ok = 1 when the read-back state is the one asked for.
// The device protocol, command codes and status format are this design's.
module bus_control
  import mopshub_pkg::*;
#(
  parameter int unsigned NB   = 16,
  parameter int unsigned CLK_DIV = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic [7:0]        cmd_op,
  input  logic [3:0]        cmd_bus,
  output logic              stat_valid,
  input  logic              stat_ready,
  output hub_msg_t          stat_msg,
  output logic [NB-1:0]  vcan_en,
  output logic              init_done,
  output logic              tmr_mismatch,
  input  logic [2:0][NB-1:0] upset,
  output logic              spi_sclk,
  output logic              spi_mosi,
  output logic [NB-1:0]  spi_cs_n,
  input  logic [NB-1:0]  spi_miso
);

  typedef enum logic [2:0] {S_INIT, S_INIT_WAIT, S_IDLE, S_WRITE, S_READ, S_READ_WAIT, S_REPORT} bc_state_e;
  bc_state_e st;

  logic [3:0]  bus;
  logic [7:0]  op;
  logic        spi_start, spi_busy, spi_done;
  logic [15:0] spi_tx, spi_rx;
  logic [$clog2(NB)-1:0] spi_sel;
  logic        sh_en;
  logic [NB-1:0] sh_d;
  logic        ok;

  spi_master #(.N_CS(NB), .WIDTH(16), .CLK_DIV(CLK_DIV)) u_spi (
    .clk, .rst_n, .start(spi_start), .cs_sel(spi_sel), .tx_data(spi_tx),
    .busy(spi_busy), .done(spi_done), .rx_data(spi_rx),
    .sclk(spi_sclk), .mosi(spi_mosi), .cs_n(spi_cs_n), .miso(spi_miso)
  );

  tmr_reg #(.WIDTH(NB)) u_shadow (
    .clk, .rst_n, .en(sh_en), .d(sh_d), .upset, .q(vcan_en), .mismatch(tmr_mismatch)
  );

  assign cmd_ready = (st == S_IDLE);
  assign spi_sel   = ($bits(spi_sel))'(bus);

  always_comb begin
    sh_en = spi_done && (st == S_INIT_WAIT || st == S_READ_WAIT);
    sh_d  = vcan_en;
    sh_d[bus] = spi_rx[0];
  end

  always_comb begin
    stat_msg = '0;
    stat_msg.bus = ADDR_BUS_CTRL;
    stat_msg.frame.dlc = 4'd5;
    stat_msg.frame.data[63:24] = {op, 4'b0000, bus, 16'(vcan_en), 7'b0, ok};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_INIT; bus <= '0; op <= OP_VCAN_READ; spi_start <= 1'b0; spi_tx <= '0;
      init_done <= 1'b0; stat_valid <= 1'b0; ok <= 1'b0;
    end else begin
      spi_start <= 1'b0;
      case (st)
        // Read every switch back after reset; nothing is written.
        S_INIT: if (!spi_busy && !spi_start) begin
          spi_tx <= 16'h0000; spi_start <= 1'b1; st <= S_INIT_WAIT;
        end
        S_INIT_WAIT: if (spi_done) begin
          if (bus == 4'(NB - 1)) begin
            bus <= '0; init_done <= 1'b1; st <= S_IDLE;
          end else begin
            bus <= bus + 1'b1; st <= S_INIT;
          end
        end
        S_IDLE: if (cmd_valid) begin
          bus <= cmd_bus; op <= cmd_op;
          if (cmd_op == OP_VCAN_ON || cmd_op == OP_VCAN_OFF) begin
            spi_tx <= {1'b1, 14'b0, cmd_op == OP_VCAN_ON}; spi_start <= 1'b1; st <= S_WRITE;
          end else begin
            st <= S_READ;
          end
        end
        S_WRITE: if (spi_done) st <= S_READ;
        S_READ: if (!spi_busy && !spi_start) begin
          spi_tx <= 16'h0000; spi_start <= 1'b1; st <= S_READ_WAIT;
        end
        S_READ_WAIT: if (spi_done) begin
          ok <= (op == OP_VCAN_ON)  ? spi_rx[0] :
                (op == OP_VCAN_OFF) ? !spi_rx[0] : 1'b1;
          stat_valid <= 1'b1; st <= S_REPORT;
        end
        S_REPORT: if (stat_ready) begin
          stat_valid <= 1'b0; st <= S_IDLE;
        end
        default: st <= S_INIT;
      endcase
    end
  end

endmodule
