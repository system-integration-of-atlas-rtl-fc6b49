// mopshub_top: firmware of the MOPS-HUB FPGA, the hub between up to 16 CAN
// buses of MOPS monitoring chips and one elink towards the DCS back end.
//
// Data paths:
//  * downstream: elink_din -> Rx Reader (deserializer with sync detector,
//    8b/10b decoder, packet parser, Downstream FIFO) -> top FSM, which sends
//    each message to its CAN bus (CAN Node Interface), to Bus Control or to
//    Bus Monitor;
//  * upstream: frames received on the CAN buses, Bus Control status and Bus
//    Monitor values -> round-robin merge -> Tx Writer (Upstream FIFO, packet
//    framing, 8b/10b encoder, 2-bit serializer) -> elink_dout.
// Control: the FSM brings the hub up (elink lock, VCAN read-back) and holds
// the CAN controllers in reset until then. The watchdog resets everything
// but itself when the FSM stops sending its heartbeat for WD_TIMEOUT clocks.
// Bus Control reads the VCAN switches back after every reset, so a reset
// never changes the CAN bus supplies. The FSM state, the VCAN shadow and the
// watchdog's state are triplicated registers; their upset inputs are ports
// for fault injection, and tmr_error is high while any of them disagrees.
//
// Not in this RTL: the elink transceiver (vendor SERDES and LVDS buffers;
// elink_din/elink_dout are its 2-bit parallel side, one word per clock), the
// CAN transceivers (can_rx/can_tx are logic levels, 0 = dominant), the SPI
// devices on the board. All logic runs on one clock, 200 MHz on the board.
//
// Resets: core_rst_n (rst_n and not the watchdog's registered reset pulse)
// resets every block but the watchdog; can_rst_n additionally holds the CAN
// controllers until sys_run. Both are used as asynchronous resets; lint's
// "flopped as both synchronous and async" note on them comes only from the
// handshake assertions, which use the reset in their disable condition.
// Status outputs (counters, event pulses, ev_mon_scan, msgs_dropped) are
// for the board's monitoring and for tests; nothing in the hub needs them.
module mopshub_top
  import mopshub_pkg::*;
#(
  parameter int unsigned BRP        = 100,          // 125 kbit/s CAN at 200 MHz
  parameter int unsigned NTQ        = 16,
  parameter int unsigned SAMPLE_TQ  = 11,
  parameter int unsigned MAX_TRIES  = 4,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned SPI_DIV    = 10,           // 10 MHz SCLK
  parameter int unsigned N_ADC      = 8,
  parameter int unsigned N_CH       = 4,
  parameter int unsigned WD_TIMEOUT = 300_000_000,  // 1.5 s
  parameter int unsigned WD_RST_LEN = 16,
  parameter int unsigned MON_PERIOD = 200_000_000   // 1 s
) (
  input  logic              clk,
  input  logic              rst_n,
  // elink (parallel side of the transceiver)
  input  logic [1:0]        elink_din,
  output logic [1:0]        elink_dout,
  // CAN buses
  input  logic [N_BUS-1:0]  can_rx,
  output logic [N_BUS-1:0]  can_tx,
  // Bus Control SPI (one switch device per bus)
  output logic              bc_sclk,
  output logic              bc_mosi,
  output logic [N_BUS-1:0]  bc_cs_n,
  input  logic [N_BUS-1:0]  bc_miso,
  // Bus Monitor SPI (N_ADC ADCs)
  output logic              bm_sclk,
  output logic              bm_mosi,
  output logic [N_ADC-1:0]  bm_cs_n,
  input  logic [N_ADC-1:0]  bm_miso,
  // status
  output logic [N_BUS-1:0]  vcan_en,
  output logic              link_locked,
  output logic              sys_run,
  output logic [7:0]        wd_count,
  output logic              tmr_error,
  output logic [15:0]       pkts_rx_ok,
  output logic [15:0]       pkts_rx_bad,
  output logic [15:0]       pkts_tx,
  output logic [15:0]       can_rx_overflows,
  output logic [N_BUS-1:0]  ev_can_tx_done,
  output logic [N_BUS-1:0]  ev_can_tx_fail,
  output logic [N_BUS-1:0]  ev_can_arb_lost,
  output logic [N_BUS-1:0]  ev_can_err,
  output logic              ev_mon_scan,
  output logic [15:0]       msgs_dropped,
  // fault injection into the triplicated registers (tie to zero)
  input  logic [2:0][2:0]       upset_fsm,
  input  logic [2:0][N_BUS-1:0] upset_vcan,
  input  logic [2:0][63:0]      upset_wd
);

  // ---------------------------------------------------------------- resets
  logic wd_rst, wd_mm, core_rst_n, can_rst_n, kick;
  assign core_rst_n = rst_n && !wd_rst;
  assign can_rst_n  = core_rst_n && sys_run;

  watchdog #(.TIMEOUT(WD_TIMEOUT), .RST_LEN(WD_RST_LEN)) u_wd (
    .clk, .rst_n, .kick, .wd_rst, .wd_count, .tmr_mismatch(wd_mm), .upset(upset_wd)
  );

  // ------------------------------------------------------------ downstream
  logic     dn_valid, dn_ready;
  hub_msg_t dn_msg;

  rx_reader #(.FIFO_DEPTH(FIFO_DEPTH)) u_rx (
    .clk, .rst_n(core_rst_n), .elink_din,
    .msg_valid(dn_valid), .msg_ready(dn_ready), .msg(dn_msg),
    .locked(link_locked), .pkts_ok(pkts_rx_ok), .pkts_bad(pkts_rx_bad)
  );

  logic       can_valid, can_ready, bc_cmd_valid, bc_cmd_ready, bc_init_done;
  hub_msg_t   can_msg;
  logic [7:0] bc_cmd_op;
  logic [3:0] bc_cmd_bus;
  logic       mon_start, mon_busy;
  logic       fsm_mm, vcan_mm;

  hub_fsm #(.MON_PERIOD(MON_PERIOD)) u_fsm (
    .clk, .rst_n(core_rst_n), .link_locked, .bc_init_done,
    .dn_valid, .dn_ready, .dn_msg,
    .can_valid, .can_ready, .can_msg,
    .bc_cmd_valid, .bc_cmd_ready, .bc_cmd_op, .bc_cmd_bus,
    .mon_start, .mon_busy, .sys_run, .kick, .dropped(msgs_dropped),
    .tmr_mismatch(fsm_mm), .upset(upset_fsm)
  );

  // -------------------------------------------------------------- CAN side
  logic     can_up_valid, can_up_ready;
  hub_msg_t can_up_msg;

  can_node_interface #(.NB(N_BUS), .BRP(BRP), .NTQ(NTQ), .SAMPLE_TQ(SAMPLE_TQ),
                       .MAX_TRIES(MAX_TRIES)) u_can (
    .clk, .rst_n(can_rst_n), .can_rx, .can_tx,
    .dn_valid(can_valid), .dn_ready(can_ready), .dn_msg(can_msg),
    .up_valid(can_up_valid), .up_ready(can_up_ready), .up_msg(can_up_msg),
    .ev_tx_done(ev_can_tx_done), .ev_tx_fail(ev_can_tx_fail),
    .ev_arb_lost(ev_can_arb_lost), .ev_err(ev_can_err), .rx_overflows(can_rx_overflows)
  );

  // ------------------------------------------------------ Bus Control / Monitor
  logic     bc_stat_valid, bc_stat_ready, mon_valid, mon_ready;
  hub_msg_t bc_stat_msg, mon_msg;

  bus_control #(.NB(N_BUS), .CLK_DIV(SPI_DIV)) u_bc (
    .clk, .rst_n(core_rst_n),
    .cmd_valid(bc_cmd_valid), .cmd_ready(bc_cmd_ready), .cmd_op(bc_cmd_op), .cmd_bus(bc_cmd_bus),
    .stat_valid(bc_stat_valid), .stat_ready(bc_stat_ready), .stat_msg(bc_stat_msg),
    .vcan_en, .init_done(bc_init_done), .tmr_mismatch(vcan_mm), .upset(upset_vcan),
    .spi_sclk(bc_sclk), .spi_mosi(bc_mosi), .spi_cs_n(bc_cs_n), .spi_miso(bc_miso)
  );

  bus_monitor #(.N_ADC(N_ADC), .N_CH(N_CH), .CLK_DIV(SPI_DIV)) u_bm (
    .clk, .rst_n(core_rst_n), .start(mon_start), .busy(mon_busy), .scan_done(ev_mon_scan),
    .msg_valid(mon_valid), .msg_ready(mon_ready), .msg(mon_msg),
    .spi_sclk(bm_sclk), .spi_mosi(bm_mosi), .spi_cs_n(bm_cs_n), .spi_miso(bm_miso)
  );

  assign tmr_error = fsm_mm || vcan_mm || wd_mm;

  // -------------------------------------------------------------- upstream
  logic     up_valid, up_ready;
  hub_msg_t up_msg;

  msg_arbiter #(.N(3)) u_up_arb (
    .clk, .rst_n(core_rst_n),
    .in_valid({mon_valid, bc_stat_valid, can_up_valid}),
    .in_ready({mon_ready, bc_stat_ready, can_up_ready}),
    .in_msg({mon_msg, bc_stat_msg, can_up_msg}),
    .out_valid(up_valid), .out_ready(up_ready), .out_msg(up_msg)
  );

  tx_writer #(.FIFO_DEPTH(FIFO_DEPTH)) u_tx (
    .clk, .rst_n(core_rst_n),
    .msg_valid(up_valid), .msg_ready(up_ready), .msg(up_msg),
    .elink_dout, .pkts_sent(pkts_tx)
  );

endmodule
