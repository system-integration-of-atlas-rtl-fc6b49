// can_node_interface: the hub's side of its N_BUS CAN buses.
//
// One can_controller per bus. Downstream, a message from the elink carries
// its bus number and goes to that bus's controller (the selector drawn as
// "MUX" in the paper's figure); dn_ready follows the addressed controller,
// so a message waits while its controller is still sending. Upstream, each
// frame a controller receives is held in a one-frame register for its bus
// and a round-robin arbiter (drawn as "DEMUX") passes the held frames, tagged
// with their bus number, towards the Upstream FIFO. A frame that arrives
// while its bus's register is still full is dropped and counted.
// Event outputs (one bit per bus, one-clock pulses) expose arbitration losses,
// error flags, finished and failed transmissions.
// The per-bus register and the arbitration scheme are this design's choice.
module can_node_interface
  import mopshub_pkg::*;
#(
  parameter int unsigned NB        = N_BUS,
  parameter int unsigned BRP       = 100,
  parameter int unsigned NTQ       = 16,
  parameter int unsigned SAMPLE_TQ = 11,
  parameter int unsigned MAX_TRIES = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NB-1:0] can_rx,
  output logic [NB-1:0] can_tx,
  input  logic          dn_valid,
  output logic          dn_ready,
  input  hub_msg_t      dn_msg,
  output logic          up_valid,
  input  logic          up_ready,
  output hub_msg_t      up_msg,
  output logic [NB-1:0] ev_tx_done,
  output logic [NB-1:0] ev_tx_fail,
  output logic [NB-1:0] ev_arb_lost,
  output logic [NB-1:0] ev_err,
  output logic [15:0]   rx_overflows
);

  logic [NB-1:0]    tx_valid, tx_ready, rx_valid, hold_v, hold_take;
  can_frame_t       rx_frame [NB];
  hub_msg_t [NB-1:0] hold_msg;

  for (genvar b = 0; b < NB; b++) begin : g_bus
    can_controller #(.BRP(BRP), .NTQ(NTQ), .SAMPLE_TQ(SAMPLE_TQ), .MAX_TRIES(MAX_TRIES)) u_can (
      .clk, .rst_n, .can_rx(can_rx[b]), .can_tx(can_tx[b]),
      .tx_valid(tx_valid[b]), .tx_ready(tx_ready[b]), .tx_frame(dn_msg.frame),
      .tx_done(ev_tx_done[b]), .tx_fail(ev_tx_fail[b]),
      .rx_valid(rx_valid[b]), .rx_frame(rx_frame[b]),
      .arb_lost(ev_arb_lost[b]), .err_flag(ev_err[b])
    );
    assign tx_valid[b] = dn_valid && (32'(dn_msg.bus) == b);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        hold_v[b] <= 1'b0; hold_msg[b] <= '0;
      end else begin
        if (hold_take[b]) hold_v[b] <= 1'b0;
        if (rx_valid[b] && (!hold_v[b] || hold_take[b])) begin
          hold_v[b] <= 1'b1;
          hold_msg[b].bus   <= 5'(b);
          hold_msg[b].frame <= rx_frame[b];
        end
      end
    end
  end

  assign dn_ready = (32'(dn_msg.bus) < NB) ? tx_ready[dn_msg.bus[$clog2(NB)-1:0]] : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rx_overflows <= '0;
    else if (|(rx_valid & hold_v & ~hold_take)) rx_overflows <= rx_overflows + 1'b1;
  end

  msg_arbiter #(.N(NB)) u_arb (
    .clk, .rst_n, .in_valid(hold_v), .in_ready(hold_take), .in_msg(hold_msg),
    .out_valid(up_valid), .out_ready(up_ready), .out_msg(up_msg)
  );

endmodule
