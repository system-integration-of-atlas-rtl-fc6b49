// mops_model: stand-in for a MOPS chip on a CAN bus, for testbenches only.
// It is a CAN node that answers CANopen-style SDO requests: a frame with
// identifier 0x600 + NODE_ID, or the broadcast identifier 0x000 (all nodes
// answer, which makes their replies arbitrate), is answered with identifier
// 0x580 + NODE_ID, DLC 8 and data = request data XOR {8{NODE_ID}}.
module mops_model
  import mopshub_pkg::*;
#(
  parameter int NODE_ID = 1,
  parameter int BRP = 2, NTQ = 8, SAMPLE_TQ = 5
) (
  input  logic clk,
  input  logic rst_n,
  input  logic can_rx,
  output logic can_tx,
  output int   n_answered
);
  logic tx_valid, tx_ready, tx_done, tx_fail, rx_valid, arb_lost, err_flag;
  can_frame_t tx_frame, rx_frame;

  can_controller #(.BRP(BRP), .NTQ(NTQ), .SAMPLE_TQ(SAMPLE_TQ), .MAX_TRIES(8)) u_node (
    .clk, .rst_n, .can_rx, .can_tx, .tx_valid, .tx_ready, .tx_frame,
    .tx_done, .tx_fail, .rx_valid, .rx_frame, .arb_lost, .err_flag);

  initial begin tx_valid = 0; tx_frame = '0; n_answered = 0; end
  always @(posedge clk) begin
    if (tx_valid && tx_ready) tx_valid <= 0;
    if (tx_done) n_answered <= n_answered + 1;
    if (rst_n && rx_valid && (rx_frame.id == 11'(12'h600 + NODE_ID) || rx_frame.id == 11'h000)) begin
      tx_frame.id   <= 11'(12'h580 + NODE_ID);
      tx_frame.rtr  <= 1'b0;
      tx_frame.dlc  <= 4'd8;
      tx_frame.data <= rx_frame.data ^ {8{8'(NODE_ID)}};
      tx_valid      <= 1'b1;
    end
  end
endmodule
