// rx_reader: downstream path from the elink into the hub (Rx Reader).
//
// The 2-bit words from the elink transceiver are gathered and aligned to
// 10-bit symbols (elink_deserializer, which holds the sync detector),
// 8b/10b decoded, and parsed: K27.7 starts a packet, twelve data bytes fill a
// hub message (mopshub_pkg::msg_set_byte), and K29.7 right after the twelfth
// byte completes it; the message then goes into the Downstream FIFO. A packet
// is dropped if a symbol has a code or disparity error, a control symbol
// arrives inside it, it has the wrong length, or the FIFO is full; K28.5 is
// idle fill. Counters report good and bad packets.
//
// The paper gives the blocks (Downstream FIFO, 8B10B decoder, Deserializer,
// Sync detector); the framing and the drop rules are this design's choice.
// Interface: msg_valid/msg_ready out (first-word fall-through).
module rx_reader
  import mopshub_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] elink_din,
  output logic       msg_valid,
  input  logic       msg_ready,
  output hub_msg_t   msg,
  output logic       locked,
  output logic [15:0] pkts_ok,
  output logic [15:0] pkts_bad
);

  logic [9:0] sym;
  logic       sym_valid;
  logic [7:0] slips;
  logic       d_valid, d_k, d_cerr, d_derr;
  logic [7:0] d_byte;

  elink_deserializer u_deser (
    .clk, .rst_n, .din(elink_din),
    .chk_valid(d_valid), .chk_err(d_cerr || d_derr),
    .sym, .sym_valid, .locked, .slips
  );

  dec_8b10b u_dec (
    .clk, .rst_n, .en(sym_valid), .din(sym),
    .valid(d_valid), .dout(d_byte), .k(d_k), .code_err(d_cerr), .disp_err(d_derr)
  );

  logic       in_pkt;
  logic [3:0] nbytes;
  hub_msg_t   acc;
  logic       push, f_ready;
  logic [$clog2(FIFO_DEPTH):0] f_level;

  sync_fifo #(.WIDTH(MSG_W), .DEPTH(FIFO_DEPTH)) u_downstream_fifo (
    .clk, .rst_n,
    .wr_valid(push), .wr_ready(f_ready), .wr_data(acc),
    .rd_valid(msg_valid), .rd_ready(msg_ready), .rd_data(msg), .level(f_level)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt <= 1'b0; nbytes <= '0; acc <= '0; push <= 1'b0;
      pkts_ok <= '0; pkts_bad <= '0;
    end else begin
      // push is a one-clock strobe, raised only when the FIFO has room; this
      // is the FIFO's only writer, so the room is still there a clock later.
      if (push) begin
        push    <= 1'b0;
        pkts_ok <= pkts_ok + 1'b1;
      end
      if (d_valid) begin
        if (d_cerr || d_derr) begin
          if (in_pkt) pkts_bad <= pkts_bad + 1'b1;
          in_pkt <= 1'b0;
        end else if (d_k) begin
          if (d_byte == K27_7) begin
            if (in_pkt) pkts_bad <= pkts_bad + 1'b1;
            in_pkt <= 1'b1;
            nbytes <= '0;
          end else if (in_pkt) begin
            in_pkt <= 1'b0;
            if (d_byte == K29_7 && nbytes == 4'(MSG_BYTES) && f_ready) push <= 1'b1;
            else pkts_bad <= pkts_bad + 1'b1;
          end
        end else if (in_pkt) begin
          if (nbytes == 4'(MSG_BYTES)) begin
            in_pkt <= 1'b0;
            pkts_bad <= pkts_bad + 1'b1;
          end else begin
            acc    <= msg_set_byte(acc, 32'(nbytes), d_byte);
            nbytes <= nbytes + 1'b1;
          end
        end
      end
    end
  end

endmodule
