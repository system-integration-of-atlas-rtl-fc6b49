// tx_writer: upstream path from the hub to the elink (Tx Writer).
//
// Messages from the CAN buses and from Bus Monitor / Bus Control wait in the
// Upstream FIFO. A byte sequencer sends each message as one packet:
// K27.7 (start), the 12 message bytes of mopshub_pkg::msg_byte, K29.7 (end),
// and at least one K28.5 comma between packets; with nothing to send it sends
// K28.5 continuously, which the far end uses for symbol alignment. Each byte
// is 8b/10b encoded and the 10-bit symbol is shifted out two bits per clock
// (elink_dout[1] first), so one symbol takes five clocks.
//
// The FIFO, the 8b/10b encoder and the 2-bit output port are the paper's;
// the packet framing and the one-clock-per-2-bit-word rate are this design's.
// Interface: msg_valid/msg_ready handshake in; elink_dout to the elink
// transceiver (its serializer primitives are outside this RTL).
module tx_writer
  import mopshub_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     msg_valid,
  output logic     msg_ready,
  input  hub_msg_t msg,
  output logic [1:0] elink_dout,
  output logic [15:0] pkts_sent
);

  logic     f_valid, f_ready;
  hub_msg_t f_msg;
  logic [$clog2(FIFO_DEPTH):0] f_level;

  sync_fifo #(.WIDTH(MSG_W), .DEPTH(FIFO_DEPTH)) u_upstream_fifo (
    .clk, .rst_n,
    .wr_valid(msg_valid), .wr_ready(msg_ready), .wr_data(msg),
    .rd_valid(f_valid), .rd_ready(f_ready), .rd_data(f_msg), .level(f_level)
  );

  // Byte sequencer. idx 0: start symbol, 1..12: bytes, 13: end symbol.
  typedef enum logic [1:0] {S_IDLE, S_PKT} seq_e;
  seq_e        st;
  logic [3:0]  idx;
  logic [2:0]  phase;        // position within the 5-clock symbol period
  logic        enc_en, enc_k;
  logic [7:0]  enc_d;
  logic [9:0]  enc_q;
  logic [9:0]  sh;

  // Choose the next byte; it is encoded at phase 4 and shifted out from phase 0.
  always_comb begin
    enc_en = (phase == 3'd4);
    enc_k  = 1'b1;
    enc_d  = K28_5;
    f_ready = 1'b0;
    if (st == S_PKT) begin
      if (idx == 4'd0) begin
        enc_d = K27_7;
      end else if (idx == 4'd13) begin
        enc_d = K29_7;
        f_ready = enc_en;
      end else begin
        enc_k = 1'b0;
        enc_d = msg_byte(f_msg, 32'(idx) - 1);
      end
    end
  end

  enc_8b10b u_enc (.clk, .rst_n, .en(enc_en), .din(enc_d), .k(enc_k), .dout(enc_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; idx <= '0; phase <= '0; sh <= '0; elink_dout <= '0; pkts_sent <= '0;
    end else begin
      phase <= (phase == 3'd4) ? 3'd0 : phase + 3'd1;
      // Serializer: 2 bits per clock, MSB (bit a) first.
      if (phase == 3'd0) begin
        elink_dout <= enc_q[9:8];
        sh         <= {enc_q[7:0], 2'b00};
      end else begin
        elink_dout <= sh[9:8];
        sh         <= {sh[7:0], 2'b00};
      end
      if (enc_en) begin
        case (st)
          S_IDLE: if (f_valid) begin st <= S_PKT; idx <= '0; end  // a comma was just sent
          S_PKT: begin
            if (idx == 4'd13) begin
              st <= S_IDLE;
              pkts_sent <= pkts_sent + 1'b1;
            end
            idx <= idx + 1'b1;
          end
          default: st <= S_IDLE;
        endcase
      end
    end
  end

endmodule
