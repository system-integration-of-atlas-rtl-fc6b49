// can_controller: CAN 2.0A (11-bit identifier) protocol controller for one bus.
//
// The hub has one of these per CAN bus; the MOPS chips on a bus are CAN
// nodes. The controller does what a CAN node needs to exchange data frames:
//  * Bit timing: a prescaler makes time quanta (BRP clocks each); a bit is
//    NTQ quanta and the bus is sampled at the end of quantum SAMPLE_TQ-1.
//    A falling edge on an idle bus (or in the last intermission bit)
//    hard-synchronises the bit timing (start of frame). There is no re-synchronisation inside a frame.
//  * Framing: SOF, identifier, RTR, IDE (0), r0, DLC, 0..8 data bytes,
//    CRC-15 (polynomial 0x4599), CRC delimiter, ACK slot, ACK delimiter, 7 EOF
//    bits, 3 intermission bits. SOF to the end of the CRC is bit-stuffed
//    (a complement bit after five equal bits); receive and transmit share
//    one bit engine, so a transmitter also receives its own frame.
//  * Arbitration: a transmitter that reads a dominant bit while sending a
//    recessive one in the identifier or RTR bit stops sending and goes on
//    as a receiver; it retries after the frame.
//  * ACK: a receiver whose CRC matched drives the ACK slot dominant.
//  * Errors: bit, stuff, CRC, form and ACK errors make the node send an error
//    flag (six dominant bits) and then wait for 11 recessive bits. A frame
//    being sent is retried until MAX_TRIES attempts have failed; then tx_fail.
//    Error counters and the error-passive / bus-off states of ISO 11898-1 are
//    not modelled.
// The paper only names "CAN controllers" in the CAN Node Interface; the
// protocol is the standard one, and the bit rate (125 kbit/s from 200 MHz with
// BRP 100 x 16 quanta), the simplified error handling and the retry limit are
// this design's choices.
//
// Interface: can_rx is the (asynchronous) bus level, 0 = dominant; can_tx is
// the level this node drives (1 = recessive), registered. tx_valid/tx_ready
// hands over one frame; tx_done or tx_fail pulses when it is finished.
// rx_valid pulses for one clock with rx_frame after a received frame's last
// EOF bit (frames the node sent itself are not reported).
module can_controller
  import mopshub_pkg::*;
#(
  parameter int unsigned BRP       = 100,
  parameter int unsigned NTQ       = 16,
  parameter int unsigned SAMPLE_TQ = 11,
  parameter int unsigned MAX_TRIES = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       can_rx,
  output logic       can_tx,
  input  logic       tx_valid,
  output logic       tx_ready,
  input  can_frame_t tx_frame,
  output logic       tx_done,
  output logic       tx_fail,
  output logic       rx_valid,
  output can_frame_t rx_frame,
  output logic       arb_lost,    // pulse: lost arbitration
  output logic       err_flag     // pulse: an error flag is started
);

  typedef enum logic [2:0] {
    ST_IDLE, ST_FRAME, ST_ACK, ST_ACK_DELIM, ST_EOF, ST_IFS, ST_ERR_FLAG, ST_WAIT_IDLE
  } can_state_e;

  // ---------------------------------------------------------------- timing
  logic [1:0] rx_sync;
  logic       rxs, rx_prev;
  logic [$clog2(BRP)-1:0] brp_cnt;
  logic [$clog2(NTQ)-1:0] tq;
  logic       tq_tick, bit_start, sample;

  assign rxs       = rx_sync[1];
  assign tq_tick   = (brp_cnt == ($bits(brp_cnt))'(BRP - 1));
  assign bit_start = tq_tick && (tq == ($bits(tq))'(NTQ - 1));
  assign sample    = tq_tick && (tq == ($bits(tq))'(SAMPLE_TQ - 1));

  // ----------------------------------------------------------------- state
  can_state_e st;
  logic [6:0]  idx;          // unstuffed bit index in the frame, SOF = 0
  logic [2:0]  stuff_cnt;    // equal bits in a row
  logic        last_bit;
  logic [14:0] crc;
  logic        crc_bad;
  logic [3:0]  cnt;          // bit counter for EOF, IFS, error flag, idle wait
  logic        tx_pending, tx_active, drv;
  logic [$clog2(MAX_TRIES+1)-1:0] tries;
  can_frame_t  txf;
  logic [10:0] r_id;
  logic        r_rtr;
  logic [3:0]  r_dlc;
  logic [63:0] r_data;
  logic        hsync;

  // End of the data field (first CRC bit) and of the CRC sequence.
  logic [6:0] data_end, crc_end;
  always_comb begin
    logic [3:0] n;
    n = r_rtr ? 4'd0 : (r_dlc > 4'd8 ? 4'd8 : r_dlc);
    data_end = 7'd19 + {n, 3'b000};
    crc_end  = data_end + 7'd15;
  end

  // Bit to send at idx (SOF..data) when transmitting.
  logic [82:0] txv;
  assign txv = {1'b0, txf.id, txf.rtr, 1'b0, 1'b0, txf.dlc, txf.data};

  // Value driven during the next bit.
  always_comb begin
    drv = 1'b1;
    case (st)
      ST_FRAME: if (tx_active) begin
        if (stuff_cnt == 3'd5)     drv = ~last_bit;
        else if (idx < data_end)   drv = txv[7'd82 - idx];
        else if (idx < crc_end)    drv = crc[4'(7'd14 - (idx - data_end))];
      end
      ST_ACK:      drv = !(!tx_active && !crc_bad);
      ST_ERR_FLAG: drv = 1'b0;
      ST_IDLE:     drv = !tx_pending;
      default:     drv = 1'b1;
    endcase
  end

  // Arbitration loss: sending recessive in the identifier or RTR bit, reading dominant.
  logic lost;
  assign lost = tx_active && can_tx && !rxs && idx >= 7'd1 && idx <= 7'd12;

  assign tx_ready = !tx_pending;
  // Hard synchronisation on a falling edge in bus idle, or in the last
  // intermission bit, where a dominant level is taken as start of frame (a
  // node that ended its intermission a few clocks earlier may start there).
  assign hsync    = (st == ST_IDLE || (st == ST_IFS && cnt == 4'd2)) && rx_prev && !rxs;

  function automatic logic [14:0] crc_step(input logic [14:0] c, input logic b);
    logic fb;
    fb = b ^ c[14];
    return {c[13:0], 1'b0} ^ (fb ? 15'h4599 : 15'h0000);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_sync <= 2'b11; rx_prev <= 1'b1;
      brp_cnt <= '0; tq <= '0;
      st <= ST_WAIT_IDLE; cnt <= '0; idx <= '0; stuff_cnt <= '0; last_bit <= 1'b1;
      crc <= '0; crc_bad <= 1'b0;
      tx_pending <= 1'b0; tx_active <= 1'b0; tries <= '0; txf <= '0;
      r_id <= '0; r_rtr <= 1'b0; r_dlc <= '0; r_data <= '0;
      can_tx <= 1'b1;
      tx_done <= 1'b0; tx_fail <= 1'b0; rx_valid <= 1'b0; rx_frame <= '0;
      arb_lost <= 1'b0; err_flag <= 1'b0;
    end else begin
      rx_sync <= {rx_sync[0], can_rx};
      rx_prev <= rxs;
      tx_done <= 1'b0; tx_fail <= 1'b0; rx_valid <= 1'b0; arb_lost <= 1'b0; err_flag <= 1'b0;

      if (tx_valid && tx_ready) begin
        txf <= tx_frame; tx_pending <= 1'b1; tries <= '0;
      end

      // Time quanta.
      if (hsync) begin
        // Start of frame from another node: this clock is quantum 0 of SOF.
        brp_cnt <= '0; tq <= '0;
        st <= ST_FRAME; idx <= '0; stuff_cnt <= '0; last_bit <= 1'b1;
        crc <= '0; crc_bad <= 1'b0;
        tx_active <= tx_pending;        // join with our own SOF
        can_tx <= !tx_pending;
      end else begin
        brp_cnt <= tq_tick ? '0 : brp_cnt + 1'b1;
        if (tq_tick) tq <= (tq == ($bits(tq))'(NTQ - 1)) ? '0 : tq + 1'b1;
      end

      if (!hsync && bit_start) begin
        can_tx <= drv;
        if (st == ST_IDLE && tx_pending) begin
          st <= ST_FRAME; idx <= '0; stuff_cnt <= '0; last_bit <= 1'b1;
          crc <= '0; crc_bad <= 1'b0; tx_active <= 1'b1;
        end
      end

      if (!hsync && sample) begin
        case (st)
          ST_IDLE: ;
          ST_FRAME: begin
            if (stuff_cnt == 3'd5) begin
              // Stuff bit: must differ from the five before it.
              if (rxs == last_bit || (tx_active && rxs != can_tx)) begin
                st <= ST_ERR_FLAG; cnt <= '0;
              end else begin
                stuff_cnt <= 3'd1; last_bit <= rxs;
              end
            end else if (idx == crc_end) begin
              // CRC delimiter.
              if (!rxs) begin st <= ST_ERR_FLAG; cnt <= '0; end
              else st <= ST_ACK;
            end else begin
              if (tx_active && rxs != can_tx && !lost) begin
                st <= ST_ERR_FLAG; cnt <= '0;            // bit error
              end else if (idx == 7'd0 && rxs) begin
                st <= ST_IDLE; tx_active <= 1'b0;        // glitch, not a SOF
              end else if (idx == 7'd13 && rxs) begin
                st <= ST_ERR_FLAG; cnt <= '0;            // extended frames not supported
              end else begin
                if (lost) begin tx_active <= 1'b0; arb_lost <= 1'b1; end
                stuff_cnt <= (rxs == last_bit) ? stuff_cnt + 3'd1 : 3'd1;
                last_bit  <= rxs;
                idx       <= idx + 7'd1;
                if (idx < data_end) begin
                  crc <= crc_step(crc, rxs);
                  if (idx >= 7'd1 && idx <= 7'd11) r_id <= {r_id[9:0], rxs};
                  if (idx == 7'd12) r_rtr <= rxs;
                  if (idx >= 7'd15 && idx <= 7'd18) r_dlc <= {r_dlc[2:0], rxs};
                  if (idx == 7'd15) r_data <= '0;
                  if (idx >= 7'd19) r_data <= {r_data[62:0], rxs};
                end else begin
                  if (rxs != crc[4'(7'd14 - (idx - data_end))]) crc_bad <= 1'b1;
                end
              end
            end
          end
          ST_ACK: begin
            if (tx_active && rxs) begin st <= ST_ERR_FLAG; cnt <= '0; end  // no ACK
            else st <= ST_ACK_DELIM;
          end
          ST_ACK_DELIM: begin
            if (!rxs || (!tx_active && crc_bad)) begin st <= ST_ERR_FLAG; cnt <= '0; end
            else begin st <= ST_EOF; cnt <= '0; end
          end
          ST_EOF: begin
            if (!rxs) begin st <= ST_ERR_FLAG; cnt <= '0; end
            else if (cnt == 4'd6) begin
              st <= ST_IFS; cnt <= '0;
              if (tx_active) begin
                tx_done <= 1'b1; tx_pending <= 1'b0; tx_active <= 1'b0;
              end else begin
                rx_valid <= 1'b1;
                rx_frame.id <= r_id; rx_frame.rtr <= r_rtr; rx_frame.dlc <= r_dlc;
                // Data bytes left-aligned: byte 0 in bits 63:56.
                rx_frame.data <= r_data << (7'd64 - {(r_rtr ? 4'd0 : (r_dlc > 4'd8 ? 4'd8 : r_dlc)), 3'b000});
              end
            end else cnt <= cnt + 4'd1;
          end
          ST_IFS: begin
            if (cnt == 4'd2) st <= ST_IDLE;
            else cnt <= cnt + 4'd1;
          end
          ST_ERR_FLAG: begin
            // First flag bit: count the failed attempt of a frame being sent.
            if (cnt == 4'd0) begin
              err_flag <= 1'b1;
              if (tx_active) begin
                tx_active <= 1'b0;
                if (tries == ($bits(tries))'(MAX_TRIES - 1)) begin
                  tx_fail <= 1'b1; tx_pending <= 1'b0;
                end else tries <= tries + 1'b1;
              end
            end
            if (cnt == 4'd5) begin st <= ST_WAIT_IDLE; cnt <= '0; end
            else cnt <= cnt + 4'd1;
          end
          ST_WAIT_IDLE: begin
            if (!rxs) cnt <= '0;
            else if (cnt == 4'd10) st <= ST_IDLE;
            else cnt <= cnt + 4'd1;
          end
          default: st <= ST_WAIT_IDLE;
        endcase

      end
    end
  end

endmodule
