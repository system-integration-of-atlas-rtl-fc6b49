// mopshub_pkg: types and constants shared by the MOPS-HUB firmware blocks.
//
// A hub message (hub_msg_t) is the unit that moves through the hub: it carries
// one CAN data frame together with the number of the bus it belongs to. Bus
// numbers 0..15 are the CAN buses; two further numbers address blocks of the
// hub itself (Bus Control and Bus Monitor). On the elink a message is sent as
// 12 bytes between a start and an end control symbol. The addressing and the
// byte layout are this design's own choice; the paper fixes only that the
// hub aggregates CAN traffic and monitoring data onto the elink stream.
package mopshub_pkg;

  // Number of CAN buses one hub serves ("up to 16 CAN buses").
  localparam int unsigned N_BUS = 16;

  // Hub-internal destinations/sources, following the CAN bus numbers.
  localparam logic [4:0] ADDR_BUS_CTRL = 5'd16;
  localparam logic [4:0] ADDR_BUS_MON  = 5'd17;

  // Bus Control opcodes (first data byte of a message to ADDR_BUS_CTRL).
  localparam logic [7:0] OP_VCAN_OFF  = 8'h00;
  localparam logic [7:0] OP_VCAN_ON   = 8'h01;
  localparam logic [7:0] OP_VCAN_READ = 8'h02;

  // One CAN 2.0A data frame. data[63:56] is data byte 0 (sent first).
  typedef struct packed {
    logic [10:0] id;
    logic        rtr;
    logic [3:0]  dlc;
    logic [63:0] data;
  } can_frame_t;

  typedef struct packed {
    logic [4:0] bus;
    can_frame_t frame;
  } hub_msg_t;

  localparam int unsigned MSG_W     = $bits(hub_msg_t);   // 85
  localparam int unsigned MSG_BYTES = 12;

  // 8b/10b control characters used on the elink.
  localparam logic [7:0] K28_5 = 8'hBC;  // idle / comma
  localparam logic [7:0] K27_7 = 8'hFB;  // start of packet
  localparam logic [7:0] K29_7 = 8'hFD;  // end of packet

  // Byte i (0 = first on the link) of a message:
  //   0: bus number, 1: {rtr, id[10:8]}, 2: id[7:0], 3: dlc, 4..11: data bytes 0..7
  function automatic logic [7:0] msg_byte(input hub_msg_t m, input int unsigned i);
    case (i)
      0:       return {3'b000, m.bus};
      1:       return {4'b0000, m.frame.rtr, m.frame.id[10:8]};
      2:       return m.frame.id[7:0];
      3:       return {4'b0000, m.frame.dlc};
      default: return m.frame.data[8*(11-i) +: 8];
    endcase
  endfunction

  // Inverse of msg_byte: place byte i into a message.
  function automatic hub_msg_t msg_set_byte(input hub_msg_t m, input int unsigned i,
                                            input logic [7:0] b);
    hub_msg_t r = m;
    case (i)
      0:       r.bus = b[4:0];
      1:       begin r.frame.rtr = b[3]; r.frame.id[10:8] = b[2:0]; end
      2:       r.frame.id[7:0] = b;
      3:       r.frame.dlc = b[3:0];
      default: r.frame.data[8*(11-i) +: 8] = b;
    endcase
    return r;
  endfunction

endpackage
