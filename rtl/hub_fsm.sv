// hub_fsm: the hub's top state machine.
//
// Bring-up: after reset it waits until the Rx Reader has locked onto the
// elink (S_LINK), then until Bus Control has read back the VCAN switch states
// (S_VCAN); only then does it release the CAN Node Interface (sys_run) and
// enter S_RUN. In S_RUN it takes one message at a time from the Downstream
// FIFO and dispatches it by its bus number: 0..15 to that CAN bus (S_CAN,
// waiting until the bus's controller can take it), ADDR_BUS_CTRL to Bus
// Control (S_BC; data byte 0 = opcode, byte 1 = bus), ADDR_BUS_MON to Bus
// Monitor (S_MON; starts a scan). Messages to any other address are dropped
// and counted. Every MON_PERIOD clocks (0 = never) it also starts a scan.
//
// kick, the heartbeat to the watchdog, is high in S_LINK and S_RUN, the two
// states where waiting is normal; an FSM stuck anywhere else is recovered by
// the watchdog. The state register is triplicated (tmr_reg), with an upset
// input for fault injection.
// The paper gives the FSM's duties (bring-up, coordination, supervising the
// CAN-elink transfer); the states, addressing and heartbeat are this design's.
module hub_fsm
  import mopshub_pkg::*;
#(
  parameter int unsigned MON_PERIOD = 200_000_000
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       link_locked,
  input  logic       bc_init_done,
  input  logic       dn_valid,
  output logic       dn_ready,
  input  hub_msg_t   dn_msg,
  output logic       can_valid,
  input  logic       can_ready,
  output hub_msg_t   can_msg,
  output logic       bc_cmd_valid,
  input  logic       bc_cmd_ready,
  output logic [7:0] bc_cmd_op,
  output logic [3:0] bc_cmd_bus,
  output logic       mon_start,
  input  logic       mon_busy,
  output logic       sys_run,
  output logic       kick,
  output logic [15:0] dropped,
  output logic       tmr_mismatch,
  input  logic [2:0][2:0] upset
);

  typedef enum logic [2:0] {S_BOOT, S_LINK, S_VCAN, S_RUN, S_CAN, S_BC, S_MON} fsm_state_e;

  fsm_state_e st, st_n;
  logic [2:0] st_q;
  hub_msg_t   cur;
  logic [$clog2(MON_PERIOD+2)-1:0] mon_timer;
  logic       mon_due;

  tmr_reg #(.WIDTH(3)) u_state (
    .clk, .rst_n, .en(1'b1), .d(st_n), .upset, .q(st_q), .mismatch(tmr_mismatch)
  );
  assign st = fsm_state_e'(st_q);

  always_comb begin
    st_n = st;
    case (st)
      S_BOOT: st_n = S_LINK;
      S_LINK: if (link_locked) st_n = S_VCAN;
      S_VCAN: if (bc_init_done) st_n = S_RUN;
      S_RUN: begin
        if (dn_valid) begin
          if (32'(dn_msg.bus) < N_BUS)        st_n = S_CAN;
          else if (dn_msg.bus == ADDR_BUS_CTRL) st_n = S_BC;
          else if (dn_msg.bus == ADDR_BUS_MON)  st_n = S_MON;
        end
      end
      S_CAN: if (can_ready) st_n = S_RUN;
      S_BC:  if (bc_cmd_ready) st_n = S_RUN;
      S_MON: if (!mon_busy) st_n = S_RUN;
      default: st_n = S_BOOT;
    endcase
  end

  assign dn_ready     = (st == S_RUN);
  assign can_valid    = (st == S_CAN);
  assign can_msg      = cur;
  assign bc_cmd_valid = (st == S_BC);
  assign bc_cmd_op    = cur.frame.data[63:56];
  assign bc_cmd_bus   = cur.frame.data[51:48];
  assign sys_run      = (st == S_RUN || st == S_CAN || st == S_BC || st == S_MON);
  assign kick         = (st == S_LINK || st == S_RUN);
  assign mon_start    = (st == S_MON && !mon_busy) || (st == S_RUN && mon_due && !mon_busy);
  assign mon_due      = (MON_PERIOD != 0) && (mon_timer == ($bits(mon_timer))'(MON_PERIOD));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0; dropped <= '0; mon_timer <= '0;
    end else begin
      if (st == S_RUN && dn_valid) begin
        cur <= dn_msg;
        if (32'(dn_msg.bus) >= N_BUS && dn_msg.bus != ADDR_BUS_CTRL && dn_msg.bus != ADDR_BUS_MON)
          dropped <= dropped + 1'b1;
      end
      if (!sys_run || mon_start) mon_timer <= '0;
      else if (!mon_due) mon_timer <= mon_timer + 1'b1;
    end
  end

endmodule
