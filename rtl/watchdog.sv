// watchdog: recovers the hub when its top state machine hangs.
//
// The Watchdog Timer counts clock cycles since the last heartbeat (kick) from
// the top FSM. When TIMEOUT cycles pass without one, the Reset part drives
// wd_rst high for RST_LEN cycles, which resets the FSM and the data path to a
// safe state, and the Counter records how many such recoveries happened.
// The watchdog itself is reset only by the external rst_n.
//
// The default TIMEOUT of 300,000,000 cycles is 1.5 s at the 200 MHz board
// clock, inside the "about 1-2 seconds" the paper gives; what counts as a
// heartbeat is defined by the FSM (see hub_fsm).
//
// The watchdog is a critical part in the sense of the paper's TMR section, so
// all its state (timer, reset-pulse counter, wd_rst and wd_count, packed as
// {wd_count, wd_rst, rst_cnt, timer}) is one triple-redundant register
// (tmr_reg); only the storage is triplicated. upset[c][i] inverts bit i of
// copy c of that packed state for fault injection (bits above the state width
// are not used; tie the port to zero in normal use), and tmr_mismatch is high
// while the copies disagree. wd_rst comes straight from the voted state.
module watchdog #(
  parameter int unsigned TIMEOUT = 300_000_000,
  parameter int unsigned RST_LEN = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             kick,
  output logic             wd_rst,
  output logic [7:0]       wd_count,
  output logic             tmr_mismatch,
  input  logic [2:0][63:0] upset
);

  localparam int unsigned TW = $clog2(TIMEOUT+1);
  localparam int unsigned RW = $clog2(RST_LEN+1);
  localparam int unsigned SW = TW + RW + 1 + 8;

  logic [TW-1:0] timer, timer_n;
  logic [RW-1:0] rst_cnt, rst_cnt_n;
  logic          wd_rst_n;
  logic [7:0]    wd_count_n;
  logic [2:0][SW-1:0] upset_s;

  for (genvar c = 0; c < 3; c++) begin : g_up
    assign upset_s[c] = upset[c][SW-1:0];
  end

  always_comb begin
    timer_n = timer; rst_cnt_n = rst_cnt; wd_rst_n = wd_rst; wd_count_n = wd_count;
    if (wd_rst) begin
      timer_n = '0;
      if (rst_cnt == ($bits(rst_cnt))'(RST_LEN - 1)) wd_rst_n = 1'b0;
      rst_cnt_n = rst_cnt + 1'b1;
    end else if (kick) begin
      timer_n = '0;
    end else if (timer == ($bits(timer))'(TIMEOUT - 1)) begin
      timer_n    = '0;
      wd_rst_n   = 1'b1;
      rst_cnt_n  = '0;
      wd_count_n = wd_count + 1'b1;
    end else begin
      timer_n = timer + 1'b1;
    end
  end

  tmr_reg #(.WIDTH(SW), .RESET_VAL('0)) u_state (
    .clk, .rst_n, .en(1'b1),
    .d({wd_count_n, wd_rst_n, rst_cnt_n, timer_n}),
    .upset(upset_s),
    .q({wd_count, wd_rst, rst_cnt, timer}),
    .mismatch(tmr_mismatch)
  );

endmodule
