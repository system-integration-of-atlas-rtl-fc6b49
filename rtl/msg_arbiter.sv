// msg_arbiter: round-robin merge of N message streams into one.
//
// Used where several producers share one path: the 16 CAN receivers in the
// CAN Node Interface, and the CAN side, Bus Control and Bus Monitor in front
// of the Upstream FIFO. A grant, once given, is held until the message is
// taken, so out_valid never drops without a transfer; the next search starts
// after the last winner, so no producer waits for more than N-1 others.
// Interface: valid/ready per input and on the output; the output is
// combinational from the held grant (no added latency).
module msg_arbiter
  import mopshub_pkg::*;
#(
  parameter int unsigned N = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N-1:0]      in_valid,
  output logic [N-1:0]      in_ready,
  input  hub_msg_t [N-1:0]  in_msg,
  output logic              out_valid,
  input  logic              out_ready,
  output hub_msg_t          out_msg
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          held;
  logic [IW-1:0] grant, last, pick;
  logic          any;

  always_comb begin
    pick = last;
    any  = 1'b0;
    for (int k = 1; k <= N; k++) begin
      int unsigned c;
      c = (32'(last) + k) % N;
      if (!any && in_valid[c]) begin pick = IW'(c); any = 1'b1; end
    end
  end

  logic [IW-1:0] sel;
  assign sel       = held ? grant : pick;
  assign out_valid = held || any;
  assign out_msg   = in_msg[sel];
  always_comb begin
    in_ready = '0;
    in_ready[sel] = out_valid && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held <= 1'b0; grant <= '0; last <= IW'(N - 1);
    end else if (out_valid) begin
      if (out_ready) begin held <= 1'b0; last <= sel; end
      else begin held <= 1'b1; grant <= sel; end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && out_msg == $past(out_msg));
endmodule
