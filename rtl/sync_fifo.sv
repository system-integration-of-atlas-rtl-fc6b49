// sync_fifo: single-clock FIFO with valid/ready handshakes on both sides.
//
// The hub uses two of these: the Upstream FIFO in the Tx Writer (CAN and
// monitoring messages waiting for the elink) and the Downstream FIFO in the
// Rx Reader (messages from the elink waiting to be dispatched). The storage is
// a plain register array indexed by read and write pointers with one extra
// wrap bit, so full and empty are told apart without a counter.
//
// Interface: a word is written when wr_valid && wr_ready and read when
// rd_valid && rd_ready. rd_data shows the oldest word whenever rd_valid is
// high (first-word fall-through). Depth and width are this design's choice;
// DEPTH must be a power of two.
module sync_fifo #(
  parameter int unsigned WIDTH = 85,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [WIDTH-1:0] wr_data,
  output logic             rd_valid,
  input  logic             rd_ready,
  output logic [WIDTH-1:0] rd_data,
  output logic [$clog2(DEPTH):0] level
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp, rp;

  assign level    = wp - rp;
  assign wr_ready = (level != (AW+1)'(DEPTH));
  assign rd_valid = (wp != rp);
  assign rd_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_valid && wr_ready) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_valid && wr_ready) wp <= wp + 1'b1;
      if (rd_valid && rd_ready) rp <= rp + 1'b1;
    end
  end

  // A producer keeps its word until it is taken.
  property p_wr_hold;
    @(posedge clk) disable iff (!rst_n) (wr_valid && !wr_ready) |=> wr_valid;
  endproperty
  a_wr_hold: assert property (p_wr_hold);

  a_level: assert property (@(posedge clk) disable iff (!rst_n) level <= (AW+1)'(DEPTH));

endmodule
