// tmr_reg: register protected by triple modular redundancy.
//
// Three copies of the register hold the same value and the output is their
// bitwise majority. Every clock each copy is reloaded, from d when en is high
// and otherwise from the voted output, so an upset in one copy is outvoted at
// once and repaired at the next clock edge. mismatch is high while the copies
// disagree (one or two copies upset). Only the storage is triplicated, not
// the logic that computes d, as the paper prescribes for the hub firmware.
// upset is a fault-injection input: bit i of copy c is inverted at the next
// clock edge when upset[c][i] is high; tie it to zero in normal use.
//
// Interface: q and mismatch are combinational from the three copies; the
// register loads at the clock edge like an ordinary enabled flip-flop.
module tmr_reg #(
  parameter int unsigned         WIDTH     = 8,
  parameter logic [WIDTH-1:0]    RESET_VAL = '0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic [WIDTH-1:0]      d,
  input  logic [2:0][WIDTH-1:0] upset,
  output logic [WIDTH-1:0]      q,
  output logic                  mismatch
);

  logic [2:0][WIDTH-1:0] r;

  assign q        = (r[0] & r[1]) | (r[1] & r[2]) | (r[0] & r[2]);
  assign mismatch = (r[0] != r[1]) || (r[1] != r[2]);

  for (genvar c = 0; c < 3; c++) begin : g_copy
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) r[c] <= RESET_VAL;
      else        r[c] <= (en ? d : q) ^ upset[c];
    end
  end

endmodule
