// elink_deserializer: turns the 2-bit elink words into aligned 10-bit symbols.
//
// Deserializer: every clock two new bits enter a 12-bit shift register (din[1]
// is the earlier bit). A counter holds how many bits are waiting; when ten or
// more are there, the oldest ten leave as one symbol. A bit slip drops the
// oldest waiting bit, which moves the symbol boundary by one bit.
//
// Sync detector: while not locked, every symbol that is not the K28.5 comma
// (either disparity) causes one bit slip; the symbol after a slip is ignored.
// A comma locks the alignment. When locked, LOCK_ERRS symbols in a row that
// the caller flags as invalid (chk_err, from the 8b/10b decoder) drop lock and
// the search starts again. Because the idle stream is all commas, the search
// ends within ten symbols of a clean link.
//
// The paper says the Rx data "is synchronized, deserialized and aligned to
// 8B10B symbols", and its figure has a Sync detector over the Deserializer;
// comma search by bit slip and the lock rule are this design's choice.
// Timing: sym_valid on about one clock in five.
module elink_deserializer #(
  parameter int unsigned LOCK_ERRS = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] din,
  input  logic       chk_valid,   // decoder result for an earlier symbol is present
  input  logic       chk_err,     // ... and that symbol was invalid
  output logic [9:0] sym,
  output logic       sym_valid,   // aligned symbol (only while locked)
  output logic       locked,
  output logic [7:0] slips        // number of bit slips since reset
);

  logic [11:0] sh;
  logic [3:0]  n;          // bits waiting in sh (newest at bit 0)
  logic        slip;
  logic        skip_next;
  logic [$clog2(LOCK_ERRS+1)-1:0] errs;

  logic [11:0] sh_n;
  logic [4:0]  n_add;
  logic        word_rdy;
  logic [9:0]  word;

  function automatic logic is_comma(input logic [9:0] w);
    return (w == 10'b0011111010) || (w == 10'b1100000101);
  endfunction

  always_comb begin
    sh_n     = {sh[9:0], din};
    n_add    = 5'(n) + 5'd2;
    word_rdy = (n_add >= 5'd10);
    word     = 10'(sh_n >> (n_add - 5'd10));
    slip     = word_rdy && !locked && !skip_next && !is_comma(word);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh <= '0; n <= '0; sym <= '0; sym_valid <= 1'b0;
      locked <= 1'b0; skip_next <= 1'b0; errs <= '0; slips <= '0;
    end else begin
      sh        <= sh_n;
      sym_valid <= 1'b0;
      if (word_rdy) begin
        sym <= word;
        if (locked) begin
          sym_valid <= 1'b1;
        end else if (skip_next) begin
          skip_next <= 1'b0;
        end else if (is_comma(word)) begin
          locked <= 1'b1;
          errs   <= '0;
          sym_valid <= 1'b1;
        end else begin
          skip_next <= 1'b1;
          slips <= slips + 1'b1;
        end
      end
      n <= 4'(n_add - (word_rdy ? 5'd10 : 5'd0) - (slip ? 5'd1 : 5'd0));
      if (locked && chk_valid && chk_err) begin
        if (errs == ($bits(errs))'(LOCK_ERRS - 1)) begin
          locked <= 1'b0;
          errs   <= '0;
        end else errs <= errs + 1'b1;
      end else if (locked && chk_valid) errs <= '0;
    end
  end

endmodule
