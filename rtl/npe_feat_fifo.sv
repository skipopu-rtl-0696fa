// npe_feat_fifo -- row-feature FIFO of one NPE reduction unit.
//
// Holds one partial reduction feature (a running sum, a running maximum or
// a running exponential sum) per tile row.  While a tile row streams through
// the NPE, its partial feature is popped, updated with the new tile's
// contribution and pushed back, so the features of all rows of a row block
// circulate in order until the whole row has been traversed (the paper's
// "row-wise intermediate FIFOs").  Synchronous circular buffer; pop data is
// the head entry (first-word fall-through); push and pop may happen in the
// same clock.  Overflow and underflow are assertion errors.
//
// Lint note: the assertions use the reset as their `disable iff` condition,
// so linters that see rst_n both as an asynchronous flop reset and inside a
// clocked expression report it as a mixed synchronous/asynchronous net.  The
// assertions are simulation-only and the reset stays a pure asynchronous
// reset in the synthesised logic, so the warning is left standing.
module npe_feat_fifo #(
  parameter int DEPTH = 64,
  parameter int W     = 48
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] push_data,
  input  logic         pop,
  output logic [W-1:0] head,
  output logic         empty
);
  localparam int AW = (DEPTH <= 2) ? 1 : $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic [AW:0]   cnt;

  assign head  = mem[rp];
  assign empty = (cnt == 0);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end

  always_ff @(posedge clk)
    if (push) mem[wp] <= push_data;

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push && !pop |-> cnt < (AW+1)'(DEPTH));

endmodule
