// bitmask_unit -- the Bitmask (BM) module: routing decisions and selective
// token fetch.
//
// For every token of a row block the PE array produces the router's two
// logits (r = W_theta^T x, summed over all reduction tiles).  The unit takes
// the decision with a straight-through argmax -- token executes the
// submodule when logit[1] > logit[0] -- and records it in the block's
// bitmask.  Once the decisions are complete, a fetch pass walks the bitmask
// with a priority encoder and emits, one per clock, the row index of each
// unskipped token together with its rank (0,1,2,... among unskipped
// tokens), so that the global buffer delivers only those rows to RMSNorm
// and to the next submodule.  The bitmask itself is an output for the NPE
// (feature selection) and the KV subsystem.
//
// The paper names the module and its job (consume router results from the
// PE array, decide, fetch token vectors selectively).  The argmax without
// Gumbel noise follows its "straight-through argmax" at inference; the
// serial priority-encoder fetch and the port layout are this design's own.
//
// Timing: a decision is registered one clock after logit_valid.  After
// fetch_start, fetch_valid is high for exactly popcount(bitmask) clocks,
// one unskipped token per clock, with fetch_last on the final one;
// fetch_busy stays high until then.  clear empties the bitmask.
//
// Lint note: the assertions use the reset as their `disable iff` condition,
// so linters that see rst_n both as an asynchronous flop reset and inside a
// clocked expression report it as a mixed synchronous/asynchronous net.  The
// assertions are simulation-only and the reset stays a pure asynchronous
// reset in the synthesised logic, so the warning is left standing.
module bitmask_unit
  import skipopu_pkg::*;
#(
  parameter int MAX_ROWS = 64
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clear,
  // router logits, one token per clock
  input  logic     logit_valid,
  input  logic [$clog2(MAX_ROWS)-1:0] logit_row,
  input  fp16_t    logit0,
  input  fp16_t    logit1,
  output logic [MAX_ROWS-1:0] bitmask,
  output logic [$clog2(MAX_ROWS):0] n_active,
  // selective fetch
  input  logic     fetch_start,
  output logic     fetch_busy,
  output logic     fetch_valid,
  output logic [$clog2(MAX_ROWS)-1:0] fetch_row,
  output logic [$clog2(MAX_ROWS)-1:0] fetch_rank,
  output logic     fetch_last
);
  localparam int RW = $clog2(MAX_ROWS);
  logic [MAX_ROWS-1:0] remain;
  logic [RW-1:0]       low;
  logic                any_left;

  always_comb begin
    low = '0;
    for (int i = MAX_ROWS - 1; i >= 0; i--) if (remain[i]) low = RW'(i);
    any_left = |remain;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      bitmask    <= '0;
      n_active   <= '0;
      remain     <= '0;
      fetch_busy <= 1'b0;
      fetch_valid <= 1'b0;
      fetch_row  <= '0;
      fetch_rank <= '0;
      fetch_last <= 1'b0;
    end else begin
      if (clear) begin
        bitmask  <= '0;
        n_active <= '0;
      end else if (logit_valid) begin
        bitmask[logit_row] <= fp16_gt(logit1, logit0);
        n_active <= n_active + (RW+1)'(fp16_gt(logit1, logit0)) - (RW+1)'(bitmask[logit_row]);
      end
      fetch_valid <= 1'b0;
      fetch_last  <= 1'b0;
      if (fetch_start) begin
        remain     <= bitmask;
        fetch_busy <= |bitmask;
        fetch_rank <= '1;          // wraps to 0 on the first fetch
      end else if (fetch_busy) begin
        fetch_valid <= 1'b1;
        fetch_row   <= low;
        fetch_rank  <= fetch_rank + 1'b1;
        remain[low] <= 1'b0;
        fetch_last  <= ($countones(remain) == 1);
        fetch_busy  <= ($countones(remain) > 1);
      end
    end

  a_fetch_nonempty: assert property (@(posedge clk) disable iff (!rst_n) fetch_busy && !fetch_start |-> any_left);

endmodule
