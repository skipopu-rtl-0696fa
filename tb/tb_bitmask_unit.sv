// tb_bitmask_unit -- self-checking testbench of the bitmask unit.
// Feeds random router logit pairs for a 64-token block, checks every stored
// decision against a real-valued comparison of the two logits, the active
// count, and that the fetch pass lists exactly the unskipped rows in
// ascending order with ranks 0,1,2,..., one per clock, with fetch_last on the
// final one.  Repeated for several blocks, including an all-skipped block.
`timescale 1ns/1ps
module tb_bitmask_unit;
  import skipopu_pkg::*;
  localparam int R = 64;
  logic clk = 0, rst_n = 0, clear = 0, logit_valid = 0, fetch_start = 0;
  logic [$clog2(R)-1:0] logit_row, fetch_row, fetch_rank;
  fp16_t logit0, logit1;
  logic [R-1:0] bitmask;
  logic [$clog2(R):0] n_active;
  logic fetch_busy, fetch_valid, fetch_last;
  int checks = 0, failures = 0;

  bitmask_unit #(.MAX_ROWS(R)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real f2r(input fp16_t f);
    real m; int e;
    if (f[14:10] == 0) return 0.0;
    m = (1024.0 + f[9:0]) / 1024.0; e = int'(f[14:10]) - 15;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return f[15] ? -m : m;
  endfunction
  function automatic fp16_t rf();
    int s, e, m;
    s = $urandom_range(0, 1); e = $urandom_range(12, 17); m = $urandom_range(0, 1023);
    return {s[0], e[4:0], m[9:0]};
  endfunction

  logic [R-1:0] ref_bm;
  initial begin
    logit_row = 0; logit0 = 0; logit1 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 6; blk++) begin
      int cnt, rank, clk_cnt;
      clear = 1; @(negedge clk); clear = 0;
      ref_bm = '0;
      for (int t = 0; t < R; t++) begin
        logit_row = t[$clog2(R)-1:0];
        logit0 = rf(); logit1 = rf();
        if (blk == 3) logit1 = {1'b1, logit1[14:0]};      // block with negative logit1
        if (blk == 3) logit0 = {1'b0, logit0[14:0]};
        if (t % 9 == 0) logit1 = logit0;                  // tie -> skip
        ref_bm[t] = f2r(logit1) > f2r(logit0);
        logit_valid = 1; @(negedge clk);
      end
      logit_valid = 0;
      @(negedge clk);
      checks++;
      if (bitmask !== ref_bm) begin failures++; $display("blk %0d bitmask %h exp %h", blk, bitmask, ref_bm); end
      cnt = $countones(ref_bm);
      checks++;
      if (int'(n_active) != cnt) begin failures++; $display("n_active %0d exp %0d", n_active, cnt); end
      fetch_start = 1; @(negedge clk); fetch_start = 0;
      rank = 0; clk_cnt = 0;
      for (int t = 0; t < R; t++) if (ref_bm[t]) begin
        @(posedge clk); #1;
        clk_cnt++;
        checks++;
        if (!fetch_valid || fetch_row != t[$clog2(R)-1:0] || int'(fetch_rank) != rank || fetch_last != (rank == cnt - 1)) begin
          failures++;
          if (failures < 10) $display("fetch: valid %b row %0d rank %0d last %b, exp row %0d rank %0d", fetch_valid, fetch_row, fetch_rank, fetch_last, t, rank);
        end
        rank++;
      end
      @(posedge clk); #1;
      checks++;
      if (fetch_valid || fetch_busy) begin failures++; $display("fetch did not stop"); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
