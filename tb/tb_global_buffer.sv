// tb_global_buffer -- self-checking testbench of the global buffer.
// Fills every {row, chunk} word with a pattern derived from its address,
// reads all words back in random order (checking data and the 1-clock read
// latency), then overwrites a random subset of rows in place -- as the NPE
// does with normalised rows -- and checks that exactly those rows changed.
`timescale 1ns/1ps
module tb_global_buffer;
  import skipopu_pkg::*;
  localparam int LANES = 8, ROWS = 16, CHUNKS = 5;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0, rd_valid;
  logic [$clog2(ROWS)-1:0] wr_row, rd_row;
  logic [$clog2(CHUNKS)-1:0] wr_chunk, rd_chunk;
  fp16_t wr_data [LANES], rd_data [LANES];
  int checks = 0, failures = 0;
  logic [ROWS-1:0] rewritten;

  global_buffer #(.LANES(LANES), .ROWS(ROWS), .CHUNKS(CHUNKS)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp16_t pat(input int r, input int c, input int l, input logic alt);
    return 16'(r * 1000 + c * 37 + l * 3 + (alt ? 16'h5000 : 0));
  endfunction

  task automatic rd_check(input int r, input int c, input logic alt);
    rd_row = r[$clog2(ROWS)-1:0]; rd_chunk = c[$clog2(CHUNKS)-1:0]; rd_en = 1;
    @(negedge clk); rd_en = 0;
    checks++;
    if (!rd_valid) begin failures++; $display("rd_valid low"); end
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (rd_data[l] !== pat(r, c, l, alt)) begin
        failures++;
        if (failures < 10) $display("r%0d c%0d l%0d got %h exp %h", r, c, l, rd_data[l], pat(r, c, l, alt));
      end
    end
  endtask

  initial begin
    wr_row = 0; wr_chunk = 0; rd_row = 0; rd_chunk = 0;
    foreach (wr_data[l]) wr_data[l] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < CHUNKS; c++) begin
        wr_en = 1; wr_row = r[$clog2(ROWS)-1:0]; wr_chunk = c[$clog2(CHUNKS)-1:0];
        for (int l = 0; l < LANES; l++) wr_data[l] = pat(r, c, l, 0);
        @(negedge clk);
      end
    wr_en = 0;
    for (int n = 0; n < 100; n++) rd_check($urandom_range(0, ROWS - 1), $urandom_range(0, CHUNKS - 1), 0);
    rewritten = 16'($urandom);
    for (int r = 0; r < ROWS; r++) if (rewritten[r])
      for (int c = 0; c < CHUNKS; c++) begin
        wr_en = 1; wr_row = r[$clog2(ROWS)-1:0]; wr_chunk = c[$clog2(CHUNKS)-1:0];
        for (int l = 0; l < LANES; l++) wr_data[l] = pat(r, c, l, 1);
        @(negedge clk);
      end
    wr_en = 0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < CHUNKS; c++) rd_check(r, c, rewritten[r]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
