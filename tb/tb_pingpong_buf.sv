// tb_pingpong_buf -- self-checking testbench of the ping-pong buffer.
// Over several tiles, fills one bank with tile n+1 while reading tile n from
// the other bank in the same clocks, swaps, and checks every word read
// against the tile it must come from (never the tile being written).
`timescale 1ns/1ps
module tb_pingpong_buf;
  localparam int W = 32, DEPTH = 16;
  logic clk = 0, rst_n = 0, swap = 0, wr_en = 0, rd_en = 0, rd_valid, fill_bank;
  logic [$clog2(DEPTH)-1:0] wr_addr, rd_addr;
  logic [W-1:0] wr_data, rd_data;
  int checks = 0, failures = 0;

  pingpong_buf #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] pat(input int tile, input int a);
    return W'(tile * 65536 + a * 7 + 1);
  endfunction

  initial begin
    wr_addr = 0; rd_addr = 0; wr_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // tile 0 fill
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1; wr_addr = a[$clog2(DEPTH)-1:0]; wr_data = pat(0, a); @(negedge clk);
    end
    wr_en = 0; swap = 1; @(negedge clk); swap = 0;
    for (int t = 1; t < 8; t++) begin
      for (int a = 0; a < DEPTH; a++) begin
        int ra;
        ra = (a * 5 + t) % DEPTH;
        wr_en = 1; wr_addr = a[$clog2(DEPTH)-1:0]; wr_data = pat(t, a);
        rd_en = 1; rd_addr = ra[$clog2(DEPTH)-1:0];
        @(negedge clk);
        checks++;
        if (!rd_valid || rd_data !== pat(t - 1, ra)) begin
          failures++;
          if (failures < 10) $display("tile %0d addr %0d got %h exp %h", t, ra, rd_data, pat(t - 1, ra));
        end
      end
      wr_en = 0; rd_en = 0;
      checks++;
      if (fill_bank != t[0]) begin failures++; $display("fill_bank %b at tile %0d", fill_bank, t); end
      swap = 1; @(negedge clk); swap = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
