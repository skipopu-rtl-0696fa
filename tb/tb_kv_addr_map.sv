// tb_kv_addr_map -- self-checking testbench of the token-wise KV mapping.
// Default (paper) sizes: 32 HBM ports, 2048 tokens, 256-beat K/V entries.
// Random (layer, rank, K/V, beat) tuples are checked against the formula
// port = rank mod 32, address = 32 * (layer * 64 * 512 + (rank div 32) * 512
// + V * 256 + beat); then for one layer all ranks 0..2047 are walked to
// check that consecutive ranks rotate over the ports and that no two
// (rank, beat) pairs of a port share an address.
`timescale 1ns/1ps
module tb_kv_addr_map;
  logic [5:0]  layer;
  logic [10:0] rank;
  logic        is_v;
  logic [7:0]  beat;
  logic [4:0]  port;
  logic [27:0] addr;
  int checks = 0, failures = 0;

  kv_addr_map dut (.*);

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    int a;
    for (int i = 0; i < 3000; i++) begin
      int l, r, v, b;
      l = $urandom_range(0, 39); r = $urandom_range(0, 2047); v = $urandom_range(0, 1); b = $urandom_range(0, 255);
      layer = 6'(l); rank = 11'(r); is_v = v[0]; beat = 8'(b);
      #1;
      a = 32 * (l * 64 * 512 + (r / 32) * 512 + v * 256 + b);
      check(int'(port) == r % 32, "port");
      check(int'(addr) == a, $sformatf("addr l=%0d r=%0d v=%0d b=%0d", l, r, v, b));
    end
    // entries of one port never overlap, last beat of an entry is contiguous
    layer = 6'd3; is_v = 1'b1; beat = 8'd255;
    for (int r = 0; r < 2048; r++) begin
      int e0;
      rank = 11'(r); #1;
      check(int'(port) == r % 32, "round-robin");
      e0 = 32 * (3 * 64 * 512 + (r / 32) * 512);
      check(int'(addr) == e0 + 511 * 32, "entry is one contiguous burst of 512 beats");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
