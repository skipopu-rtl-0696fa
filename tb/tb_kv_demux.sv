// tb_kv_demux -- self-checking testbench of the KV DEMUX.
// Small configuration: 4 HBM ports, 32 tokens, 4-beat entries, 32-bit
// data.  Random segments are offered with random per-port ready; every
// segment must leave on port rank mod 4 with the mapped address and
// unchanged data, in order per port, exactly once; a held output must stay
// stable while its port is not ready.  Also checks the one-clock latency
// when the port is ready.
`timescale 1ns/1ps
module tb_kv_demux;
  localparam int HP = 4, MT = 32, SP = 4, DW = 32, LW = 3, AW = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_is_v = 0;
  logic [LW-1:0] in_layer = 0;
  logic [4:0] in_rank = 0;
  logic [1:0] in_beat = 0;
  logic [DW-1:0] in_data = 0;
  logic [HP-1:0] wr_valid, wr_ready;
  logic [AW-1:0] wr_addr [HP];
  logic [DW-1:0] wr_data [HP];
  int checks = 0, failures = 0;

  kv_demux #(.HBM_PORTS(HP), .MAX_TOKENS(MT), .SPAN(SP), .DW(DW), .LAYER_W(LW), .ADDR_W(AW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  // expected queues per port
  logic [AW+DW-1:0] q [HP][$];
  int sent = 0, recv = 0;

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < HP; p++) if (wr_valid[p] && wr_ready[p]) begin
      logic [AW+DW-1:0] e;
      check(q[p].size() > 0, "unexpected output");
      if (q[p].size() > 0) begin
        e = q[p].pop_front();
        check({wr_addr[p], wr_data[p]} == e, $sformatf("port %0d address/data", p));
      end
      recv++;
    end
    if (in_valid && in_ready) begin
      int p, a;
      p = int'(in_rank) % HP;
      a = (int'(in_layer) * (MT / HP) * 2 * SP + (int'(in_rank) / HP) * 2 * SP
           + (in_is_v ? SP : 0) + int'(in_beat)) * (DW / 8);
      q[p].push_back({AW'(a), in_data});
      sent++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // latency with all ports ready
    wr_ready = '1;
    in_valid = 1; in_rank = 5'd6; in_data = 32'hCAFE0001; @(negedge clk);
    in_valid = 0;
    check(wr_valid == 4'b0100, "one-clock latency to port 2");
    @(negedge clk);
    for (int i = 0; i < 4000; i++) begin
      wr_ready = 4'($urandom_range(0, 15));
      in_valid = ($urandom_range(0, 99) < 80);
      in_layer = LW'($urandom_range(0, 7)); in_rank = 5'($urandom_range(0, 31));
      in_is_v = $urandom_range(0, 1); in_beat = 2'($urandom_range(0, 3));
      in_data = $urandom;
      @(negedge clk);
    end
    in_valid = 0; wr_ready = '1;
    repeat (4) @(negedge clk);
    check(sent == recv && sent > 1000, $sformatf("all segments delivered (%0d/%0d)", recv, sent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
