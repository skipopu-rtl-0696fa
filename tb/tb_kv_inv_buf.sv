// tb_kv_inv_buf -- self-checking testbench of the KV invariance buffer.
// Small configuration: 4 banks, 4 slots per parity, 8-beat entries, 64-bit
// words.  Random simultaneous reads and writes on all banks (both parity
// halves) are checked against a shadow copy: rd_data one clock after rd_en,
// rd_valid follows rd_en, and a read in the same clock as a write to the
// same word returns the old content.  Only written words are read.
`timescale 1ns/1ps
module tb_kv_inv_buf;
  localparam int NB = 4, SLW = 2, EB = 8, DW = 64, AW = 1 + SLW + 3;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] rd_en = 0, rd_valid, wr_en = 0;
  logic [AW-1:0] rd_addr [NB], wr_addr [NB];
  logic [DW-1:0] rd_data [NB], wr_data [NB];
  int checks = 0, failures = 0;

  kv_inv_buf #(.BANKS(NB), .SLOT_W(SLW), .ENTRY_BEATS(EB), .DW(DW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  logic [DW-1:0] shadow [NB][2**AW];
  logic          written [NB][2**AW];

  initial begin
    logic [DW-1:0] exp_d [NB];
    logic [NB-1:0] exp_v;
    for (int b = 0; b < NB; b++) for (int a = 0; a < 2**AW; a++) written[b][a] = 0;
    for (int b = 0; b < NB; b++) begin rd_addr[b] = '0; wr_addr[b] = '0; wr_data[b] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      exp_v = '0;
      for (int b = 0; b < NB; b++) begin
        wr_en[b] = $urandom_range(0, 1);
        wr_addr[b] = AW'($urandom_range(0, 2**AW - 1));
        wr_data[b] = {$urandom, $urandom};
        rd_addr[b] = AW'($urandom_range(0, 2**AW - 1));
        rd_en[b] = written[b][rd_addr[b]] && $urandom_range(0, 1);
        exp_v[b] = rd_en[b];
        exp_d[b] = shadow[b][rd_addr[b]];
      end
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        if (exp_v[b]) check(rd_data[b] == exp_d[b], $sformatf("bank %0d read", b));
      end
      check(rd_valid == exp_v, "rd_valid");
      for (int b = 0; b < NB; b++) if (wr_en[b]) begin
        shadow[b][wr_addr[b]] = wr_data[b]; written[b][wr_addr[b]] = 1;
      end
    end
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
