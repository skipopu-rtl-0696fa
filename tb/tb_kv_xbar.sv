// tb_kv_xbar -- self-checking testbench of the 48 x 16 crossbar at its
// default size (256-bit data).  Every clock random data on all 48 inputs,
// random enables and selects (several outputs may pick the same input);
// one clock later each enabled output must carry its selected input and
// out_en must equal the previous en.
`timescale 1ns/1ps
module tb_kv_xbar;
  localparam int NI = 48, NO = 16, DW = 256;
  logic clk = 0, rst_n = 0;
  logic [DW-1:0] in_data [NI];
  logic [NO-1:0] en, out_en;
  logic [5:0]    sel [NO];
  logic [DW-1:0] out_data [NO];
  int checks = 0, failures = 0;

  kv_xbar dut (.*);
  always #5 clk = ~clk;

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  initial begin
    logic [DW-1:0] exp_d [NO];
    logic [NO-1:0] exp_en;
    en = '0;
    for (int o = 0; o < NO; o++) sel[o] = '0;
    for (int i = 0; i < NI; i++) in_data[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      for (int i = 0; i < NI; i++) for (int w = 0; w < DW / 32; w++) in_data[i][32*w +: 32] = $urandom;
      en = 16'($urandom);
      for (int o = 0; o < NO; o++) begin
        sel[o] = 6'($urandom_range(0, NI - 1));
        exp_d[o] = in_data[sel[o]];
      end
      exp_en = en;
      @(negedge clk);
      check(out_en == exp_en, "out_en");
      for (int o = 0; o < NO; o++) if (exp_en[o]) check(out_data[o] == exp_d[o], $sformatf("output %0d", o));
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
