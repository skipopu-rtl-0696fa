// tb_mp_pe -- self-checking testbench of the mixed-precision PE.
// Random FP16 activations and weight pairs are pushed through the PE in both
// modes, one per clock.  The expected products are formed directly with full
// integer multiplies of the hidden-bit significands (no packing), cut to the
// 15 MSBs of the 22-bit product, so any error in the overpacking, the INT5
// recovery or the field extraction shows.  Latency (1 clock) is checked by
// comparing each output with the input applied one clock earlier.
`timescale 1ns/1ps
module tb_mp_pe;
  import skipopu_pkg::*;
  logic clk = 0, ce = 1;
  pe_mode_e mode;
  logic [4:0] fraclen;
  fp16_t x;
  logic [31:0] w;
  pe_prod_t p0, p1;
  int checks = 0, failures = 0;

  mp_pe dut (.clk, .ce, .mode, .fraclen, .x, .w, .prod0(p0), .prod1(p1));
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp16_t rnd_fp16();
    logic [4:0] e;
    e = 5'($urandom_range(1, 30));
    if ($urandom_range(0, 15) == 0) return 16'h0000;
    return {1'($urandom), e, 10'($urandom)};
  endfunction

  function automatic pe_prod_t ref_fp(input fp16_t a, input fp16_t b);
    logic [21:0] pr;
    pe_prod_t r;
    if (a[14:10] == 0 || b[14:10] == 0) return '0;
    pr = 22'({1'b1, a[9:0]}) * 22'({1'b1, b[9:0]});
    r.sign = a[15] ^ b[15];
    r.exp  = 6'(a[14:10]) + 6'(b[14:10]);
    r.sig  = pr[21:7];
    return r;
  endfunction

  function automatic pe_prod_t ref_i4(input fp16_t a, input logic [3:0] q, input logic [4:0] fl);
    int v;
    pe_prod_t r;
    if (a[14:10] == 0) return '0;
    v = int'(signed'(q)) * int'({1'b1, a[9:0]});
    r.sign = a[15] ^ (v < 0);
    r.exp  = 6'(a[14:10]) + 6'(fl);
    r.sig  = 15'((v < 0) ? -v : v);
    return r;
  endfunction

  pe_prod_t e0, e1;
  initial begin
    mode = MODE_FP16; fraclen = 5'd18; x = '0; w = '0;
    @(negedge clk);
    for (int n = 0; n < 4000; n++) begin
      mode    = (n < 2000) ? MODE_FP16 : MODE_INT4;
      fraclen = 5'($urandom_range(0, 31));
      x       = rnd_fp16();
      w       = {rnd_fp16(), rnd_fp16()};
      if (n % 7 == 0) w[31:16] = {1'b0, 5'd15, 10'h3FF};   // largest significand
      if (n % 11 == 0) x = {1'b1, 5'd20, 10'h3FF};
      if (mode == MODE_FP16) begin
        e0 = ref_fp(x, w[15:0]);
        e1 = ref_fp(x, w[31:16]);
      end else begin
        e0 = ref_i4(x, w[3:0], fraclen);
        e1 = ref_i4(x, w[19:16], fraclen);
      end
      @(negedge clk);   // one clock later the products must be out
      checks += 2;
      if (p0 !== e0) begin
        failures++;
        if (failures < 10) $display("mismatch p0 n=%0d mode=%0d x=%h w=%h got=%h exp=%h", n, mode, x, w, p0, e0);
      end
      if (p1 !== e1) begin
        failures++;
        if (failures < 10) $display("mismatch p1 n=%0d mode=%0d x=%h w=%h got=%h exp=%h", n, mode, x, w, p1, e1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
