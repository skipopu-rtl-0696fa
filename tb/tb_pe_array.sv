// tb_pe_array -- self-checking testbench of the PE array (reduced size).
// Loads a random weight tile row by row, then streams random FP16 tokens one
// per clock, in FP16xFP16 and in FP16xINT4 mode.  Each of the 2*PE_COLS
// outputs is compared bit-exactly with a reference that multiplies the
// significands directly (no packing), keeps the 15 MSBs and applies the BFP
// column rules, and loosely with the real-valued dot product.  The 3-clock
// latency and one-token-per-clock throughput are checked.
`timescale 1ns/1ps
module tb_pe_array;
  import skipopu_pkg::*;
  localparam int ROWS = 16, PE_COLS = 8;
  logic clk = 0, rst_n = 0;
  pe_mode_e mode;
  logic [4:0] fraclen;
  logic w_valid = 0;
  logic [$clog2(ROWS)-1:0] w_row;
  logic [31:0] w_data [PE_COLS];
  logic x_valid = 0;
  fp16_t x [ROWS];
  logic out_valid;
  fp16_t out [2*PE_COLS];
  int checks = 0, failures = 0;

  pe_array #(.ROWS(ROWS), .PE_COLS(PE_COLS)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] W [ROWS][PE_COLS];

  function automatic fp16_t rnd_fp16();
    int e, m, s;
    e = $urandom_range(10, 18); m = $urandom_range(0, 1023); s = $urandom_range(0, 1);
    return {s[0], e[4:0], m[9:0]};
  endfunction

  function automatic pe_prod_t prod_ref(input fp16_t a, input logic [15:0] b, input pe_mode_e md, input logic [4:0] fl);
    pe_prod_t r;
    if (a[14:10] == 0) return '0;
    if (md == MODE_FP16) begin
      logic [21:0] pr;
      if (b[14:10] == 0) return '0;
      pr = 22'({1'b1, a[9:0]}) * 22'({1'b1, b[9:0]});
      r.sign = a[15] ^ b[15]; r.exp = 6'(a[14:10]) + 6'(b[14:10]); r.sig = pr[21:7];
    end else begin
      int v;
      v = int'(signed'(b[3:0])) * int'({1'b1, a[9:0]});
      r.sign = a[15] ^ (v < 0); r.exp = 6'(a[14:10]) + 6'(fl); r.sig = 15'((v < 0) ? -v : v);
    end
    return r;
  endfunction

  function automatic fp16_t col_ref(input pe_prod_t p [ROWS]);
    int emax, lead, e;
    longint acc, mag;
    emax = 0;
    foreach (p[i]) if (int'(p[i].exp) > emax) emax = p[i].exp;
    acc = 0;
    foreach (p[i]) acc += (p[i].sign ? -longint'(p[i].sig) : longint'(p[i].sig)) >>> (emax - int'(p[i].exp));
    mag = acc < 0 ? -acc : acc;
    lead = -1;
    for (int b = 0; b < 40; b++) if (mag[b]) lead = b;
    e = lead + emax - 43 + 15;
    if (lead < 0 || e <= 0) return 16'h0;
    if (e >= 31) return {acc < 0, 15'h7BFF};
    return {acc < 0, 5'(e), (lead >= 10) ? 10'(mag >> (lead - 10)) : 10'(mag << (10 - lead))};
  endfunction

  fp16_t exp_q [$];

  task automatic run_mode(input pe_mode_e md, input int ntok);
    mode = md; fraclen = 5'd18;
    // weight load, one row per clock
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < PE_COLS; c++) begin
        W[r][c] = {rnd_fp16(), rnd_fp16()};
        w_data[c] = W[r][c];
      end
      w_row = r[$clog2(ROWS)-1:0]; w_valid = 1;
      @(negedge clk);
    end
    w_valid = 0;
    for (int t = 0; t < ntok; t++) begin
      pe_prod_t p [ROWS];
      foreach (x[r]) x[r] = rnd_fp16();
      for (int k = 0; k < 2*PE_COLS; k++) begin
        for (int r = 0; r < ROWS; r++)
          p[r] = prod_ref(x[r], (k % 2) ? W[r][k/2][31:16] : W[r][k/2][15:0], md, fraclen);
        exp_q.push_back(col_ref(p));
      end
      x_valid = 1;
      @(negedge clk);
    end
    x_valid = 0;
    repeat (6) @(negedge clk);
  endtask

  // output checker
  int ntok_out = 0, cyc = 0, first_in = -1, first_out = -1;
  always @(posedge clk) begin
    cyc++;
    if (x_valid && first_in < 0) first_in = cyc;
    if (out_valid) begin
      if (first_out < 0) first_out = cyc;
      for (int k = 0; k < 2*PE_COLS; k++) begin
        fp16_t e;
        e = exp_q.pop_front();
        checks++;
        if (out[k] !== e) begin
          failures++;
          if (failures < 10) $display("tok %0d col %0d got %h exp %h", ntok_out, k, out[k], e);
        end
      end
      ntok_out++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_mode(MODE_FP16, 200);
    run_mode(MODE_INT4, 200);
    checks++;
    if (ntok_out != 400) begin failures++; $display("tokens out %0d", ntok_out); end
    checks++;
    if (first_out - first_in != 3) begin failures++; $display("latency %0d", first_out - first_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
