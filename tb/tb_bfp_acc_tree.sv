// tb_bfp_acc_tree -- self-checking testbench of the BFP accumulation tree.
// Random vectors of N unnormalised products (exponents within a window, as
// a real dot product gives) are applied one per clock.  Each result is
// checked two ways: bit-exactly against a model of the BFP rules (align by
// arithmetic shift, integer sum, truncating renormalisation) and, as an
// independent sanity check, against the real-valued sum of the products
// (relative error within 2^-6 unless cancellation is heavy).  The 2-clock
// latency and the throughput of one vector per clock are checked too.
`timescale 1ns/1ps
module tb_bfp_acc_tree;
  import skipopu_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  pe_prod_t in_prod [N];
  fp16_t out_fp16;
  int checks = 0, failures = 0;

  bfp_acc_tree #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real p2(input int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp16_val(input fp16_t f);
    real m;
    if (f[14:10] == 0) return 0.0;
    m = (1024.0 + f[9:0]) / 1024.0 * p2(int'(f[14:10]) - 15);
    return f[15] ? -m : m;
  endfunction

  fp16_t exp_q [$];
  real   rexp_q [$];
  real   rmag_q [$];

  task automatic make_vec();
    int  emax, base;
    longint acc;
    real rs, rm;
    int  lead, e;
    logic [9:0] man;
    fp16_t r;
    base = $urandom_range(14, 30);
    for (int i = 0; i < N; i++) begin
      int t1, t2, t3;
      t1 = $urandom_range(0, 1); t2 = base + $urandom_range(0, 6); t3 = $urandom_range(8192, 32767);
      in_prod[i].sign = t1[0];
      in_prod[i].exp  = t2[5:0];
      in_prod[i].sig  = t3[14:0];
      if ($urandom_range(0, 9) == 0) in_prod[i] = '0;
    end
    emax = 0;
    foreach (in_prod[i]) if (int'(in_prod[i].exp) > emax) emax = in_prod[i].exp;
    acc = 0; rs = 0.0; rm = 0.0;
    foreach (in_prod[i]) begin
      longint v;
      v = in_prod[i].sign ? -longint'(in_prod[i].sig) : longint'(in_prod[i].sig);
      acc += v >>> (emax - int'(in_prod[i].exp));
      rs  += real'(v) * (p2(int'(in_prod[i].exp) - 43));
      rm  += real'(in_prod[i].sig) * (p2(int'(in_prod[i].exp) - 43));
    end
    begin
      longint mag;
      mag = acc < 0 ? -acc : acc;
      lead = -1;
      for (int b = 0; b < 40; b++) if (mag[b]) lead = b;
      e = lead + emax - 43 + 15;
      man = (lead >= 10) ? 10'(mag >> (lead - 10)) : 10'(mag << (10 - lead));
      if (lead < 0 || e <= 0) r = 16'h0;
      else if (e >= 31) r = {acc < 0, 15'h7BFF};
      else r = {acc < 0, 5'(e), man};
    end
    exp_q.push_back(r);
    rexp_q.push_back(rs);
    rmag_q.push_back(rm);
  endtask

  int lat, sent;
  initial begin
    foreach (in_prod[i]) in_prod[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // latency check: single vector
    @(negedge clk);
    make_vec(); in_valid = 1;
    @(negedge clk); in_valid = 0; lat = 1;
    while (!out_valid && lat < 20) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 2) begin failures++; $display("latency %0d, expected 2", lat); end
    void'(exp_q.pop_front()); void'(rexp_q.pop_front()); void'(rmag_q.pop_front());
    // streaming: back-to-back vectors
    sent = 0;
    fork
      begin
        for (int n = 0; n < 3000; n++) begin
          make_vec(); in_valid = 1; @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        int got;
        got = 0;
        while (got < 3000) begin
          @(posedge clk); #1;
          if (out_valid) begin
            fp16_t e;
            real rs, rm, d;
            e = exp_q.pop_front(); rs = rexp_q.pop_front(); rm = rmag_q.pop_front();
            checks++;
            if (out_fp16 !== e) begin
              failures++;
              if (failures < 10) $display("mismatch %0d got %h exp %h", got, out_fp16, e);
            end
            d = fp16_val(out_fp16) - rs; if (d < 0) d = -d;
            if ((rs > rm / 4.0 || rs < -rm / 4.0) && rm < 60000.0) begin
              checks++;
              if (d > (rs < 0 ? -rs : rs) / 64.0) begin
                failures++;
                if (failures < 10) $display("real mismatch %0d got %f exp %f", got, fp16_val(out_fp16), rs);
              end
            end
            got++;
          end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
