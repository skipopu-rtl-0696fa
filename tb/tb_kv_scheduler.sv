// tb_kv_scheduler -- self-checking testbench of the KV fetch scheduler.
//
// Configuration of the paper's worked example: 4 HBM ports and 2 buffer
// banks with 2 read and 2 write ports.
//  1. Directed: the 16-token example with the buffer valid must give the
//     rounds {0,1,2,3,4} {5,6,7,8,9} {a,b,c,d,e,f}, with unskipped tokens
//     on HBM and reused ones on the buffer; with the buffer invalid it must
//     give {0,1,2} {3,4,5,6} {7,8} {9,a,b} {c,d} {e,f}.
//  2. Random: random bitmasks and ports for up to 64 tokens (buffer banks
//     in write order or, every other run, random); checks that every
//     token is fetched exactly once and from the right source, that no round
//     reuses an HBM port or bank or exceeds the port limits, that each round
//     is maximal (its next token would conflict), that write banks and slots
//     follow the round-robin allocation and writes name the right crossbar
//     input, and that the scan takes one clock per token plus two per round.
// Random round_ready back-pressure is applied in part 2.
`timescale 1ns/1ps
module tb_kv_scheduler;
  localparam int HP = 4, NB = 2, RP = 2, WP = 2, MT = 64, SLW = 5, AW = 28;
  localparam int TW = $clog2(MT + 1), PW = 2, BW = 1, SW = $clog2(HP + NB);
  logic clk = 0, rst_n = 0, start = 0, buf_valid = 0, busy, wr_overflow;
  logic [TW-1:0] n_tokens, tok;
  logic tok_take, info_act, info_act_next;
  logic [PW-1:0] info_port;
  logic [AW-1:0] info_addr;
  logic [BW-1:0] info_bank;
  logic [SLW-1:0] info_slot;
  logic round_valid, round_ready, round_last;
  logic [HP-1:0] hbm_v;  logic [TW-1:0] hbm_tok [HP]; logic [AW-1:0] hbm_addr [HP];
  logic [NB-1:0] buf_v;  logic [TW-1:0] buf_tok [NB]; logic [SLW-1:0] buf_slot [NB];
  logic [NB-1:0] wr_v;   logic [SW-1:0] wr_src [NB];  logic [TW-1:0] wr_tok [NB];
  logic [SLW-1:0] wr_slot [NB];
  int checks = 0, failures = 0;

  kv_scheduler #(.HBM_PORTS(HP), .BUF_BANKS(NB), .BUF_RD_PORTS(RP), .BUF_WR_PORTS(WP),
                 .MAX_TOKENS(MT), .SLOT_W(SLW), .ADDR_W(AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // token table
  logic act [MT], actn [MT];
  int   port [MT], bank [MT], slot [MT];
  int   n;
  assign info_act      = act[tok[5:0]];
  assign info_act_next = actn[tok[5:0]];
  assign info_port     = PW'(port[tok[5:0]]);
  assign info_addr     = AW'(tok * 1000 + 7);
  assign info_bank     = BW'(bank[tok[5:0]]);
  assign info_slot     = SLW'(slot[tok[5:0]]);

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  // collected rounds
  logic [MT-1:0] rnd_set [64];
  int nrounds, wr_seen, rdy_pct;

  task automatic run(input int ntok, input logic bv, output int cycles);
    int c;
    nrounds = 0; wr_seen = 0;
    n_tokens = TW'(ntok); buf_valid = bv;
    start = 1; @(negedge clk); start = 0;
    c = 1;
    while (busy) begin
      round_ready = ($urandom_range(0, 99) < rdy_pct);
      if (round_valid && round_ready) begin
        logic [MT-1:0] s; int nr, nw;
        s = '0; nr = 0; nw = 0;
        for (int p = 0; p < HP; p++) if (hbm_v[p]) begin
          int t; t = int'(hbm_tok[p]);
          check(!s[t], "token twice in round");
          s[t] = 1;
          check(act[t] || !bv, "HBM token must be unskipped (buffer valid)");
          check(port[t] == p, "HBM token on its port");
          check(hbm_addr[p] == AW'(t * 1000 + 7), "HBM address carried");
        end
        for (int b = 0; b < NB; b++) if (buf_v[b]) begin
          int t; t = int'(buf_tok[b]);
          check(!s[t], "token twice in round"); s[t] = 1; nr++;
          check(bv && !act[t], "buffer token must be reused and buffer valid");
          check(bank[t] == b && slot[t] == int'(buf_slot[b]), "buffer bank/slot");
        end
        // the k-th write of the layer goes to bank k mod NB, slot k div NB,
        // in token order
        for (int t = 0; t < ntok; t++) if (s[t] && !actn[t]) begin
          int b; b = wr_seen % NB; nw++;
          check(wr_v[b] && int'(wr_tok[b]) == t && int'(wr_slot[b]) == wr_seen / NB,
                "round-robin write bank/slot");
          check(int'(wr_src[b]) == ((act[t] || !bv) ? port[t] : HP + bank[t]), "write source");
          wr_seen++;
        end
        check($countones(wr_v) == nw, "no extra writes");
        check(nr <= RP && nw <= WP, "port limits");
        rnd_set[nrounds] = s; nrounds++;
        check(round_last == s[ntok-1], "last flag");
      end
      @(negedge clk); c++;
    end
    round_ready = 1;
    cycles = c;
  endtask

  function automatic int rnd_bank();
    int b; b = $urandom_range(0, NB - 1); return b;
  endfunction
  function automatic logic [MT-1:0] mk(input int lo, input int hi);
    logic [MT-1:0] m; m = '0;
    for (int i = lo; i <= hi; i++) m[i] = 1'b1;
    return m;
  endfunction

  initial begin
    int cyc;
    int fig_port [16] = '{0,1,2,2,0,1,3,0,1,1,2,3,0,3,0,1};
    int orange [10]   = '{0,1,2,6,7,9,10,13,14,15};
    int gray_nx [5]   = '{2,7,9,10,12};
    logic [MT-1:0] exp_a [3], exp_b [6];
    round_ready = 1; n_tokens = 0; rdy_pct = 100;
    for (int i = 0; i < MT; i++) begin act[i] = 0; actn[i] = 1; port[i] = 0; bank[i] = 0; slot[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1; @(negedge clk);

    // ---- 1. the worked example ----
    begin
      int g; g = 0;
      for (int i = 0; i < 16; i++) port[i] = fig_port[i];
      foreach (orange[k]) act[orange[k]] = 1;
      foreach (gray_nx[k]) actn[gray_nx[k]] = 0;
      for (int i = 0; i < 16; i++) if (!act[i]) begin bank[i] = g % NB; slot[i] = g / NB; g++; end
    end
    exp_a[0] = mk(0, 4); exp_a[1] = mk(5, 9); exp_a[2] = mk(10, 15);
    exp_b[0] = mk(0, 2); exp_b[1] = mk(3, 6); exp_b[2] = mk(7, 8);
    exp_b[3] = mk(9, 11); exp_b[4] = mk(12, 13); exp_b[5] = mk(14, 15);
    run(16, 1'b1, cyc);
    check(nrounds == 3, "valid case: 3 rounds");
    for (int r = 0; r < 3; r++) check(rnd_set[r] == exp_a[r], $sformatf("valid case round %0d", r));
    check(cyc == 16 + 2 * 3 + 1, $sformatf("valid case cycles %0d", cyc));
    run(16, 1'b0, cyc);
    check(nrounds == 6, "invalid case: 6 rounds");
    for (int r = 0; r < 6; r++) check(rnd_set[r] == exp_b[r], $sformatf("invalid case round %0d", r));
    check(cyc == 16 + 2 * 6 + 1, $sformatf("invalid case cycles %0d", cyc));

    // ---- 2. random ----
    for (int it = 0; it < 300; it++) begin
      int g, nt, rr; logic bv;
      nt = $urandom_range(1, MT - 1);
      bv = $urandom_range(0, 1);
      rr = $urandom_range(0, 1);
      g = 0;
      for (int i = 0; i < MT; i++) begin
        act[i]  = ($urandom_range(0, 99) < 70);
        actn[i] = ($urandom_range(0, 99) < 70);
        port[i] = $urandom_range(0, HP - 1);
        if (!act[i]) begin bank[i] = (it % 2) ? rnd_bank() : g % NB; slot[i] = (g / NB) % 32; g++; end
      end
      rdy_pct = rr ? 40 : 100;
      run(nt, bv, cyc);
      begin
        logic [MT-1:0] all; all = '0;
        for (int r = 0; r < nrounds; r++) begin
          check((all & rnd_set[r]) == '0, "token in two rounds");
          all |= rnd_set[r];
          // rounds are contiguous index ranges
          check(((rnd_set[r] >> $clog2(rnd_set[r] & -rnd_set[r])) & ((rnd_set[r] >> $clog2(rnd_set[r] & -rnd_set[r])) + 1)) == '0,
                "round is a contiguous token range");
        end
        check(all == mk(0, nt - 1), "every token fetched once");
        if (!rr) check(cyc == nt + 2 * nrounds + 1, "one clock per token plus two per round");
        // maximality: the first token of each round r>0 conflicts with round r-1
        for (int r = 1; r < nrounds; r++) begin
          int f, nr, nw; logic conf; logic [HP-1:0] pu; logic [NB-1:0] bu;
          f = $clog2(rnd_set[r] & -rnd_set[r]);
          pu = '0; bu = '0; nr = 0; nw = 0;
          for (int t = 0; t < nt; t++) if (rnd_set[r-1][t]) begin
            if (act[t] || !bv) pu[port[t]] = 1; else begin bu[bank[t]] = 1; nr++; end
            if (!actn[t]) nw++;
          end
          conf = 0;
          if ((act[f] || !bv) && pu[port[f]]) conf = 1;
          if (!(act[f] || !bv) && (bu[bank[f]] || nr == RP)) conf = 1;
          if (!actn[f] && nw == WP) conf = 1;
          check(conf, $sformatf("round %0d closed without conflict", r - 1));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
