// tb_kv_subsystem -- self-checking testbench of the KV fetch subsystem.
//
// Small configuration: 4 HBM ports, 2 buffer banks (2 read / 2 write
// ports), 32 tokens, 4 layers, 2-beat K and V entries, 32-bit beats.  An HBM
// model per port accepts requests with random ready and answers in order
// after two clocks with data {port, byte address}, so every delivered beat
// identifies where it came from.
//
// A random routing history is written (layer 0 computes every token).  Then
// attention fetches run for layers 0, 1, 2 (buffer invalid, valid, valid),
// 0 again, then 3 after skipping 2 (invalid), with random kv_out_ready.  For
// every delivered lane it checks: the data equals the token's most recent
// entry (last computed layer <= current, rank by the token-wise mapping) --
// also when it comes from the invariance buffer; that reused tokens come
// from the buffer exactly when the buffer is valid; that every token is
// delivered once per beat; and that buf_used follows the layer sequence.
// The new-entry rank counters (new_*) are checked separately.
`timescale 1ns/1ps
module tb_kv_subsystem;
  localparam int HP = 4, NB = 2, MT = 32, NLY = 4, SP = 2, DW = 32, SLW = 3, AW = 28;
  localparam int TW = $clog2(MT + 1), TIW = $clog2(MT), LW = $clog2(NLY + 1), NL = HP + NB;
  localparam int BTW = $clog2(2 * SP);
  logic clk = 0, rst_n = 0;
  logic hist_we = 0, hist_bit = 0, new_clear = 0, new_commit = 0, attn_start = 0;
  logic [TIW-1:0] hist_tok = 0, new_rank, new_count = 0;
  logic [LW-1:0] hist_layer = 0, new_layer = 0, layer = 0;
  logic [TW-1:0] n_tokens = 0;
  logic busy, buf_used, round_pulse;
  logic [HP-1:0] hbm_req_valid, hbm_req_ready, hbm_rsp_valid;
  logic [AW-1:0] hbm_req_addr [HP];
  logic [DW-1:0] hbm_rsp_data [HP];
  logic kv_out_valid, kv_out_ready;
  logic [NL-1:0] kv_out_lane_v;
  logic [TW-1:0] kv_out_tok [NL];
  logic [BTW-1:0] kv_out_beat;
  logic [DW-1:0] kv_out_data [NL];
  int checks = 0, failures = 0;

  kv_subsystem #(.HBM_PORTS(HP), .BUF_BANKS(NB), .BUF_RD_PORTS(2), .BUF_WR_PORTS(2),
                 .MAX_TOKENS(MT), .LAYERS(NLY), .SPAN(SP), .DW(DW), .SLOT_W(SLW),
                 .ADDR_W(AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  // ---- HBM model: 2-clock in-order pipeline per port ----
  logic [1:0]    pv [HP];
  logic [DW-1:0] pd [HP][2];
  always_ff @(posedge clk) begin
    for (int p = 0; p < HP; p++) begin
      hbm_req_ready[p] <= ($urandom_range(0, 99) < 70);
      pv[p][1] <= pv[p][0]; pd[p][1] <= pd[p][0];
      pv[p][0] <= hbm_req_valid[p] && hbm_req_ready[p];
      pd[p][0] <= {4'(p), hbm_req_addr[p]};
    end
  end
  for (genvar p = 0; p < HP; p++) begin : g_rsp
    assign hbm_rsp_valid[p] = pv[p][1];
    assign hbm_rsp_data[p]  = pd[p][1];
  end
  initial for (int p = 0; p < HP; p++) begin pv[p] = '0; hbm_req_ready[p] = 1'b0; end

  // ---- reference ----
  logic hist [MT][NLY];
  function automatic logic [DW-1:0] expect_data(input int t, input int li, input int beat);
    int ls, rank, port, addr;
    ls = 0;
    for (int l = 0; l <= li; l++) if (hist[t][l]) ls = l;
    rank = 0;
    for (int u = 0; u < t; u++) if (hist[u][ls]) rank++;
    port = rank % HP;
    addr = (ls * (MT / HP) * 2 * SP + (rank / HP) * 2 * SP + beat) * (DW / 8);
    return {4'(port), 28'(addr)};
  endfunction

  int nt;
  task automatic attend(input int li, input logic exp_buf);
    int got [MT][2*SP];
    int rounds;
    for (int t = 0; t < MT; t++) for (int b = 0; b < 2 * SP; b++) got[t][b] = 0;
    layer = LW'(li); n_tokens = TW'(nt);
    attn_start = 1; @(negedge clk); attn_start = 0;
    check(buf_used == exp_buf, $sformatf("buffer use at layer %0d", li));
    rounds = 0;
    while (busy) begin
      kv_out_ready = ($urandom_range(0, 99) < 60);
      if (round_pulse) rounds++;
      if (kv_out_valid && kv_out_ready)
        for (int l = 0; l < NL; l++) if (kv_out_lane_v[l]) begin
          int t; t = int'(kv_out_tok[l]);
          got[t][kv_out_beat]++;
          check(kv_out_data[l] == expect_data(t, li, int'(kv_out_beat)),
                $sformatf("layer %0d token %0d beat %0d lane %0d data %h exp %h", li, t,
                          kv_out_beat, l, kv_out_data[l], expect_data(t, li, int'(kv_out_beat))));
          check((l >= HP) == (exp_buf && !hist[t][li]), "source HBM/buffer");
        end
      @(negedge clk);
    end
    for (int t = 0; t < nt; t++) for (int b = 0; b < 2 * SP; b++)
      check(got[t][b] == 1, $sformatf("token %0d beat %0d delivered %0d times", t, b, got[t][b]));
    check(rounds >= 1, "at least one round");
  endtask

  initial begin
    kv_out_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1; @(negedge clk);
    for (int it = 0; it < 6; it++) begin
      nt = $urandom_range(8, MT - 1);
      for (int t = 0; t < MT; t++)
        for (int l = 0; l < NLY; l++) begin
          hist[t][l] = (l == 0) || ($urandom_range(0, 99) < (it == 5 ? 20 : 65));
          hist_we = 1; hist_tok = TIW'(t); hist_layer = LW'(l); hist_bit = hist[t][l];
          @(negedge clk);
        end
      hist_we = 0;
      attend(0, 1'b0);
      begin
        int reuse; reuse = 0;
        for (int t = 0; t < nt; t++) if (!hist[t][1]) reuse++;
        attend(1, reuse <= NB * (1 << SLW));
      end
      attend(2, 1'b1);
      attend(0, 1'b0);
      attend(3, 1'b0);
    end
    // new-entry ranks
    new_clear = 1; @(negedge clk); new_clear = 0;
    for (int k = 0; k < 20; k++) begin
      int l, c, prev;
      l = $urandom_range(0, NLY - 1); c = $urandom_range(1, 3);
      new_layer = LW'(l); #1 prev = int'(new_rank);
      new_count = TIW'(c); new_commit = 1; @(negedge clk); new_commit = 0;
      #1 check(int'(new_rank) == (prev + c) % MT, "new-entry rank advances");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
