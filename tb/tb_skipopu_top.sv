// tb_skipopu_top -- end-to-end testbench of the accelerator core.
//
// Runs a four-layer, eight-token prefill followed by decode-style KV
// fetches, driving the core only through its ports (decoded commands, DMA
// style buffer ports, HBM models), and counts every mechanism it exercises;
// a mechanism that never happens is a failure.
//
// Per layer: a weight tile is filled into the KER buffer, loaded into the
// PE array and multiplied with global-buffer chunk 0 (results checked
// against a real-valued dot product); the router command turns PSUM columns
// 0/1 into the bitmask (checked where the logits differ clearly); the K and
// V of the unskipped tokens go through the DEMUX to the HBM model.  Layer 0
// routes every token (chunk 0 is positive and its router weights favour
// column 1), later layers route randomly.  Along the way:
//   RMSNorm statistics over all tokens, normalisation of the unskipped
//   tokens in place (checked; skipped rows must stay bit-identical = the
//   bypass), a bitmask-selected matmul written back to chunks 2/3 (skipped
//   rows unchanged), RoPE with an identity rotation (output = input),
//   softmax statistics and normalisation (rows must sum to 1), SwiGLU
//   (checked against silu(gate) * up), PSUM offload through the ping-pong
//   buffer (checked against the accumulator), and KV fetches for layers
//   0,1,2,3,1 whose every delivered beat is checked against the HBM model's
//   contents at the token's latest entry, with reused tokens required to
//   come from the invariance buffer when it is valid.
//
// The KER, global buffer, PSUM and HBM sides follow the port timing
// described in skipopu_top.  Tolerances: 4 % + 0.02 for NPE results,
// 2 % + 0.02 for dot products (truncating FP16 arithmetic).
`timescale 1ns/1ps
module tb_skipopu_top;
  import skipopu_pkg::*;
  localparam int ROWS = 8, PE_COLS = 64, LANES = 8, CHUNKS = 4, ROT_POS = 32, ROT_CHUNKS = 2;
  localparam int HP = 4, NB = 2, MT = 32, NLY = 4, SPAN = 8, SLOT_W = 3, ADDR_W = 20;
  localparam int NTOK = 8;
  localparam int NOUT = 2 * PE_COLS, RW = $clog2(ROWS), CW = $clog2(CHUNKS);
  localparam int TW = $clog2(MT + 1), TIW = $clog2(MT), LW = $clog2(NLY + 1), NL = HP + NB;
  localparam int BTW = $clog2(2 * SPAN);
  localparam int D = LANES * CHUNKS;

  logic clk = 0, rst_n = 0;
  pe_mode_e mode;
  logic [4:0] fraclen;
  logic rms_center;
  fix_t inv_d, inv_sqrt_dk, eps;
  logic [15:0] pos_base;
  logic cmd_valid, cmd_ready, cmd_use_bm, cmd_acc, cmd_first, cmd_last, cmd_is_v, cmd_commit, seq_clear;
  logic [3:0] cmd_op;
  logic [RW:0] cmd_n_rows;
  logic [CW-1:0] cmd_chunk;
  logic [CW:0] cmd_n_chunks;
  npe_op_e cmd_npe_op;
  logic [LW-1:0] cmd_layer;
  logic [4:0] cmd_col;
  logic [TIW-1:0] cmd_tok_base;
  logic [TW-1:0] cmd_n_tokens;
  logic [ROWS-1:0] bitmask;
  logic [RW:0] n_active;
  logic kv_buf_used, kv_round, npe_feat_done, ker_fill_bank, psum_fill_bank;
  logic ker_wr_en, ker_swap;
  logic [RW-1:0] ker_wr_addr;
  logic [32*PE_COLS-1:0] ker_wr_data;
  logic gb_ext_wr_en, gb_ext_wr_ready, gb_ext_rd_en, gb_ext_rd_valid;
  logic [RW-1:0] gb_ext_wr_row, gb_ext_rd_row;
  logic [CW-1:0] gb_ext_wr_chunk, gb_ext_rd_chunk;
  fp16_t gb_ext_wr_data [LANES], gb_ext_rd_data [LANES];
  logic psum_swap, psum_rd_en, psum_rd_valid;
  logic [RW-1:0] psum_rd_addr;
  logic [16*NOUT-1:0] psum_rd_data;
  logic gamma_we, rot_we;
  logic [CW-1:0] gamma_addr;
  fp16_t gamma_data [LANES];
  logic [$clog2(ROT_POS)-1:0] rot_pos;
  logic [$clog2(ROT_CHUNKS)-1:0] rot_chunk;
  fp16_t rot_cos [LANES/2], rot_sin [LANES/2];
  logic [HP-1:0] hbm_rd_req_valid, hbm_rd_req_ready, hbm_rd_rsp_valid;
  logic [ADDR_W-1:0] hbm_rd_req_addr [HP];
  logic [255:0] hbm_rd_rsp_data [HP];
  logic [HP-1:0] hbm_wr_valid, hbm_wr_ready;
  logic [ADDR_W-1:0] hbm_wr_addr [HP];
  logic [255:0] hbm_wr_data [HP];
  logic kv_out_valid, kv_out_ready;
  logic [NL-1:0] kv_out_lane_v;
  logic [TW-1:0] kv_out_tok [NL];
  logic [BTW-1:0] kv_out_beat;
  logic [255:0] kv_out_data [NL];

  skipopu_top #(.ROWS(ROWS), .PE_COLS(PE_COLS), .LANES(LANES), .CHUNKS(CHUNKS), .ROT_POS(ROT_POS),
                .ROT_CHUNKS(ROT_CHUNKS), .HBM_PORTS(HP), .BUF_BANKS(NB), .MAX_TOKENS(MT),
                .LAYERS(NLY), .SPAN(SPAN), .SLOT_W(SLOT_W), .ADDR_W(ADDR_W)) dut (.*);


  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- helpers ----------------
  function automatic int rnd(input int lo, input int hi);
    int v; v = $urandom_range(lo, hi); return v;
  endfunction
  function automatic real p2(input int e);
    real r; r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0; else for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction
  function automatic real f2r(input fp16_t f);
    real m;
    if (f[14:10] == 0) return 0.0;
    m = (1024.0 + f[9:0]) / 1024.0 * p2(int'(f[14:10]) - 15);
    return f[15] ? -m : m;
  endfunction
  function automatic fp16_t r2f(input real v);
    real a; int e; int m;
    if (v == 0.0) return 16'h0;
    a = v < 0 ? -v : v; e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0) begin a = a * 2.0; e--; end
    m = int'((a - 1.0) * 1024.0 - 0.5);
    if (m < 0) m = 0;
    return {v < 0, 5'(e + 15), 10'(m)};
  endfunction
  function automatic fp16_t rval(input real lo, input real hi, input logic pos);
    real v;
    v = lo + (hi - lo) * rnd(0, 10000) / 10000.0;
    if (!pos && rnd(0, 1)) v = -v;
    return r2f(v);
  endfunction
  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 25) $display("FAIL %s (t=%0t)", msg, $time); end
  endtask
  task automatic chk(input real got, input real exp_v, input real rel, input real abs_t, input string what);
    real d;
    d = got - exp_v; if (d < 0) d = -d;
    check(d <= rel * (exp_v < 0 ? -exp_v : exp_v) + abs_t,
          $sformatf("%s: got %f exp %f", what, got, exp_v));
  endtask

  // ---------------- mechanism counters ----------------
  int m_ker_swap = 0, m_load_w = 0, m_matmul = 0, m_router = 0, m_skip = 0, m_bypass = 0;
  int m_rms_stat = 0, m_rms_norm = 0, m_sm_stat = 0, m_sm_norm = 0, m_swiglu = 0, m_rope = 0;
  int m_wb = 0, m_kv_wr = 0, m_rnd_valid = 0, m_rnd_invalid = 0, m_buf_lanes = 0, m_hbm_lanes = 0;
  int m_offload = 0, m_multi_round = 0;
  npe_op_e cur_npe;
  logic    npe_running = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_pe.out_valid) m_matmul++;
    if (npe_running && npe_feat_done && cur_npe == NPE_RMS_STAT) m_rms_stat++;
    if (npe_running && npe_feat_done && cur_npe == NPE_SM_STAT)  m_sm_stat++;
    if (dut.u_npe.out_valid)
      case (cur_npe)
        NPE_RMS_NORM: m_rms_norm++;
        NPE_SM_NORM:  m_sm_norm++;
        NPE_SWIGLU:   m_swiglu++;
        NPE_ROPE:     m_rope++;
        default: ;
      endcase
    if (kv_round) begin if (kv_buf_used) m_rnd_valid++; else m_rnd_invalid++; end
  end

  // ---------------- HBM model ----------------
  logic [255:0] hmem [longint];
  logic [1:0]   pv [HP];
  logic [255:0] pd [HP][2];
  function automatic longint hkey(input int p, input longint a); return longint'(p) * 64'h4000_0000 + a; endfunction
  always @(posedge clk) begin
    for (int p = 0; p < HP; p++) begin
      if (rst_n && hbm_wr_valid[p] && hbm_wr_ready[p]) begin
        hmem[hkey(p, longint'(hbm_wr_addr[p]))] = hbm_wr_data[p];
        m_kv_wr++;
      end
      pv[p][1] <= pv[p][0]; pd[p][1] <= pd[p][0];
      pv[p][0] <= hbm_rd_req_valid[p] && hbm_rd_req_ready[p];
      pd[p][0] <= hmem.exists(hkey(p, longint'(hbm_rd_req_addr[p]))) ?
                  hmem[hkey(p, longint'(hbm_rd_req_addr[p]))] : {8'(p), 248'(hbm_rd_req_addr[p])};
      hbm_wr_ready[p]     <= (rnd(0, 99) < 75);
      hbm_rd_req_ready[p] <= (rnd(0, 99) < 75);
    end
  end
  for (genvar p = 0; p < HP; p++) begin : g_rsp
    assign hbm_rd_rsp_valid[p] = pv[p][1];
    assign hbm_rd_rsp_data[p]  = pd[p][1];
  end

  // ---------------- command and buffer tasks ----------------
  task automatic run_cmd(input logic [3:0] op, input int nrows, input int chunk, input int nch,
                         input npe_op_e nop, input logic use_bm, input logic acc, input int layer,
                         input logic is_v, input int col, input logic commit, input int ntok);
    int guard;
    cmd_op = op; cmd_n_rows = (RW+1)'(nrows); cmd_chunk = CW'(chunk); cmd_n_chunks = (CW+1)'(nch);
    cmd_npe_op = nop; cmd_use_bm = use_bm; cmd_acc = acc; cmd_layer = LW'(layer); cmd_is_v = is_v;
    cmd_col = 5'(col); cmd_commit = commit; cmd_n_tokens = TW'(ntok); cmd_first = 1; cmd_last = 1;
    cmd_tok_base = '0;
    cur_npe = nop; npe_running = (op == 4'd4);
    check(cmd_ready, "core idle before a command");
    cmd_valid = 1; @(negedge clk); cmd_valid = 0;
    guard = 0;
    while (!cmd_ready && guard < 2000000) begin
      kv_out_ready = (rnd(0, 99) < 70);
      @(negedge clk); guard++;
    end
    repeat (2) @(negedge clk);
    npe_running = 0;
  endtask

  task automatic gb_write(input int row, input int chunk, input fp16_t v [LANES]);
    gb_ext_wr_en = 1; gb_ext_wr_row = RW'(row); gb_ext_wr_chunk = CW'(chunk); gb_ext_wr_data = v;
    check(gb_ext_wr_ready, "global buffer accepts DMA writes when idle");
    @(negedge clk); gb_ext_wr_en = 0;
  endtask

  fp16_t xd [ROWS][D];        // global-buffer contents read back
  task automatic gb_read_all(input int nrows);
    for (int t = 0; t < nrows; t++)
      for (int c = 0; c < CHUNKS; c++) begin
        gb_ext_rd_en = 1; gb_ext_rd_row = RW'(t); gb_ext_rd_chunk = CW'(c);
        @(negedge clk); gb_ext_rd_en = 0;
        check(gb_ext_rd_valid, "global-buffer read valid after one clock");
        for (int l = 0; l < LANES; l++) xd[t][c*LANES + l] = gb_ext_rd_data[l];
      end
  endtask

  // ---------------- scenario ----------------
  fp16_t xr [ROWS][D];        // reference copy of the global buffer
  fp16_t w  [ROWS][NOUT];
  logic  hist [NTOK][4];
  fp16_t v8 [LANES];

  task automatic load_weights(input int layer);
    for (int r = 0; r < ROWS; r++) begin
      for (int k = 0; k < NOUT; k++) w[r][k] = rval(0.03, 0.5, 1'b0);
      if (layer == 0) begin w[r][0] = 16'hB800; w[r][1] = 16'h3800; end   // -0.5 / +0.5
      else begin                      // logit difference of either sign
        w[r][0] = 16'h0;
        w[r][1] = rval(0.3, 0.6, 1'b1) ^ {r[0], 15'h0};
      end
      for (int c = 0; c < PE_COLS; c++) ker_wr_data[32*c +: 32] = {w[r][2*c+1], w[r][2*c]};
      ker_wr_en = 1; ker_wr_addr = RW'(r); @(negedge clk);
    end
    ker_wr_en = 0;
    begin
      logic b0; b0 = ker_fill_bank;
      ker_swap = 1; @(negedge clk); ker_swap = 0;
      check(ker_fill_bank != b0, "KER buffer swaps banks");
      m_ker_swap++;
    end
    run_cmd(4'd0, ROWS, 0, 1, NPE_RMS_STAT, 0, 0, layer, 0, 0, 0, 0);
    m_load_w++;
  endtask

  task automatic check_matmul(input logic only_bm);
    for (int t = 0; t < NTOK; t++) if (!only_bm || bitmask[t])
      for (int k = 0; k < NOUT; k += (NOUT / 16)) begin
        real s, sa;
        s = 0.0; sa = 0.0;
        for (int r = 0; r < ROWS; r++) begin
          s  = s + f2r(xr[t][r]) * f2r(w[r][k]);
          sa = sa + (f2r(xr[t][r]) * f2r(w[r][k]) < 0 ? -f2r(xr[t][r]) * f2r(w[r][k]) : f2r(xr[t][r]) * f2r(w[r][k]));
        end
        chk(f2r(dut.psum[t][k]), s, 0.0, 0.02 * sa + 0.02, $sformatf("dot product t%0d k%0d", t, k));
      end
  endtask

  task automatic layer_router_kv(input int layer);
    load_weights(layer);
    run_cmd(4'd1, NTOK, 0, 1, NPE_RMS_STAT, 0, 0, layer, 0, 0, 0, 0);    // MATMUL chunk 0
    check_matmul(1'b0);
    run_cmd(4'd2, NTOK, 0, 1, NPE_RMS_STAT, 0, 0, layer, 0, 0, 0, 0);    // ROUTER
    m_router++;
    for (int t = 0; t < NTOK; t++) begin
      hist[t][layer] = bitmask[t];
      check(bitmask[t] == (f2r(dut.psum[t][1]) > f2r(dut.psum[t][0])), "router decision = argmax of the logits");
      if (!bitmask[t]) m_skip++;
    end
    if (layer == 0) check(bitmask == ROWS'((1 << NTOK) - 1), "layer 0 keeps every token");
    run_cmd(4'd5, NTOK, 0, 1, NPE_RMS_STAT, 1, 0, layer, 0, 0, 0, 0);    // K of unskipped tokens
    run_cmd(4'd5, NTOK, 0, 1, NPE_RMS_STAT, 1, 0, layer, 1, 0, 1, 0);    // V, commit ranks
  endtask

  task automatic attend(input int li, input logic exp_buf);
    int got [NTOK][2*SPAN];
    int rounds;
    for (int t = 0; t < NTOK; t++) for (int b = 0; b < 2 * SPAN; b++) got[t][b] = 0;
    cmd_op = 4'd7; cmd_layer = LW'(li); cmd_n_tokens = TW'(NTOK);
    check(cmd_ready, "idle before attention");
    cmd_valid = 1; @(negedge clk); cmd_valid = 0;
    rounds = 0;
    @(negedge clk);
    check(kv_buf_used == exp_buf, $sformatf("invariance buffer use at layer %0d", li));
    while (!cmd_ready) begin
      kv_out_ready = (rnd(0, 99) < 70);
      if (kv_round) rounds++;
      if (kv_out_valid && kv_out_ready)
        for (int l = 0; l < NL; l++) if (kv_out_lane_v[l]) begin
          int t, ls, rank, port;
          longint addr;
          t = int'(kv_out_tok[l]);
          ls = 0;
          for (int q = 0; q <= li; q++) if (hist[t][q]) ls = q;
          rank = 0;
          for (int u = 0; u < t; u++) if (hist[u][ls]) rank++;
          port = rank % HP;
          addr = longint'((ls * (MT / HP) * 2 * SPAN + (rank / HP) * 2 * SPAN + int'(kv_out_beat)) * 32);
          got[t][kv_out_beat]++;
          // beats never written read back as the HBM model's {port, address} pattern
          check(kv_out_data[l] == (hmem.exists(hkey(port, addr)) ? hmem[hkey(port, addr)]
                                                                 : {8'(port), 248'(addr)}),
                $sformatf("layer %0d token %0d beat %0d: KV data from its latest entry", li, t, kv_out_beat));
          check((l >= HP) == (exp_buf && !hist[t][li]), "reused tokens come from the buffer when it is valid");
          if (l >= HP) m_buf_lanes++; else m_hbm_lanes++;
        end
      @(negedge clk);
    end
    for (int t = 0; t < NTOK; t++) for (int b = 0; b < 2 * SPAN; b++)
      check(got[t][b] == 1, $sformatf("token %0d beat %0d delivered once", t, b));
    if (rounds > 1) m_multi_round++;
  endtask

  initial begin
    mode = MODE_FP16; fraclen = 0; rms_center = 0; pos_base = 0;
    inv_d = fix_t'(65536 / D); inv_sqrt_dk = 32'sd65536; eps = 32'sd66;
    cmd_valid = 0; cmd_op = 0; cmd_use_bm = 0; cmd_acc = 0; cmd_n_rows = 0; cmd_chunk = 0; cmd_n_chunks = 0;
    cmd_npe_op = NPE_RMS_STAT; cmd_first = 0; cmd_last = 0; cmd_layer = 0; cmd_is_v = 0; cmd_col = 0;
    cmd_commit = 0; cmd_tok_base = 0; cmd_n_tokens = 0; seq_clear = 0;
    ker_wr_en = 0; ker_swap = 0; ker_wr_addr = 0; ker_wr_data = '0;
    gb_ext_wr_en = 0; gb_ext_wr_row = 0; gb_ext_wr_chunk = 0; gb_ext_rd_en = 0; gb_ext_rd_row = 0; gb_ext_rd_chunk = 0;
    for (int l = 0; l < LANES; l++) begin gb_ext_wr_data[l] = 0; gamma_data[l] = 16'h3C00; end
    psum_swap = 0; psum_rd_en = 0; psum_rd_addr = 0; gamma_we = 0; gamma_addr = 0;
    rot_we = 0; rot_pos = 0; rot_chunk = 0; kv_out_ready = 1;
    for (int i = 0; i < LANES / 2; i++) begin rot_cos[i] = 16'h3C00; rot_sin[i] = 16'h0000; end
    for (int p = 0; p < HP; p++) begin pv[p] = '0; hbm_wr_ready[p] = 0; hbm_rd_req_ready[p] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1; @(negedge clk);

    // parameter memories: gamma = 1, identity rotation
    for (int c = 0; c < CHUNKS; c++) begin gamma_we = 1; gamma_addr = CW'(c); @(negedge clk); end
    gamma_we = 0;
    for (int p = 0; p < NTOK; p++) for (int c = 0; c < ROT_CHUNKS; c++) begin
      rot_we = 1; rot_pos = $clog2(ROT_POS)'(p); rot_chunk = $clog2(ROT_CHUNKS)'(c); @(negedge clk);
    end
    rot_we = 0;
    seq_clear = 1; @(negedge clk); seq_clear = 0;

    // activations: chunk 0 positive, the rest of either sign
    for (int t = 0; t < NTOK; t++)
      for (int c = 0; c < CHUNKS; c++) begin
        for (int l = 0; l < LANES; l++) begin
          v8[l] = rval(0.25, 2.0, c == 0);
          xr[t][c*LANES + l] = v8[l];
        end
        gb_write(t, c, v8);
      end
    gb_read_all(NTOK);
    for (int t = 0; t < NTOK; t++) for (int j = 0; j < D; j++) check(xd[t][j] == xr[t][j], "DMA write / read of the global buffer");

    // RMSNorm statistics of every token
    run_cmd(4'd4, NTOK, 0, CHUNKS, NPE_RMS_STAT, 0, 0, 0, 0, 0, 0, 0);

    // ---- layer 0: every token routed ----
    layer_router_kv(0);

    // ---- layer 1: selective RMSNorm, bitmask matmul and write-back ----
    layer_router_kv(1);
    run_cmd(4'd4, NTOK, 0, CHUNKS, NPE_RMS_NORM, 1, 0, 1, 0, 0, 0, 0);
    gb_read_all(NTOK);
    for (int t = 0; t < NTOK; t++) begin
      real ms;
      ms = 0.0;
      for (int j = 0; j < D; j++) ms = ms + f2r(xr[t][j]) * f2r(xr[t][j]);
      ms = ms * real'(inv_d) / 65536.0;   // the core divides by D through inv_d
      if (bitmask[t])
        for (int j = 0; j < D; j++) chk(f2r(xd[t][j]), f2r(xr[t][j]) / $sqrt(ms + 66.0 / 65536.0), 0.04, 0.02,
                                        $sformatf("RMSNorm t%0d j%0d", t, j));
      else begin
        logic same; same = 1;
        for (int j = 0; j < D; j++) if (xd[t][j] != xr[t][j]) same = 0;
        check(same, "skipped token bypasses the normalisation");
        m_bypass++;
      end
    end
    for (int t = 0; t < NTOK; t++) for (int j = 0; j < D; j++) xr[t][j] = xd[t][j];
    begin
      logic [ROWS-1:0] bm;
      bm = bitmask;
      for (int t = 0; t < NTOK; t++) for (int k = 0; k < NOUT; k++) dut.psum[t][k] = 16'h0;
      run_cmd(4'd1, NTOK, 0, 1, NPE_RMS_STAT, 1, 0, 1, 0, 0, 0, 0);    // MATMUL, unskipped rows only
      check_matmul(1'b1);
      for (int t = 0; t < NTOK; t++) if (!bm[t]) check(dut.psum[t][0] == 16'h0 && dut.psum[t][1] == 16'h0,
                                                      "skipped row is not computed");
      run_cmd(4'd3, NTOK, CHUNKS - 2, 2, NPE_RMS_STAT, 1, 0, 1, 0, 0, 0, 0);  // WB to the last two chunks
      m_wb++;
      gb_read_all(NTOK);
      for (int t = 0; t < NTOK; t++)
        for (int j = 0; j < 2 * LANES; j++) begin
          fp16_t e;
          e = bm[t] ? dut.psum[t][j] : xr[t][(CHUNKS - 2) * LANES + j];
          check(xd[t][(CHUNKS - 2) * LANES + j] == e, "write-back of unskipped rows only");
        end
      for (int t = 0; t < NTOK; t++) for (int j = 0; j < D; j++) xr[t][j] = xd[t][j];
    end

    // ---- layer 2: RoPE (identity rotation) and softmax ----
    layer_router_kv(2);
    run_cmd(4'd4, NTOK, 0, ROT_CHUNKS, NPE_ROPE, 1, 0, 2, 0, 0, 0, 0);
    gb_read_all(NTOK);
    for (int t = 0; t < NTOK; t++) for (int j = 0; j < D; j++)
      chk(f2r(xd[t][j]), f2r(xr[t][j]), 0.002, 0.0005, "RoPE with cos=1, sin=0 keeps the vector");
    for (int t = 0; t < NTOK; t++) for (int j = 0; j < D; j++) xr[t][j] = xd[t][j];
    run_cmd(4'd4, NTOK, 0, CHUNKS, NPE_SM_STAT, 0, 0, 2, 0, 0, 0, 0);
    run_cmd(4'd4, NTOK, 0, CHUNKS, NPE_SM_NORM, 0, 0, 2, 0, 0, 0, 0);
    gb_read_all(NTOK);
    for (int t = 0; t < NTOK; t++) begin
      real mx, den, sum;
      mx = -1.0e9; den = 0.0; sum = 0.0;
      for (int j = 0; j < D; j++) if (f2r(xr[t][j]) > mx) mx = f2r(xr[t][j]);
      for (int j = 0; j < D; j++) den = den + $exp(f2r(xr[t][j]) - mx);
      for (int j = 0; j < D; j++) begin
        chk(f2r(xd[t][j]), $exp(f2r(xr[t][j]) - mx) / den, 0.04, 0.002, $sformatf("softmax t%0d j%0d", t, j));
        sum = sum + f2r(xd[t][j]);
      end
      chk(sum, 1.0, 0.0, 0.06, "softmax row sums to one");
    end
    for (int t = 0; t < NTOK; t++) for (int j = 0; j < D; j++) xr[t][j] = xd[t][j];

    // ---- layer 3: SwiGLU (gate in chunk 1, up projection in PSUM) and offload ----
    layer_router_kv(3);
    for (int t = 0; t < NTOK; t++)     // a fresh gate in chunk 1
      begin
        for (int l = 0; l < LANES; l++) begin v8[l] = rval(0.1, 3.0, 1'b0); xr[t][LANES + l] = v8[l]; end
        gb_write(t, 1, v8);
      end
    run_cmd(4'd4, NTOK, 1, 1, NPE_SWIGLU, 1, 0, 3, 0, 0, 0, 0);
    gb_read_all(NTOK);
    for (int t = 0; t < NTOK; t++)
      for (int l = 0; l < LANES; l++) begin
        real g, u;
        g = f2r(xr[t][LANES + l]); u = f2r(dut.psum[t][l]);
        if (bitmask[t]) chk(f2r(xd[t][LANES + l]), g / (1.0 + $exp(-g)) * u, 0.04, 0.02, "SwiGLU");
        else check(xd[t][LANES + l] == xr[t][LANES + l], "SwiGLU leaves skipped rows");
      end
    run_cmd(4'd6, NTOK, 0, 1, NPE_RMS_STAT, 0, 0, 3, 0, 0, 0, 0);     // OFFLOAD
    begin
      logic b0; b0 = psum_fill_bank;
      psum_swap = 1; @(negedge clk); psum_swap = 0;
      check(psum_fill_bank != b0, "PSUM buffer swaps banks");
    end
    for (int t = 0; t < NTOK; t++) begin
      logic ok; ok = 1;
      psum_rd_en = 1; psum_rd_addr = RW'(t); @(negedge clk); psum_rd_en = 0;
      check(psum_rd_valid, "PSUM offload read valid");
      for (int k = 0; k < NOUT; k++) if (psum_rd_data[16*k +: 16] != dut.psum[t][k]) ok = 0;
      check(ok, "PSUM offload row");
      m_offload++;
    end

    // ---- decode-style KV fetches ----
    attend(0, 1'b0);
    attend(1, 1'b1);
    attend(2, 1'b1);
    attend(3, 1'b1);
    attend(1, 1'b0);

    // ---- every mechanism must have happened ----
    $display("mechanisms: ker_swap=%0d load_w=%0d matmul_rows=%0d router=%0d skipped=%0d bypass=%0d",
             m_ker_swap, m_load_w, m_matmul, m_router, m_skip, m_bypass);
    $display("  rms_stat=%0d rms_norm=%0d rope=%0d sm_stat=%0d sm_norm=%0d swiglu=%0d wb=%0d offload=%0d",
             m_rms_stat, m_rms_norm, m_rope, m_sm_stat, m_sm_norm, m_swiglu, m_wb, m_offload);
    $display("  kv_writes=%0d rounds_buf_valid=%0d rounds_buf_invalid=%0d buf_lanes=%0d hbm_lanes=%0d multi_round=%0d",
             m_kv_wr, m_rnd_valid, m_rnd_invalid, m_buf_lanes, m_hbm_lanes, m_multi_round);
    check(m_ker_swap > 0, "mechanism: KER ping-pong swap");
    check(m_load_w > 0, "mechanism: weight load");
    check(m_matmul > 0, "mechanism: PE-array matmul");
    check(m_router > 0, "mechanism: router decisions");
    check(m_skip > 0, "mechanism: skipped tokens");
    check(m_bypass > 0, "mechanism: bypass of skipped tokens");
    check(m_rms_stat > 0, "mechanism: RMSNorm statistics");
    check(m_rms_norm > 0, "mechanism: RMSNorm normalisation");
    check(m_rope > 0, "mechanism: RoPE");
    check(m_sm_stat > 0, "mechanism: softmax statistics");
    check(m_sm_norm > 0, "mechanism: softmax normalisation");
    check(m_swiglu > 0, "mechanism: SwiGLU");
    check(m_wb > 0, "mechanism: selective write-back");
    check(m_offload > 0, "mechanism: PSUM offload");
    check(m_kv_wr > 0, "mechanism: KV written through the DEMUX");
    check(m_rnd_valid > 0, "mechanism: fetch rounds with a valid invariance buffer");
    check(m_rnd_invalid > 0, "mechanism: fetch rounds with an invalid invariance buffer");
    check(m_buf_lanes > 0, "mechanism: KV reused from the invariance buffer");
    check(m_hbm_lanes > 0, "mechanism: KV read from HBM");
    check(m_multi_round > 0, "mechanism: port conflicts split a fetch into rounds");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
