// skipopu_top -- the SkipOPU accelerator core.
//
// Instantiates the PE array (64 x 64 mixed-precision PEs with 128 BFP
// accumulation trees), the nonlinear processing engine, the bitmask unit,
// the global buffer, the KER and PSUM ping-pong buffers, a PSUM accumulator,
// the KV subsystem (scheduler, invariance buffer, crossbar) and the KV DEMUX,
// and runs them from a small command sequencer.
//
// Outside this core (brought out as ports): the host and its instruction
// stream (commands arrive already decoded on cmd_*), the DMA engines and the
// DDR4 side (ker_*, gb_ext_*, psum_rd_*), and the HBM controller behind its
// clock-crossing FIFOs (hbm_rd_*, hbm_wr_*).  kv_out_* carries the gathered
// KV beats of a decode attention towards the KER buffer fill logic.
//
// Commands (one at a time; cmd_ready is high when idle):
//   C_LOAD_W   load the ROWS weight rows of the KER buffer read bank into the
//              PE array (one row per clock).
//   C_MATMUL   stream token rows of global-buffer chunk cmd_chunk through the
//              PE array; the 128 results per row are written (cmd_acc = 0)
//              or added (cmd_acc = 1) to the row's PSUM entry.  With
//              cmd_use_bm only the unskipped rows are fetched (bitmask unit).
//   C_ROUTER   rows 0..cmd_n_rows-1: PSUM columns 0 and 1 are the router
//              logits; the bitmask unit takes the decision and the KV
//              history of token cmd_tok_base + row at layer cmd_layer is
//              written.  Clears the previous bitmask.
//   C_WB       write PSUM rows back into global-buffer chunks cmd_chunk and
//              cmd_chunk+1.  With cmd_use_bm only unskipped rows are
//              written, so skipped tokens keep their residual (the bypass).
//   C_NPE      run NPE operation cmd_npe_op over chunks cmd_chunk ..
//              cmd_chunk+cmd_n_chunks-1 (tile rounds, rows in order, only
//              unskipped rows with cmd_use_bm); phase-2 results overwrite
//              the global buffer in place.  SwiGLU takes the gate from the
//              global buffer and the up projection from PSUM half cmd_col[0].
//   C_KV_WR    send the PSUM rows as 8 beats of 256 bits each (a 128-wide
//              column tile cmd_col of the K or V vector) through the DEMUX
//              to their HBM ports.  With cmd_use_bm only unskipped rows are
//              sent (skipped tokens produce no KV in this layer).  A row
//              goes out with rank base + (its rank among the sent rows), the
//              base being the number of entries of the layer committed so
//              far; cmd_commit (set on the last tile written for these
//              tokens) then adds the number of sent rows to it.
//   C_OFFLOAD  copy PSUM rows into the PSUM ping-pong buffer.
//   C_ATTN     fetch the KV cache of layer cmd_layer for cmd_n_tokens tokens.
//
// Choices of this design: the command set and its sequencing, reading
// activations straight from the global buffer (no separate IFM copy), the
// FP16 PSUM accumulator, and the layout of a K/V column tile in HBM beats.
//
// Timing: global-buffer read 1 clock, PE array 3 clocks, NPE 3 clocks; a
// streaming command moves one row per clock.
//
// Lint note: submodule assertions use rst_n as their `disable iff`
// condition, which some linters report as a reset used both asynchronously
// and synchronously; the synthesised reset is purely asynchronous, so the
// warning is left standing.
module skipopu_top
  import skipopu_pkg::*;
#(
  parameter int ROWS       = 64,     // tile rows = PE-array rows = NPE rows
  parameter int PE_COLS    = 64,
  parameter int LANES      = 64,
  parameter int CHUNKS     = 80,     // global-buffer chunks per row (D = 5120)
  parameter int ROT_POS    = 2048,
  parameter int ROT_CHUNKS = 2,
  parameter int HBM_PORTS  = 32,
  parameter int BUF_BANKS  = 16,
  parameter int MAX_TOKENS = 2048,
  parameter int LAYERS     = 40,
  parameter int SPAN       = 256,
  parameter int SLOT_W     = 5,
  parameter int ADDR_W     = 28,
  localparam int NOUT = 2 * PE_COLS,
  localparam int RW   = $clog2(ROWS),
  localparam int CW   = $clog2(CHUNKS),
  localparam int TW   = $clog2(MAX_TOKENS + 1),
  localparam int TIW  = $clog2(MAX_TOKENS),
  localparam int LW   = $clog2(LAYERS + 1),
  localparam int NL   = HBM_PORTS + BUF_BANKS,
  localparam int BTW  = $clog2(2 * SPAN)
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  pe_mode_e    mode,
  input  logic [4:0]  fraclen,
  input  logic        rms_center,
  input  fix_t        inv_d,
  input  fix_t        inv_sqrt_dk,
  input  fix_t        eps,
  input  logic [15:0] pos_base,
  // decoded commands
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic [3:0]  cmd_op,
  input  logic        cmd_use_bm,
  input  logic        cmd_acc,
  input  logic [RW:0] cmd_n_rows,
  input  logic [CW-1:0] cmd_chunk,
  input  logic [CW:0] cmd_n_chunks,
  input  npe_op_e     cmd_npe_op,
  input  logic        cmd_first,
  input  logic        cmd_last,
  input  logic [LW-1:0] cmd_layer,
  input  logic        cmd_is_v,
  input  logic [4:0]  cmd_col,
  input  logic        cmd_commit,
  input  logic [TIW-1:0] cmd_tok_base,
  input  logic [TW-1:0]  cmd_n_tokens,
  input  logic        seq_clear,         // new sequence: KV ranks restart
  // status
  output logic [ROWS-1:0] bitmask,
  output logic [RW:0] n_active,
  output logic        kv_buf_used,
  output logic        kv_round,
  output logic        npe_feat_done,     // a row's RMSNorm / softmax statistics are final
  output logic        ker_fill_bank,     // KER bank the DMA side fills
  output logic        psum_fill_bank,    // PSUM bank the offload writes
  // DMA side: KER buffer fill
  input  logic        ker_wr_en,
  input  logic [RW-1:0] ker_wr_addr,
  input  logic [32*PE_COLS-1:0] ker_wr_data,
  input  logic        ker_swap,
  // DMA side: global buffer
  input  logic        gb_ext_wr_en,
  output logic        gb_ext_wr_ready,
  input  logic [RW-1:0] gb_ext_wr_row,
  input  logic [CW-1:0] gb_ext_wr_chunk,
  input  fp16_t       gb_ext_wr_data [LANES],
  input  logic        gb_ext_rd_en,
  input  logic [RW-1:0] gb_ext_rd_row,
  input  logic [CW-1:0] gb_ext_rd_chunk,
  output logic        gb_ext_rd_valid,
  output fp16_t       gb_ext_rd_data [LANES],
  // DMA side: PSUM ping-pong offload
  input  logic        psum_swap,
  input  logic        psum_rd_en,
  input  logic [RW-1:0] psum_rd_addr,
  output logic        psum_rd_valid,
  output logic [16*NOUT-1:0] psum_rd_data,
  // NPE parameter memories
  input  logic        gamma_we,
  input  logic [$clog2(CHUNKS)-1:0] gamma_addr,
  input  fp16_t       gamma_data [LANES],
  input  logic        rot_we,
  input  logic [$clog2(ROT_POS)-1:0] rot_pos,
  input  logic [$clog2(ROT_CHUNKS)-1:0] rot_chunk,
  input  fp16_t       rot_cos [LANES/2],
  input  fp16_t       rot_sin [LANES/2],
  // HBM read ports (KV fetch)
  output logic [HBM_PORTS-1:0] hbm_rd_req_valid,
  input  logic [HBM_PORTS-1:0] hbm_rd_req_ready,
  output logic [ADDR_W-1:0]    hbm_rd_req_addr [HBM_PORTS],
  input  logic [HBM_PORTS-1:0] hbm_rd_rsp_valid,
  input  logic [255:0]         hbm_rd_rsp_data [HBM_PORTS],
  // HBM write ports (new KV through the DEMUX)
  output logic [HBM_PORTS-1:0] hbm_wr_valid,
  input  logic [HBM_PORTS-1:0] hbm_wr_ready,
  output logic [ADDR_W-1:0]    hbm_wr_addr [HBM_PORTS],
  output logic [255:0]         hbm_wr_data [HBM_PORTS],
  // gathered KV beats
  output logic        kv_out_valid,
  input  logic        kv_out_ready,
  output logic [NL-1:0] kv_out_lane_v,
  output logic [TW-1:0] kv_out_tok [NL],
  output logic [BTW-1:0] kv_out_beat,
  output logic [255:0]  kv_out_data [NL]
);
  localparam logic [3:0] C_LOAD_W = 4'd0, C_MATMUL = 4'd1, C_ROUTER = 4'd2, C_WB = 4'd3,
                         C_NPE = 4'd4, C_KV_WR = 4'd5, C_OFFLOAD = 4'd6, C_ATTN = 4'd7;

  // ---------------- command registers ----------------
  logic          act;            // a command is running
  logic [3:0]    op_q;
  logic          use_bm_q, acc_q, first_q, last_q, is_v_q, commit_q;
  logic [RW:0]   nrows_q;
  logic [CW-1:0] chunk0_q, chunk_q;
  logic [CW:0]   nchunks_q;
  npe_op_e       npe_op_q;
  logic [LW-1:0] layer_q;
  logic [4:0]    col_q;
  logic [TIW-1:0] tokb_q;
  logic [RW:0]   cnt;            // row counter (counter-driven commands)
  logic [2:0]    sub;            // beat within a row (KV_WR), half (WB)
  logic          fetching;       // bitmask-driven row stream running
  logic          drain;          // waiting for the pipeline to empty
  logic [3:0]    drain_cnt;
  logic          attn_wait;
  logic [TW-1:0] cmd_tok_n_q;

  // ---------------- sub-blocks' wires ----------------
  logic          bm_clear, bm_lv, f_start, f_busy, f_valid, f_last;
  logic [RW-1:0] bm_lrow, f_row, f_rank;
  fp16_t         bm_l0, bm_l1;

  logic          gb_we, gb_re, gb_rv;
  logic [RW-1:0] gb_wrow, gb_rrow;
  logic [CW-1:0] gb_wchunk, gb_rchunk;
  fp16_t         gb_wdata [LANES];
  fp16_t         gb_rdata [LANES];

  logic          ker_re, ker_rv;
  logic [RW-1:0] ker_raddr;
  logic [32*PE_COLS-1:0] ker_rdata;
  logic [31:0]   w_row_data [PE_COLS];
  logic          pe_wv, pe_xv, pe_ov;
  logic [RW-1:0] pe_wrow;
  fp16_t         pe_out [NOUT];

  logic          npe_iv, npe_ov;
  logic [RW-1:0] npe_irow, npe_orow;
  logic [CW-1:0] npe_icol;
  fp16_t         npe_b [LANES];
  fp16_t         npe_out [LANES];

  logic          pp_we;
  logic [RW-1:0] pp_waddr;
  logic [16*NOUT-1:0] pp_wdata;

  // ---------------- PSUM accumulator ----------------
  fp16_t psum [ROWS][NOUT];

  // ---------------- row issue ----------------
  // stage 0: a row (and chunk) is issued; stage 1: global-buffer data.
  logic          iss;
  logic [RW-1:0] iss_row, iss_rank;
  logic [CW-1:0] iss_chunk;
  logic          s1_v;
  logic [RW-1:0] s1_row, s1_rank;
  logic [CW-1:0] s1_chunk;
  // result tags (3 clocks after stage 1 for PE and NPE)
  logic [RW-1:0] t_row [3], t_rank [3];
  logic [CW-1:0] t_chunk [3];

  wire chunk_end = (CW+1)'(chunk_q) + 1'b1 == (CW+1)'(chunk0_q) + nchunks_q;
  wire streaming = act && (op_q == C_MATMUL || op_q == C_NPE);
  always_comb begin
    iss = 1'b0; iss_row = '0; iss_rank = '0; iss_chunk = chunk_q;
    if (streaming && !drain) begin
      if (use_bm_q) begin
        iss = f_valid; iss_row = f_row; iss_rank = f_rank;
      end else if (cnt < nrows_q) begin
        iss = 1'b1; iss_row = RW'(cnt); iss_rank = RW'(cnt);
      end
    end
  end

  // ---------------- global buffer ports ----------------
  logic engine_gb_we;
  logic [RW-1:0] eng_wrow;
  logic [CW-1:0] eng_wchunk;
  fp16_t eng_wdata [LANES];
  wire wb_act = act && op_q == C_WB && !drain && cnt < nrows_q;
  wire [RW-1:0] cnt_row = RW'(cnt);
  wire wb_keep = !use_bm_q || bitmask[cnt_row];

  always_comb begin
    engine_gb_we = 1'b0; eng_wrow = '0; eng_wchunk = '0;
    for (int l = 0; l < LANES; l++) eng_wdata[l] = npe_out[l];
    if (npe_ov && npe_op_q != NPE_RMS_STAT && npe_op_q != NPE_SM_STAT) begin
      engine_gb_we = 1'b1; eng_wrow = t_row[2]; eng_wchunk = t_chunk[2];
    end else if (wb_act && wb_keep) begin
      engine_gb_we = 1'b1; eng_wrow = cnt_row; eng_wchunk = chunk_q + CW'(sub[0]);
      for (int l = 0; l < LANES; l++) eng_wdata[l] = psum[cnt_row][int'(sub[0]) * LANES + l];
    end
  end
  assign gb_ext_wr_ready = !engine_gb_we;
  assign gb_we     = engine_gb_we || gb_ext_wr_en;
  assign gb_wrow   = engine_gb_we ? eng_wrow : gb_ext_wr_row;
  assign gb_wchunk = engine_gb_we ? eng_wchunk : gb_ext_wr_chunk;
  assign gb_wdata  = engine_gb_we ? eng_wdata : gb_ext_wr_data;
  assign gb_re     = iss || (gb_ext_rd_en && !streaming);
  assign gb_rrow   = iss ? iss_row : gb_ext_rd_row;
  assign gb_rchunk = iss ? iss_chunk : gb_ext_rd_chunk;
  assign gb_ext_rd_valid = gb_rv && !s1_v;
  assign gb_ext_rd_data  = gb_rdata;

  global_buffer #(.LANES(LANES), .ROWS(ROWS), .CHUNKS(CHUNKS)) u_gb (
    .clk, .rst_n, .wr_en(gb_we), .wr_row(gb_wrow), .wr_chunk(gb_wchunk), .wr_data(gb_wdata),
    .rd_en(gb_re), .rd_row(gb_rrow), .rd_chunk(gb_rchunk), .rd_valid(gb_rv), .rd_data(gb_rdata));

  // ---------------- bitmask unit ----------------
  wire router_act = act && op_q == C_ROUTER && !drain && cnt < nrows_q;
  assign bm_lv   = router_act;
  assign bm_lrow = cnt_row;
  assign bm_l0   = psum[cnt_row][0];
  assign bm_l1   = psum[cnt_row][1];

  bitmask_unit #(.MAX_ROWS(ROWS)) u_bm (
    .clk, .rst_n, .clear(bm_clear), .logit_valid(bm_lv), .logit_row(bm_lrow),
    .logit0(bm_l0), .logit1(bm_l1), .bitmask, .n_active,
    .fetch_start(f_start), .fetch_busy(f_busy), .fetch_valid(f_valid),
    .fetch_row(f_row), .fetch_rank(f_rank), .fetch_last(f_last));

  // ---------------- KER buffer and PE array ----------------
  pingpong_buf #(.W(32 * PE_COLS), .DEPTH(ROWS)) u_ker (
    .clk, .rst_n, .swap(ker_swap), .wr_en(ker_wr_en), .wr_addr(ker_wr_addr),
    .wr_data(ker_wr_data), .rd_en(ker_re), .rd_addr(ker_raddr), .rd_data(ker_rdata),
    .rd_valid(ker_rv), .fill_bank(ker_fill_bank));

  assign ker_re    = act && op_q == C_LOAD_W && !drain && cnt < (RW+1)'(ROWS);
  assign ker_raddr = cnt_row;
  always_ff @(posedge clk) pe_wrow <= ker_raddr;
  assign pe_wv = ker_rv;
  for (genvar c = 0; c < PE_COLS; c++) begin : g_wrow
    assign w_row_data[c] = ker_rdata[32*c +: 32];
  end
  assign pe_xv = s1_v && op_q == C_MATMUL;

  pe_array #(.ROWS(ROWS), .PE_COLS(PE_COLS)) u_pe (
    .clk, .rst_n, .mode, .fraclen, .w_valid(pe_wv), .w_row(pe_wrow), .w_data(w_row_data),
    .x_valid(pe_xv), .x(gb_rdata), .out_valid(pe_ov), .out(pe_out));

  // ---------------- NPE ----------------
  assign npe_iv   = s1_v && op_q == C_NPE;
  assign npe_irow = use_bm_q ? s1_rank : s1_row;
  assign npe_icol = s1_chunk;
  for (genvar l = 0; l < LANES; l++) begin : g_npeb
    assign npe_b[l] = psum[s1_row][int'(col_q[0]) * LANES + l];
  end

  npe #(.LANES(LANES), .MAX_ROWS(ROWS), .GAMMA_WORDS(CHUNKS), .ROT_POS(ROT_POS),
        .ROT_CHUNKS(ROT_CHUNKS)) u_npe (
    .clk, .rst_n, .op(npe_op_q),
    .first_round(first_q && s1_chunk == chunk0_q),
    .last_round(last_q && (CW+1)'(s1_chunk) + 1'b1 == (CW+1)'(chunk0_q) + nchunks_q),
    .rms_center, .inv_d, .inv_sqrt_dk, .eps, .bitmask, .pos_base,
    .in_valid(npe_iv), .in_row(npe_irow), .in_col(npe_icol), .in_a(gb_rdata), .in_b(npe_b),
    .out_valid(npe_ov), .out_row(npe_orow), .out(npe_out), .feat_done(npe_feat_done),
    .gamma_we, .gamma_addr, .gamma_data, .rot_we, .rot_pos, .rot_chunk, .rot_cos, .rot_sin);

  // ---------------- PSUM update and offload ----------------
  always_ff @(posedge clk)
    if (pe_ov)
      for (int k = 0; k < NOUT; k++)
        psum[t_row[2]][k] <= acc_q ? fp16_add(psum[t_row[2]][k], pe_out[k]) : pe_out[k];

  wire off_act = act && op_q == C_OFFLOAD && !drain && cnt < nrows_q;
  assign pp_we    = off_act;
  assign pp_waddr = cnt_row;
  always_comb
    for (int k = 0; k < NOUT; k++) pp_wdata[16*k +: 16] = psum[cnt_row][k];

  pingpong_buf #(.W(16 * NOUT), .DEPTH(ROWS)) u_psum (
    .clk, .rst_n, .swap(psum_swap), .wr_en(pp_we), .wr_addr(pp_waddr), .wr_data(pp_wdata),
    .rd_en(psum_rd_en), .rd_addr(psum_rd_addr), .rd_data(psum_rd_data),
    .rd_valid(psum_rd_valid), .fill_bank(psum_fill_bank));

  // ---------------- KV: DEMUX and fetch subsystem ----------------
  logic          dm_valid, dm_ready;
  logic [255:0]  dm_data;
  logic [TIW-1:0] new_rank;
  logic          new_commit, kv_busy;
  logic [RW:0]   rank_off;      // unskipped rows below the current row
  always_comb begin
    rank_off = '0;
    for (int r = 0; r < ROWS; r++) if (r < int'(cnt_row) && bitmask[r]) rank_off = rank_off + 1'b1;
    if (!use_bm_q) rank_off = cnt;
  end
  wire kv_act = act && op_q == C_KV_WR && !drain && cnt < nrows_q;
  assign dm_valid = kv_act && (!use_bm_q || bitmask[cnt_row]);
  always_comb
    for (int k = 0; k < 16; k++) dm_data[16*k +: 16] = psum[cnt_row][16 * int'(sub) + k];
  // all rows of the command take consecutive ranks; they are committed
  // together after the command's last beat
  logic row_step;   // per-row step of the counter-driven commands (below)
  assign new_commit = kv_act && row_step && commit_q && cnt + 1'b1 == nrows_q;

  kv_demux #(.HBM_PORTS(HBM_PORTS), .MAX_TOKENS(MAX_TOKENS), .SPAN(SPAN), .DW(256),
             .LAYER_W(LW), .ADDR_W(ADDR_W)) u_demux (
    .clk, .rst_n, .in_valid(dm_valid), .in_ready(dm_ready), .in_layer(layer_q),
    .in_rank(new_rank + TIW'(rank_off)), .in_is_v(is_v_q), .in_beat($clog2(SPAN)'({col_q, sub})),
    .in_data(dm_data), .wr_valid(hbm_wr_valid), .wr_ready(hbm_wr_ready),
    .wr_addr(hbm_wr_addr), .wr_data(hbm_wr_data));

  kv_subsystem #(.HBM_PORTS(HBM_PORTS), .BUF_BANKS(BUF_BANKS), .BUF_RD_PORTS(BUF_BANKS),
                 .BUF_WR_PORTS(BUF_BANKS), .MAX_TOKENS(MAX_TOKENS), .LAYERS(LAYERS),
                 .SPAN(SPAN), .DW(256), .SLOT_W(SLOT_W), .ADDR_W(ADDR_W)) u_kv (
    .clk, .rst_n,
    .hist_we(bm_lv), .hist_tok(tokb_q + TIW'(cnt_row)), .hist_layer(layer_q),
    .hist_bit(fp16_gt(bm_l1, bm_l0)),
    .new_clear(seq_clear), .new_commit, .new_count(use_bm_q ? TIW'(n_active) : TIW'(nrows_q)), .new_layer(layer_q), .new_rank,
    .attn_start(act && op_q == C_ATTN && !attn_wait), .layer(layer_q), .n_tokens(cmd_tok_n_q),
    .busy(kv_busy), .buf_used(kv_buf_used), .round_pulse(kv_round),
    .hbm_req_valid(hbm_rd_req_valid), .hbm_req_ready(hbm_rd_req_ready),
    .hbm_req_addr(hbm_rd_req_addr), .hbm_rsp_valid(hbm_rd_rsp_valid),
    .hbm_rsp_data(hbm_rd_rsp_data),
    .kv_out_valid, .kv_out_ready, .kv_out_lane_v, .kv_out_tok, .kv_out_beat, .kv_out_data);

  // ---------------- sequencer ----------------
  assign cmd_ready = !act;
  assign bm_clear  = cmd_valid && cmd_ready && cmd_op == C_ROUTER;
  assign f_start   = (cmd_valid && cmd_ready && cmd_use_bm &&
                      (cmd_op == C_MATMUL || cmd_op == C_NPE)) ||
                     (streaming && use_bm_q && !drain && op_q == C_NPE && f_valid && f_last && !chunk_end);

  // per-row step of the counter-driven commands
  assign row_step = (op_q == C_LOAD_W) || (op_q == C_ROUTER) || (op_q == C_OFFLOAD) ||
                  (op_q == C_MATMUL && !use_bm_q) || (op_q == C_NPE && !use_bm_q) ||
                  (op_q == C_WB && sub == 3'd1) || (op_q == C_KV_WR && ((dm_ready && sub == 3'd7) || (use_bm_q && !bitmask[cnt_row])));
  wire [RW:0] row_end = (op_q == C_LOAD_W) ? (RW+1)'(ROWS) : nrows_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      act <= 1'b0; op_q <= '0; use_bm_q <= 1'b0; acc_q <= 1'b0; first_q <= 1'b0; last_q <= 1'b0;
      is_v_q <= 1'b0; commit_q <= 1'b0; nrows_q <= '0; chunk0_q <= '0; chunk_q <= '0;
      nchunks_q <= '0; npe_op_q <= NPE_RMS_STAT; layer_q <= '0; col_q <= '0; tokb_q <= '0;
      cnt <= '0; sub <= '0; fetching <= 1'b0; drain <= 1'b0; drain_cnt <= '0; attn_wait <= 1'b0;
      cmd_tok_n_q <= '0;
      s1_v <= 1'b0; s1_row <= '0; s1_rank <= '0; s1_chunk <= '0;
    end else begin
      s1_v <= iss; s1_row <= iss_row; s1_rank <= iss_rank; s1_chunk <= iss_chunk;
      if (cmd_valid && cmd_ready) begin
        act <= 1'b1; op_q <= cmd_op; use_bm_q <= cmd_use_bm; acc_q <= cmd_acc;
        first_q <= cmd_first; last_q <= cmd_last; is_v_q <= cmd_is_v; commit_q <= cmd_commit;
        nrows_q <= cmd_n_rows; chunk0_q <= cmd_chunk; chunk_q <= cmd_chunk;
        nchunks_q <= cmd_n_chunks; npe_op_q <= cmd_npe_op; layer_q <= cmd_layer;
        col_q <= cmd_col; tokb_q <= cmd_tok_base; cmd_tok_n_q <= cmd_n_tokens;
        cnt <= '0; sub <= '0; drain <= 1'b0; drain_cnt <= '0; attn_wait <= 1'b0;
        fetching <= cmd_use_bm && (cmd_op == C_MATMUL || cmd_op == C_NPE);
      end else if (act) begin
        if (op_q == C_ATTN) begin
          attn_wait <= 1'b1;
          if (attn_wait && !kv_busy) act <= 1'b0;
        end else if (drain) begin
          drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == 4'd7) act <= 1'b0;
        end else if (streaming && use_bm_q) begin
          // bitmask-driven: a round ends with fetch_last (or an empty bitmask)
          if ((f_valid && f_last) || (!f_busy && !f_valid && !f_start && fetching)) begin
            if (chunk_end || op_q == C_MATMUL || n_active == '0)
              drain <= 1'b1;
            else chunk_q <= chunk_q + 1'b1;
          end
        end else begin
          if (op_q == C_WB || op_q == C_KV_WR) begin
            if (op_q == C_WB || dm_ready || row_step) sub <= row_step ? '0 : sub + 1'b1;
          end
          if (row_step) begin
            if (cnt + 1'b1 == row_end) begin
              if (op_q == C_NPE && !chunk_end) begin
                cnt <= '0; chunk_q <= chunk_q + 1'b1;
              end else begin
                cnt <= cnt + 1'b1; drain <= 1'b1;
              end
            end else cnt <= cnt + 1'b1;
          end
        end
      end
    end

  // result tags: t_row[2] belongs to the PE / NPE output of this clock
  always_ff @(posedge clk) begin
    t_row[0] <= s1_row; t_chunk[0] <= s1_chunk; t_rank[0] <= npe_irow;
    t_rank[1] <= t_rank[0]; t_rank[2] <= t_rank[1];
    t_row[1] <= t_row[0]; t_chunk[1] <= t_chunk[0];
    t_row[2] <= t_row[1]; t_chunk[2] <= t_chunk[1];
  end

  a_npe_row: assert property (@(posedge clk) npe_ov |-> npe_orow == t_rank[2]);

endmodule
