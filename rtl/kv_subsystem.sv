// kv_subsystem -- KV cache fetch path for decode attention with skipped
// layers: token location bookkeeping, fetch scheduler, invariance buffer
// and write crossbar.
//
// Bookkeeping.  A history memory keeps, per context token, one bit per layer
// telling whether the token was computed (unskipped) in that layer.  The KV
// entry a token presents to layer i is the one of the last layer l <= i in
// which it was computed; that entry sits in HBM at the token-wise mapping of
// (l, rank of the token among the tokens computed in layer l).  Because the
// scheduler walks the tokens in index order, those ranks are simply running
// per-layer counters of the history bits already passed.  If a token was
// computed in no layer up to i, the layer-0 entry is used (the first layer's
// KV is assumed to exist for every token; the paper does not say).
// A second set of per-layer counters gives the rank base for newly computed
// KV entries (new_* port) for the DEMUX that writes them to HBM; new_commit
// adds the number of entries just written.
//
// Fetch.  attn_start launches the fetch for layer `layer` over n_tokens
// context tokens.  The invariance buffer is valid for this layer exactly
// when the previous fetch was for layer-1 and fitted in the buffer; a
// skipped attention in between therefore invalidates it.  kv_scheduler
// forms the rounds; every round moves the 2*SPAN beats of its entries
// (K then V) beat by beat: all its HBM ports and buffer banks are read in
// parallel, the gathered lanes go to the PE side on kv_out_*, and through
// kv_xbar the entries the next layer reuses are written into the other
// parity half of the buffer.  The buffer location of every such token is
// recorded for the next layer.
//
// HBM side: per port, a read request (valid/ready, byte address of one
// 256-bit beat) and an in-order response (valid, data).  These sit on the
// core side of the clock-crossing FIFOs.
//
// Timing: a beat completes when the slowest port of the round has answered;
// the next beat's requests are issued after that (no request pipelining
// across beats -- a simplification of this design; the paper does not
// describe the request engine).  kv_out holds its beat until kv_out_ready.
module kv_subsystem #(
  parameter int HBM_PORTS    = 32,
  parameter int BUF_BANKS    = 16,
  parameter int BUF_RD_PORTS = 16,
  parameter int BUF_WR_PORTS = 16,
  parameter int MAX_TOKENS   = 2048,
  parameter int LAYERS       = 40,
  parameter int SPAN         = 256,
  parameter int DW           = 256,
  parameter int SLOT_W       = 5,
  parameter int ADDR_W       = 28,
  localparam int TW  = $clog2(MAX_TOKENS + 1),
  localparam int TIW = $clog2(MAX_TOKENS),
  localparam int LW  = $clog2(LAYERS + 1),
  localparam int NL  = HBM_PORTS + BUF_BANKS,
  localparam int BTW = $clog2(2 * SPAN)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // routing history: bit `layer` of token `tok`
  input  logic                 hist_we,
  input  logic [TIW-1:0]       hist_tok,
  input  logic [LW-1:0]        hist_layer,
  input  logic                 hist_bit,
  // rank of a newly computed KV entry of layer new_layer
  input  logic                 new_clear,     // start of a sequence
  input  logic                 new_commit,    // new_count entries of new_layer were written
  input  logic [TIW-1:0]       new_count,
  input  logic [LW-1:0]        new_layer,
  output logic [TIW-1:0]       new_rank,
  // attention fetch command
  input  logic                 attn_start,
  input  logic [LW-1:0]        layer,
  input  logic [TW-1:0]        n_tokens,
  output logic                 busy,
  output logic                 buf_used,      // the running fetch reads the buffer
  output logic                 round_pulse,   // a round starts
  // HBM read ports
  output logic [HBM_PORTS-1:0] hbm_req_valid,
  input  logic [HBM_PORTS-1:0] hbm_req_ready,
  output logic [ADDR_W-1:0]    hbm_req_addr [HBM_PORTS],
  input  logic [HBM_PORTS-1:0] hbm_rsp_valid,
  input  logic [DW-1:0]        hbm_rsp_data [HBM_PORTS],
  // gathered KV beats towards the PE array
  output logic                 kv_out_valid,
  input  logic                 kv_out_ready,
  output logic [NL-1:0]        kv_out_lane_v,
  output logic [TW-1:0]        kv_out_tok  [NL],
  output logic [BTW-1:0]       kv_out_beat,   // < SPAN: K, >= SPAN: V
  output logic [DW-1:0]        kv_out_data [NL]
);
  localparam int PW  = (HBM_PORTS <= 2) ? 1 : $clog2(HBM_PORTS);
  localparam int BW  = (BUF_BANKS <= 2) ? 1 : $clog2(BUF_BANKS);
  localparam int SW  = $clog2(NL);
  localparam int BAW = 1 + SLOT_W + BTW;

  // ---------------- bookkeeping memories ----------------
  logic [LAYERS-1:0]     hist [MAX_TOKENS];
  logic [BW+SLOT_W-1:0]  bloc [2][MAX_TOKENS];
  logic [TIW-1:0]        scnt [LAYERS];    // scan ranks
  logic [TIW-1:0]        wcnt [LAYERS];    // new-entry ranks

  always_ff @(posedge clk)
    if (hist_we) hist[hist_tok][hist_layer] <= hist_bit;

  assign new_rank = wcnt[new_layer];
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) for (int l = 0; l < LAYERS; l++) wcnt[l] <= '0;
    else if (new_clear) for (int l = 0; l < LAYERS; l++) wcnt[l] <= '0;
    else if (new_commit) wcnt[new_layer] <= wcnt[new_layer] + new_count;

  // ---------------- scheduler and token information ----------------
  logic [LW-1:0] layer_q;
  logic          bufok_q;
  logic [LW-1:0] buf_layer_q;
  logic [TW-1:0] tok;
  logic          tok_take, sch_busy, sch_ovf;
  logic          i_act, i_actn;
  logic [PW-1:0] i_port;
  logic [ADDR_W-1:0] i_addr;
  logic [BW-1:0] i_bank;
  logic [SLOT_W-1:0] i_slot;
  logic [LAYERS-1:0] h;
  logic [LW-1:0] lstar;
  logic [TIW-1:0] rank;
  logic [PW-1:0] mport;

  always_comb begin
    h      = (tok >= TW'(MAX_TOKENS)) ? '0 : hist[tok[TIW-1:0]];
    i_act  = h[layer_q];
    i_actn = (int'(layer_q) + 1 < LAYERS) ? h[layer_q + 1'b1] : 1'b1;
    lstar  = '0;
    for (int l = 0; l < LAYERS; l++) if (h[l] && l <= int'(layer_q)) lstar = LW'(l);
    rank   = scnt[lstar];
    {i_bank, i_slot} = bloc[layer_q[0]][tok[TIW-1:0]];
  end

  kv_addr_map #(.HBM_PORTS(HBM_PORTS), .MAX_TOKENS(MAX_TOKENS), .SPAN(SPAN),
                .BEAT_BYTES(DW / 8), .LAYER_W(LW), .ADDR_W(ADDR_W)) u_map (
    .layer(lstar), .rank, .is_v(1'b0), .beat('0), .port(mport), .addr(i_addr));
  assign i_port = mport;

  logic                 rnd_valid, rnd_ready, rnd_last;
  logic [HBM_PORTS-1:0] r_hbm_v;  logic [TW-1:0] r_hbm_tok [HBM_PORTS];
  logic [ADDR_W-1:0]    r_hbm_addr [HBM_PORTS];
  logic [BUF_BANKS-1:0] r_buf_v;  logic [TW-1:0] r_buf_tok [BUF_BANKS];
  logic [SLOT_W-1:0]    r_buf_slot [BUF_BANKS];
  logic [BUF_BANKS-1:0] r_wr_v;   logic [SW-1:0] r_wr_src [BUF_BANKS];
  logic [TW-1:0]        r_wr_tok [BUF_BANKS];
  logic [SLOT_W-1:0]    r_wr_slot [BUF_BANKS];

  kv_scheduler #(.HBM_PORTS(HBM_PORTS), .BUF_BANKS(BUF_BANKS), .BUF_RD_PORTS(BUF_RD_PORTS),
                 .BUF_WR_PORTS(BUF_WR_PORTS), .MAX_TOKENS(MAX_TOKENS), .SLOT_W(SLOT_W),
                 .ADDR_W(ADDR_W)) u_sched (
    .clk, .rst_n, .start(attn_start), .n_tokens,
    .buf_valid(bufok_q && buf_layer_q == layer), .busy(sch_busy), .wr_overflow(sch_ovf),
    .tok, .tok_take, .info_act(i_act), .info_act_next(i_actn), .info_port(i_port),
    .info_addr(i_addr), .info_bank(i_bank), .info_slot(i_slot),
    .round_valid(rnd_valid), .round_ready(rnd_ready), .round_last(rnd_last),
    .hbm_v(r_hbm_v), .hbm_tok(r_hbm_tok), .hbm_addr(r_hbm_addr),
    .buf_v(r_buf_v), .buf_tok(r_buf_tok), .buf_slot(r_buf_slot),
    .wr_v(r_wr_v), .wr_src(r_wr_src), .wr_tok(r_wr_tok), .wr_slot(r_wr_slot));

  // running scan ranks
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) for (int l = 0; l < LAYERS; l++) scnt[l] <= '0;
    else if (attn_start) for (int l = 0; l < LAYERS; l++) scnt[l] <= '0;
    else if (tok_take) for (int l = 0; l < LAYERS; l++) scnt[l] <= scnt[l] + TIW'(h[l]);

  // ---------------- round execution ----------------
  typedef enum logic [2:0] {E_IDLE, E_ISSUE, E_WAIT, E_OUT, E_DONE} est_e;
  est_e est;
  logic [BTW-1:0]       beat;
  logic [HBM_PORTS-1:0] acc_q, got_q;
  logic [DW-1:0]        hd_q [HBM_PORTS];
  logic [DW-1:0]        bd_q [BUF_BANKS];
  logic                 bgot_q, last_q, bufv_run;
  logic [BUF_BANKS-1:0] b_rd_en, b_rd_valid, x_en, x_out_en;
  logic [BAW-1:0]       b_rd_addr [BUF_BANKS];
  logic [DW-1:0]        b_rd_data [BUF_BANKS];
  logic [BAW-1:0]       b_wr_addr [BUF_BANKS], wa_q [BUF_BANKS];
  logic [DW-1:0]        x_in [NL];
  logic [DW-1:0]        x_out [BUF_BANKS];

  // the accepted round is held here while its beats move
  logic [HBM_PORTS-1:0] r_hbm_v_q;  logic [TW-1:0] r_hbm_tok_q [HBM_PORTS];
  logic [ADDR_W-1:0]    r_hbm_addr_q [HBM_PORTS];
  logic [BUF_BANKS-1:0] r_buf_v_q;  logic [TW-1:0] r_buf_tok_q [BUF_BANKS];
  logic [SLOT_W-1:0]    r_buf_slot_q [BUF_BANKS];
  logic [BUF_BANKS-1:0] r_wr_v_q;   logic [SW-1:0] r_wr_src_q [BUF_BANKS];
  logic [SLOT_W-1:0]    r_wr_slot_q [BUF_BANKS];
  logic                 rd_issued;

  assign busy      = sch_busy || (est != E_IDLE);
  assign buf_used  = bufv_run;
  assign rnd_ready = (est == E_IDLE) || (est == E_DONE);
  assign round_pulse = rnd_valid && rnd_ready;

  for (genvar p = 0; p < HBM_PORTS; p++) begin : g_hreq
    assign hbm_req_valid[p] = (est == E_ISSUE) && r_hbm_v_q[p] && !acc_q[p];
    assign hbm_req_addr[p]  = r_hbm_addr_q[p] + ADDR_W'(beat) * ADDR_W'(DW / 8);
    assign x_in[p]          = hd_q[p];
  end
  for (genvar b = 0; b < BUF_BANKS; b++) begin : g_buf
    assign b_rd_en[b]          = (est == E_ISSUE) && !bgot_q && r_buf_v_q[b] && !rd_issued;
    assign b_rd_addr[b]        = {layer_q[0], r_buf_slot_q[b], beat};
    assign x_in[HBM_PORTS + b] = bd_q[b];
    assign x_en[b]             = (est == E_OUT) && kv_out_ready && r_wr_v_q[b];
    assign b_wr_addr[b]        = wa_q[b];
  end


  always_ff @(posedge clk)
    if (rnd_valid && rnd_ready) begin
      r_hbm_tok_q <= r_hbm_tok;  r_hbm_addr_q <= r_hbm_addr;
      r_buf_tok_q <= r_buf_tok;  r_buf_slot_q <= r_buf_slot;
      r_wr_src_q  <= r_wr_src;   r_wr_slot_q  <= r_wr_slot;
      for (int b = 0; b < BUF_BANKS; b++)
        if (r_wr_v[b]) bloc[~layer_q[0]][r_wr_tok[b][TIW-1:0]] <= {BW'(b), r_wr_slot[b]};
    end

  always_ff @(posedge clk) begin
    for (int p = 0; p < HBM_PORTS; p++)
      if (hbm_rsp_valid[p] && acc_q[p] && !got_q[p]) hd_q[p] <= hbm_rsp_data[p];
    for (int b = 0; b < BUF_BANKS; b++)
      if (b_rd_valid[b]) bd_q[b] <= b_rd_data[b];
    for (int b = 0; b < BUF_BANKS; b++)
      if (x_en[b]) wa_q[b] <= {~layer_q[0], r_wr_slot_q[b], beat};
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      est <= E_IDLE; beat <= '0; acc_q <= '0; got_q <= '0; bgot_q <= 1'b0; rd_issued <= 1'b0;
      last_q <= 1'b0; bufv_run <= 1'b0; layer_q <= '0; bufok_q <= 1'b0; buf_layer_q <= '0;
      r_hbm_v_q <= '0; r_buf_v_q <= '0; r_wr_v_q <= '0;
    end else begin
      if (attn_start) begin
        layer_q  <= layer;
        bufv_run <= bufok_q && buf_layer_q == layer;
      end
      case (est)
        E_IDLE, E_DONE:
          if (rnd_valid) begin
            est <= E_ISSUE; beat <= '0; last_q <= rnd_last;
            r_hbm_v_q <= r_hbm_v; r_buf_v_q <= r_buf_v; r_wr_v_q <= r_wr_v;
            acc_q <= '0; got_q <= '0; bgot_q <= 1'b0; rd_issued <= 1'b0;
          end else if (est == E_DONE) begin
            est <= E_IDLE;
            if (last_q) begin
              bufok_q     <= !sch_ovf;
              buf_layer_q <= layer_q + 1'b1;
            end
          end
        E_ISSUE: begin
          acc_q <= acc_q | (hbm_req_valid & hbm_req_ready);
          got_q <= got_q | (hbm_rsp_valid & acc_q);
          if (|b_rd_en) rd_issued <= 1'b1;
          if (rd_issued || r_buf_v_q == '0) bgot_q <= 1'b1;
          if (((acc_q | (hbm_req_valid & hbm_req_ready)) & r_hbm_v_q) == r_hbm_v_q) est <= E_WAIT;
        end
        E_WAIT: begin
          got_q <= got_q | (hbm_rsp_valid & acc_q);
          if (rd_issued || r_buf_v_q == '0) bgot_q <= 1'b1;
          if ((got_q & r_hbm_v_q) == r_hbm_v_q && bgot_q) est <= E_OUT;
        end
        E_OUT: if (kv_out_ready) begin
          acc_q <= '0; got_q <= '0; bgot_q <= 1'b0; rd_issued <= 1'b0;
          if (beat == BTW'(2 * SPAN - 1)) est <= E_DONE;
          else begin beat <= beat + 1'b1; est <= E_ISSUE; end
        end
        default: est <= E_IDLE;
      endcase
    end

  // ---------------- output beat ----------------
  assign kv_out_valid = (est == E_OUT);
  assign kv_out_beat  = beat;
  assign kv_out_lane_v = {r_buf_v_q, r_hbm_v_q};
  for (genvar l = 0; l < NL; l++) begin : g_lane
    assign kv_out_data[l] = x_in[l];
    if (l < HBM_PORTS) begin : g_h
      assign kv_out_tok[l] = r_hbm_tok_q[l];
    end else begin : g_b
      assign kv_out_tok[l] = r_buf_tok_q[l - HBM_PORTS];
    end
  end

  // ---------------- buffer and crossbar ----------------
  kv_xbar #(.N_IN(NL), .N_OUT(BUF_BANKS), .DW(DW)) u_xbar (
    .clk, .rst_n, .in_data(x_in), .en(x_en), .sel(r_wr_src_q),
    .out_en(x_out_en), .out_data(x_out));

  kv_inv_buf #(.BANKS(BUF_BANKS), .SLOT_W(SLOT_W), .ENTRY_BEATS(2 * SPAN), .DW(DW)) u_buf (
    .clk, .rst_n, .rd_en(b_rd_en), .rd_addr(b_rd_addr), .rd_valid(b_rd_valid),
    .rd_data(b_rd_data), .wr_en(x_out_en), .wr_addr(b_wr_addr), .wr_data(x_out));

endmodule
