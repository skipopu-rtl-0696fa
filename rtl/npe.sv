// npe -- tile-based nonlinear processing engine.
//
// The NPE sits behind the PE array and processes its output tiles one row
// (LANES values) per clock.  It executes the nonlinear steps of a SkipGPT
// layer as two non-blocking phases, so that they overlap with the
// surrounding matrix multiplications instead of waiting for whole rows:
//
//   phase 1 (statistics, no data output)
//     NPE_RMS_STAT : reduction unit 1 sums x, reduction unit 2 sums x^2 for
//                    every row of every tile; the running sums circulate in
//                    the two row-feature FIFOs.  On the last tile of a row
//                    mu = sum/D and sigma = sqrt(E[x^2] - mu^2 + eps) are
//                    written to the mu / sigma memories.
//     NPE_SM_STAT  : online (FlashAttention-style) softmax statistics:
//                    reduction unit 1 takes the tile row maximum m~, the
//                    exponent unit forms exp(s - m~), reduction unit 2 sums
//                    it (l~), and the row's running (m, l) is updated as
//                    m' = max(m, m~), l' = e^(m-m') l + e^(m~-m') l~.
//   phase 2 (element-wise, one output row per input row)
//     NPE_RMS_NORM : (x - mu) / sigma * gamma, the features being read for
//                    the k-th UNSKIPPED token (k-th set bit of the bitmask)
//     NPE_SM_NORM  : exp(s - m) / l
//     NPE_SWIGLU   : gate * up / (1 + exp(-gate))   (silu(gate) * up)
//     NPE_ROPE     : (x_even, x_odd) rotated by (cos, sin) read from the ROT
//                    memory at the token's position (again via the bitmask)
// Both reduction units are shared by RMSNorm and softmax, the exponent unit
// by softmax and SwiGLU, and the vector divider by all normalising
// operations, as in the paper's Fig. 5.  Softmax inputs are first scaled by
// 1/sqrt(d_k).
//
// Follows the paper: the operation set, two-phase flow, shared reduction
// units, row-feature FIFOs, mu/sigma/gamma/ROT memories and bitmask-driven
// feature selection.  The mean-and-variance normalisation follows Alg. 1 and
// Fig. 5; with rms_center = 0 the mean is not subtracted, which gives the
// plain RMSNorm x / sqrt(eps + mean(x^2)) defined in the paper's
// introduction.  This design's own choices: Q16.16 fixed-point arithmetic
// inside (FP16 at the ports), the polynomial exponent (see skipopu_pkg),
// exact per-lane division, and the memory depths.
//
// Rows of one tile round must arrive in row order 0,1,2,...; the controller
// flags the first and the last tile round of a row block.  in_row is the
// tile-row number (for RMS_NORM and ROPE: the rank among unskipped tokens).
//
// Timing: fully pipelined, one row per clock; out_valid follows in_valid by
// 3 clocks for the phase-2 operations.  feat_done pulses when the final
// feature of a row is written.
module npe
  import skipopu_pkg::*;
#(
  parameter int LANES       = 64,
  parameter int MAX_ROWS    = 64,     // B_r: rows of one row block
  parameter int GAMMA_WORDS = 80,     // D_max / LANES (D_max = 5120, Llama2-13B)
  parameter int ROT_POS     = 2048,   // token positions held in the ROT memory
  parameter int ROT_CHUNKS  = 2       // head dimension / LANES
) (
  input  logic     clk,
  input  logic     rst_n,
  // configuration
  input  npe_op_e  op,
  input  logic     first_round,
  input  logic     last_round,
  input  logic     rms_center,
  input  fix_t     inv_d,
  input  fix_t     inv_sqrt_dk,
  input  fix_t     eps,
  input  logic [MAX_ROWS-1:0] bitmask,
  input  logic [15:0] pos_base,
  // row stream
  input  logic     in_valid,
  input  logic [$clog2(MAX_ROWS)-1:0] in_row,
  input  logic [$clog2(GAMMA_WORDS)-1:0] in_col,
  input  fp16_t    in_a [LANES],
  input  fp16_t    in_b [LANES],
  output logic     out_valid,
  output logic [$clog2(MAX_ROWS)-1:0] out_row,
  output fp16_t    out [LANES],
  output logic     feat_done,
  // parameter memories
  input  logic     gamma_we,
  input  logic [$clog2(GAMMA_WORDS)-1:0] gamma_addr,
  input  fp16_t    gamma_data [LANES],
  input  logic     rot_we,
  input  logic [$clog2(ROT_POS)-1:0] rot_pos,
  input  logic [$clog2(ROT_CHUNKS)-1:0] rot_chunk,
  input  fp16_t    rot_cos [LANES/2],
  input  fp16_t    rot_sin [LANES/2]
);
  localparam int RW = $clog2(MAX_ROWS);
  localparam int FW = 48;                      // feature width
  localparam fix_t ONE = 32'sh0001_0000;

  // ------------------------------------------------------------------
  // memories
  fix_t  mu_mem [MAX_ROWS];
  fix_t  sg_mem [MAX_ROWS];
  fix_t  m_mem  [MAX_ROWS];
  fix_t  l_mem  [MAX_ROWS];
  fp16_t gamma_mem [GAMMA_WORDS][LANES];
  fp16_t cos_mem [ROT_POS][ROT_CHUNKS][LANES/2];
  fp16_t sin_mem [ROT_POS][ROT_CHUNKS][LANES/2];

  always_ff @(posedge clk) begin
    if (gamma_we) gamma_mem[gamma_addr] <= gamma_data;
    if (rot_we) begin
      cos_mem[rot_pos][rot_chunk] <= rot_cos;
      sin_mem[rot_pos][rot_chunk] <= rot_sin;
    end
  end

  // rank -> token index: position of the k-th set bit of the bitmask
  function automatic logic [RW-1:0] kth_set(input logic [MAX_ROWS-1:0] bm, input logic [RW-1:0] k);
    logic [RW:0] cnt;
    logic [RW-1:0] idx;
    cnt = '0; idx = '0;
    for (int i = 0; i < MAX_ROWS; i++)
      if (bm[i]) begin
        if (cnt == {1'b0, k}) idx = RW'(i);
        cnt = cnt + 1'b1;
      end
    return idx;
  endfunction

  // ------------------------------------------------------------------
  // stage 0: conversion, reduction trees
  fix_t a0 [LANES], b0 [LANES];
  logic signed [FW-1:0] red1_0, red2_0;
  logic [RW-1:0] idx0;
  logic sm0;

  always_comb begin
    sm0 = (op == NPE_SM_STAT) || (op == NPE_SM_NORM);
    for (int l = 0; l < LANES; l++) begin
      a0[l] = fp16_to_fix(in_a[l]);
      b0[l] = fp16_to_fix(in_b[l]);
      if (sm0) a0[l] = fx_mul(a0[l], inv_sqrt_dk);
    end
    // reduction unit 1: max (softmax) or sum (RMSNorm)
    red1_0 = sm0 ? FW'(a0[0]) : '0;
    for (int l = 0; l < LANES; l++)
      if (sm0) begin
        if (FW'(a0[l]) > red1_0) red1_0 = FW'(a0[l]);
      end else red1_0 = red1_0 + FW'(a0[l]);
    // reduction unit 2 (RMSNorm part): sum of squares
    red2_0 = '0;
    for (int l = 0; l < LANES; l++)
      red2_0 = red2_0 + FW'((64'(a0[l]) * 64'(a0[l])) >>> FIX_FRAC);
    idx0 = (op == NPE_RMS_NORM || op == NPE_ROPE) ? kth_set(bitmask, in_row) : in_row;
  end

  // stage-1 registers
  logic     v1, first1, last1;
  npe_op_e  op1;
  fix_t     a1 [LANES], b1 [LANES];
  logic signed [FW-1:0] red1_1, red2_1;
  logic [RW-1:0] row1, idx1;
  logic [$clog2(GAMMA_WORDS)-1:0] col1;
  logic [15:0] pos1;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;

  always_ff @(posedge clk) begin
    op1 <= op; first1 <= first_round; last1 <= last_round;
    a1 <= a0; b1 <= b0; red1_1 <= red1_0; red2_1 <= red2_0;
    row1 <= in_row; idx1 <= idx0; col1 <= in_col;
    pos1 <= pos_base + 16'(idx0);
  end

  // ------------------------------------------------------------------
  // stage 1: element-wise unit, RMSNorm feature update
  fix_t y1 [LANES];
  fix_t e1 [LANES];
  logic signed [FW-1:0] esum1;
  logic [FW-1:0] f1_head, f2_head;
  logic f1_empty, f2_empty;

  always_comb begin
    fix_t mu, sg, mm, ll, g, c, s;
    logic [$clog2(ROT_POS)-1:0] p;
    logic [$clog2(ROT_CHUNKS)-1:0] ch;
    mu = rms_center ? mu_mem[idx1] : '0;
    sg = sg_mem[idx1];
    mm = m_mem[idx1];
    ll = l_mem[idx1];
    p  = pos1[$clog2(ROT_POS)-1:0];
    ch = col1[$clog2(ROT_CHUNKS)-1:0];
    esum1 = '0;
    for (int l = 0; l < LANES; l++) begin
      e1[l] = fx_exp(a1[l] - fix_t'(red1_1[31:0]));
      esum1 = esum1 + FW'(e1[l]);
      g = fp16_to_fix(gamma_mem[col1][l]);
      c = fp16_to_fix(cos_mem[p][ch][l/2]);
      s = fp16_to_fix(sin_mem[p][ch][l/2]);
      unique case (op1)
        NPE_SM_NORM:  y1[l] = fx_div(fx_exp(a1[l] - mm), ll);
        NPE_RMS_NORM: y1[l] = fx_mul(fx_div(a1[l] - mu, sg), g);
        NPE_SWIGLU:   y1[l] = fx_div(fx_mul(a1[l], b1[l]), ONE + fx_exp(-a1[l]));
        NPE_ROPE:     y1[l] = (l % 2 == 0) ? fx_mul(a1[l], c) - fx_mul(a1[l+1], s)
                                           : fx_mul(a1[l-1], s) + fx_mul(a1[l], c);
        default:      y1[l] = a1[l];
      endcase
    end
  end

  // RMSNorm statistics: update running sums, finalise on the last round.
  logic                 rs_push, rs_pop;
  logic signed [FW-1:0] s1_new, s2_new;
  fix_t                 mu_fin, sg_fin;
  always_comb begin
    logic signed [95:0] t;
    fix_t ex2;
    s1_new = (first1 ? '0 : signed'(f1_head)) + red1_1;
    s2_new = (first1 ? '0 : signed'(f2_head)) + red2_1;
    rs_push = v1 && op1 == NPE_RMS_STAT && !last1;
    rs_pop  = v1 && op1 == NPE_RMS_STAT && !first1;
    t = 96'(s1_new) * 96'(inv_d);
    mu_fin = rms_center ? fx_sat(64'(t >>> FIX_FRAC)) : '0;
    t = 96'(s2_new) * 96'(inv_d);
    ex2 = fx_sat(64'(t >>> FIX_FRAC));
    sg_fin = fx_sqrt(ex2 - fx_mul(mu_fin, mu_fin) + eps);
  end

  // stage-2 registers
  logic     v2, first2, last2;
  npe_op_e  op2;
  fix_t     y2 [LANES];
  logic signed [FW-1:0] mt2, lt2;
  logic [RW-1:0] row2;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v2 <= 1'b0;
    else        v2 <= v1;

  always_ff @(posedge clk) begin
    op2 <= op1; first2 <= first1; last2 <= last1;
    y2 <= y1; mt2 <= red1_1; lt2 <= esum1; row2 <= row1;
  end

  // ------------------------------------------------------------------
  // stage 2: online softmax statistics update
  logic sm_push, sm_pop;
  fix_t m_new, l_new;
  always_comb begin
    fix_t m_old, l_old, mt, lt;
    m_old = fix_t'(f1_head[31:0]);
    l_old = fix_t'(f2_head[31:0]);
    mt    = fix_t'(mt2[31:0]);
    lt    = fx_sat(64'(lt2));
    if (first2) begin
      m_new = mt;
      l_new = lt;
    end else begin
      m_new = (m_old > mt) ? m_old : mt;
      l_new = fx_mul(fx_exp(m_old - m_new), l_old) + fx_mul(fx_exp(mt - m_new), lt);
    end
    sm_push = v2 && op2 == NPE_SM_STAT && !last2;
    sm_pop  = v2 && op2 == NPE_SM_STAT && !first2;
  end

  // shared row-feature FIFOs of the two reduction units
  npe_feat_fifo #(.DEPTH(MAX_ROWS), .W(FW)) u_fifo1 (
    .clk, .rst_n,
    .push(rs_push || sm_push),
    .push_data(rs_push ? s1_new : FW'(m_new)),
    .pop(rs_pop || sm_pop), .head(f1_head), .empty(f1_empty));
  npe_feat_fifo #(.DEPTH(MAX_ROWS), .W(FW)) u_fifo2 (
    .clk, .rst_n,
    .push(rs_push || sm_push),
    .push_data(rs_push ? s2_new : FW'(l_new)),
    .pop(rs_pop || sm_pop), .head(f2_head), .empty(f2_empty));

  // feature memories ("done" write-back)
  always_ff @(posedge clk) begin
    if (v1 && op1 == NPE_RMS_STAT && last1) begin
      mu_mem[row1] <= mu_fin;
      sg_mem[row1] <= sg_fin;
    end
    if (v2 && op2 == NPE_SM_STAT && last2) begin
      m_mem[row2] <= m_new;
      l_mem[row2] <= l_new;
    end
  end

  // ------------------------------------------------------------------
  // output register
  logic is_out2;
  assign is_out2 = (op2 == NPE_SM_NORM) || (op2 == NPE_RMS_NORM) ||
                   (op2 == NPE_SWIGLU)  || (op2 == NPE_ROPE);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0;
      feat_done <= 1'b0;
    end else begin
      out_valid <= v2 && is_out2;
      feat_done <= (v1 && op1 == NPE_RMS_STAT && last1) || (v2 && op2 == NPE_SM_STAT && last2);
    end

  always_ff @(posedge clk) begin
    out_row <= row2;
    for (int l = 0; l < LANES; l++) out[l] <= fix_to_fp16(y2[l]);
  end

endmodule
