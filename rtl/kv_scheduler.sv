// kv_scheduler -- groups the KV cache fetches of one decode attention into
// rounds that the HBM ports and the invariance-buffer banks can serve in
// parallel.
//
// The context tokens are visited in index order, one per clock.  For each
// token the caller supplies (through the info_* inputs, combinationally for
// the token on tok) whether the token is unskipped in the current layer
// (act), whether it is unskipped in the next layer (act_next), the HBM port
// holding its most recent KV entry, an HBM address for that entry, and the
// buffer bank/slot that holds it when the invariance buffer is valid.
//
//  * source: with a valid buffer, unskipped tokens (fresh KV, orange in the
//    paper's figure) are read from HBM and skipped tokens (reused KV, gray)
//    from the buffer; with an invalid buffer all tokens are read from HBM.
//  * write-back: every token that is skipped in the next layer
//    (act_next = 0) will be reused there, so its entry is copied into the
//    buffer during the same round, through the crossbar, from whichever port
//    it was read on.
//  * round closing: a token joins the current round unless that would read
//    an HBM port twice, read a buffer bank twice or more than BUF_RD_PORTS
//    banks, or need more than BUF_WR_PORTS buffer writes; otherwise the
//    round is emitted and the token opens the next one.
//
// This single in-order rule reproduces both scheduling examples of the
// paper (buffer valid and invalid); the rule itself is inferred from those
// examples, as the paper describes the goals but not the algorithm.
//
// Buffer writes take banks round-robin (write counter mod BUF_BANKS) and
// slots counter div BUF_BANKS, so the entries written in one round always
// land in distinct banks and the next layer's reads of consecutive reused
// tokens spread across banks.  This allocation is this design's choice.
//
// Output: one round descriptor per handshake (round_valid/round_ready),
// indexed by resource: for HBM port p, hbm_v[p]/hbm_tok[p]/hbm_addr[p]; for
// buffer bank b, buf_v[b]/buf_tok[b]/buf_slot[b] (read) and
// wr_v[b]/wr_src[b]/wr_tok[b]/wr_slot[b] (write), where wr_src is the
// crossbar input (p for HBM port p, HBM_PORTS + b for buffer bank b).
// When all BUF_BANKS * 2^SLOT_W slots of the next layer are taken, further
// reused entries are not buffered and wr_overflow stays high until the next
// start; the caller then treats the buffer as invalid for that layer (this
// fallback is this design's choice).
// round_last marks the final round.  Timing: one clock per token plus two
// per emitted round: the clock that finds the conflict and the clock that
// hands the round over (stalls while round_ready is low).
module kv_scheduler #(
  parameter int HBM_PORTS    = 32,
  parameter int BUF_BANKS    = 16,
  parameter int BUF_RD_PORTS = 16,
  parameter int BUF_WR_PORTS = 16,
  parameter int MAX_TOKENS   = 2048,
  parameter int SLOT_W       = 5,    // slots per bank and layer parity = 2^SLOT_W
  parameter int ADDR_W       = 28,
  localparam int TW = $clog2(MAX_TOKENS + 1),
  localparam int PW = (HBM_PORTS <= 2) ? 1 : $clog2(HBM_PORTS),
  localparam int BW = (BUF_BANKS <= 2) ? 1 : $clog2(BUF_BANKS),
  localparam int SW = $clog2(HBM_PORTS + BUF_BANKS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command
  input  logic                 start,
  input  logic [TW-1:0]        n_tokens,
  input  logic                 buf_valid,
  output logic                 busy,
  output logic                 wr_overflow, // some reused entry found no buffer slot
  // token information lookup
  output logic [TW-1:0]        tok,
  output logic                 tok_take,   // tok joins the current round this clock
  input  logic                 info_act,
  input  logic                 info_act_next,
  input  logic [PW-1:0]        info_port,
  input  logic [ADDR_W-1:0]    info_addr,
  input  logic [BW-1:0]        info_bank,
  input  logic [SLOT_W-1:0]    info_slot,
  // round descriptors
  output logic                 round_valid,
  input  logic                 round_ready,
  output logic                 round_last,
  output logic [HBM_PORTS-1:0] hbm_v,
  output logic [TW-1:0]        hbm_tok  [HBM_PORTS],
  output logic [ADDR_W-1:0]    hbm_addr [HBM_PORTS],
  output logic [BUF_BANKS-1:0] buf_v,
  output logic [TW-1:0]        buf_tok  [BUF_BANKS],
  output logic [SLOT_W-1:0]    buf_slot [BUF_BANKS],
  output logic [BUF_BANKS-1:0] wr_v,
  output logic [SW-1:0]        wr_src   [BUF_BANKS],
  output logic [TW-1:0]        wr_tok   [BUF_BANKS],
  output logic [SLOT_W-1:0]    wr_slot  [BUF_BANKS]
);
  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_EMIT} state_e;
  state_e state;
  logic   last_q, bufv_q;
  logic [TW-1:0] n_q;

  localparam int RCW = $clog2(BUF_RD_PORTS + 1);
  localparam int WCW = $clog2(BUF_WR_PORTS + 1);
  logic [RCW-1:0]              rd_cnt;
  logic [WCW-1:0]              wr_cnt;
  logic [BW+SLOT_W-1:0]        wr_ptr;     // layer-wide buffer write counter
  logic                        empty_round;
  logic                        full;       // every buffer slot of the layer is taken
  logic                        ovf;

  // ---- admission test for the current token ---------------------------
  logic from_hbm, need_wr, conflict;
  logic [BW-1:0] wbank;
  always_comb begin
    from_hbm = info_act || !bufv_q;
    need_wr  = !info_act_next && !full;
    wbank    = wr_ptr[BW-1:0];
    conflict = 1'b0;
    if (from_hbm  && hbm_v[info_port])                                      conflict = 1'b1;
    if (!from_hbm && (buf_v[info_bank] || rd_cnt == RCW'(BUF_RD_PORTS)))    conflict = 1'b1;
    if (need_wr   && wr_cnt == WCW'(BUF_WR_PORTS))                          conflict = 1'b1;
  end

  assign busy        = (state != S_IDLE);
  assign wr_overflow = ovf;
  assign round_valid = (state == S_EMIT);
  assign round_last  = last_q;
  assign tok_take    = (state == S_SCAN) && (tok != n_q) && !(conflict && !empty_round);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= S_IDLE; last_q <= 1'b0; bufv_q <= 1'b0; n_q <= '0; tok <= '0;
      rd_cnt <= '0; wr_cnt <= '0; wr_ptr <= '0; empty_round <= 1'b1; full <= 1'b0; ovf <= 1'b0;
      hbm_v <= '0; buf_v <= '0; wr_v <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state <= S_SCAN; n_q <= n_tokens; bufv_q <= buf_valid; tok <= '0;
          last_q <= 1'b0; wr_ptr <= '0; empty_round <= 1'b1; full <= 1'b0; ovf <= 1'b0;
          rd_cnt <= '0; wr_cnt <= '0; hbm_v <= '0; buf_v <= '0; wr_v <= '0;
        end
        S_SCAN:
          if (tok == n_q) begin
            if (empty_round) state <= S_IDLE;
            else begin state <= S_EMIT; last_q <= 1'b1; end
          end else if (conflict && !empty_round) begin
            state <= S_EMIT;
          end else begin
            empty_round <= 1'b0;
            tok <= tok + 1'b1;
            if (from_hbm) begin
              hbm_v[info_port]    <= 1'b1;
              hbm_tok[info_port]  <= tok;
              hbm_addr[info_port] <= info_addr;
            end else begin
              buf_v[info_bank]    <= 1'b1;
              buf_tok[info_bank]  <= tok;
              buf_slot[info_bank] <= info_slot;
              rd_cnt <= rd_cnt + 1'b1;
            end
            if (!info_act_next && full) ovf <= 1'b1;
            if (need_wr) begin
              wr_v[wbank]    <= 1'b1;
              wr_src[wbank]  <= from_hbm ? SW'(info_port) : SW'(HBM_PORTS + int'(info_bank));
              wr_tok[wbank]  <= tok;
              wr_slot[wbank] <= SLOT_W'(wr_ptr >> BW);
              wr_cnt <= wr_cnt + 1'b1;
              wr_ptr <= wr_ptr + 1'b1;
              if (&wr_ptr) full <= 1'b1;
            end
          end
        S_EMIT: if (round_ready) begin
          hbm_v <= '0; buf_v <= '0; wr_v <= '0; rd_cnt <= '0; wr_cnt <= '0;
          empty_round <= 1'b1;
          state <= last_q ? S_IDLE : S_SCAN;
        end
        default: state <= S_IDLE;
      endcase
    end

  // Round-robin write banks are distinct within a round only if a round
  // never writes more entries than there are banks.
  if (BUF_WR_PORTS > BUF_BANKS) begin : g_bad_cfg
    $error("kv_scheduler: BUF_WR_PORTS must not exceed BUF_BANKS");
  end

endmodule
