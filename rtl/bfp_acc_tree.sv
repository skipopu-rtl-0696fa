// bfp_acc_tree -- block-floating-point accumulation tree of one PE-array
// column, with conversion back to FP16.
//
// The N unnormalised products of a column (sign, exponent sum, 15-bit
// significand) are summed as follows, as the paper describes:
//   1. FP->BFP conversion: an exponent-maximum tree finds E_max; each
//      significand, made signed by its sign bit, is arithmetically shifted
//      right by E_max - E_i so that all share the binary point of E_max.
//   2. Fixed-point summation: a plain integer adder tree adds the aligned
//      values (16 bits each, ACC_W = 16 + log2(N) bits of sum).
//   3. FP renormalisation: |sum|, a leading-zero count, a normalising shift
//      and an exponent adjustment; the mantissa is truncated to 10 bits.
// The value of a product is sig * 2^(exp - 43) (see skipopu_pkg), so the
// result exponent is lead_one_position + E_max - 43 + 15.  Sums below the
// FP16 normal range are flushed to zero; sums above it saturate to the
// largest finite FP16 value.  These two edge rules are this design's choice.
//
// Timing: fully pipelined, one column result per clock; out_valid follows
// in_valid by 2 clocks (sum register, then normalisation register).
module bfp_acc_tree
  import skipopu_pkg::*;
#(
  parameter int N = 64
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  pe_prod_t in_prod [N],
  output logic     out_valid,
  output fp16_t    out_fp16
);
  localparam int ACC_W = SIG_W + 1 + $clog2(N);

  logic [PEXP_W-1:0]       emax;
  logic signed [ACC_W-1:0] sum;
  logic signed [ACC_W-1:0] sum_q;
  logic [PEXP_W-1:0]       emax_q;
  logic                    v1_q;

  // Stage 1: exponent max tree, alignment and fixed-point adder tree.
  always_comb begin
    logic signed [SIG_W:0] sv;
    logic [PEXP_W-1:0]     sh;
    emax = '0;
    for (int i = 0; i < N; i++)
      if (in_prod[i].exp > emax) emax = in_prod[i].exp;
    sum = '0;
    for (int i = 0; i < N; i++) begin
      sv  = in_prod[i].sign ? -$signed({1'b0, in_prod[i].sig}) : $signed({1'b0, in_prod[i].sig});
      sh  = emax - in_prod[i].exp;
      sum = sum + ACC_W'(sv >>> sh);
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      v1_q   <= 1'b0;
      sum_q  <= '0;
      emax_q <= '0;
    end else begin
      v1_q   <= in_valid;
      sum_q  <= sum;
      emax_q <= emax;
    end

  // Stage 2: |x|, leading-zero count, normalise, exponent adjust.
  fp16_t res;
  always_comb begin
    logic [ACC_W-1:0] mag;
    int               lead;
    int               e;
    logic [9:0]       man;
    mag  = sum_q[ACC_W-1] ? ACC_W'(-sum_q) : ACC_W'(sum_q);
    lead = -1;
    for (int i = 0; i < ACC_W; i++) if (mag[i]) lead = i;
    e    = lead + int'(emax_q) - PROD_EXP_OFS + 15;
    if (lead >= 10) man = 10'(mag >> (lead - 10));
    else            man = 10'(mag << (10 - lead));
    if (lead < 0 || e <= 0) res = 16'h0000;
    else if (e >= 31)       res = {sum_q[ACC_W-1], 15'h7BFF};
    else                    res = {sum_q[ACC_W-1], 5'(e), man};
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_fp16  <= '0;
    end else begin
      out_valid <= v1_q;
      out_fp16  <= res;
    end

endmodule
