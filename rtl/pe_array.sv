// pe_array -- the mixed-precision PE array with its column accumulation trees.
//
// ROWS x PE_COLS mixed-precision PEs (64 x 64 = 4096 DSP slices by default).
// Every PE produces two products per clock, so the array performs
// ROWS x 2*PE_COLS (64 x 128) FP16xFP16 or FP16xINT4 multiplications per
// clock.  PE (r, c) multiplies activation x[r] by the weight pair it holds,
// {W1, W0}; output column 2c collects the W0 products of PE column c and
// output column 2c+1 its W1 products, each through its own BFP accumulation
// tree of ROWS inputs.  Each output is therefore one element of x . W for a
// ROWS-long slice of the reduction dimension (the tile size S of the
// paper's dataflow); partial sums over several slices are added outside
// (PSUM buffer / NPE).
//
// Weights are stationary in the PEs: a weight row (PE_COLS words of 32 bits)
// is written per clock through the w_* port, so a full tile loads in ROWS
// clocks; activations then stream one token (ROWS FP16 values) per clock.
// The weight-stationary loading is this design's choice; the paper gives
// the array size and the PE/tree structure but not how weights arrive.
//
// Timing: one token per clock; out_valid follows x_valid by 3 clocks
// (PE DSP register, tree sum register, tree normalisation register).
//
// Lint note: all column trees run in lock-step, so only the first tree's
// out_valid is used and the other 127 valid outputs are left unread.
module pe_array
  import skipopu_pkg::*;
#(
  parameter int ROWS    = 64,
  parameter int PE_COLS = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  pe_mode_e    mode,
  input  logic [4:0]  fraclen,
  // weight load: one PE row per clock
  input  logic        w_valid,
  input  logic [$clog2(ROWS)-1:0] w_row,
  input  logic [31:0] w_data [PE_COLS],
  // activation stream: one token per clock
  input  logic        x_valid,
  input  fp16_t       x [ROWS],
  // results: 2*PE_COLS FP16 dot products per token
  output logic        out_valid,
  output fp16_t       out [2*PE_COLS]
);
  logic [31:0] wreg [ROWS][PE_COLS];
  pe_prod_t    prod [2*PE_COLS][ROWS];
  logic        v_q;

  always_ff @(posedge clk)
    if (w_valid)
      for (int c = 0; c < PE_COLS; c++) wreg[w_row][c] <= w_data[c];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v_q <= 1'b0;
    else        v_q <= x_valid;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < PE_COLS; c++) begin : g_col
      mp_pe u_pe (
        .clk, .ce(1'b1), .mode, .fraclen,
        .x(x[r]), .w(wreg[r][c]),
        .prod0(prod[2*c][r]), .prod1(prod[2*c+1][r])
      );
    end
  end

  logic [2*PE_COLS-1:0] ov;
  for (genvar k = 0; k < 2*PE_COLS; k++) begin : g_tree
    bfp_acc_tree #(.N(ROWS)) u_tree (
      .clk, .rst_n, .in_valid(v_q), .in_prod(prod[k]),
      .out_valid(ov[k]), .out_fp16(out[k])
    );
  end
  assign out_valid = ov[0];

endmodule
