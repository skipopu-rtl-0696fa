// global_buffer -- the centralised on-chip scratchpad (BRAM).
//
// Holds the activation tile block X_i (B_r token rows x D features) as
// words of LANES FP16 values, addressed by {row, chunk}.  The fused
// router/RMSNorm dataflow loads each tile slice once from DDR, reads it for
// the router pass, reads only the unskipped rows again (row numbers from the
// bitmask unit) for normalisation and the next submodule, and has the NPE
// overwrite those rows in place with the normalised values.  One write port
// and one read port; the read is registered (BRAM output register).
//
// The paper gives the buffer's role and technology (BRAM); its geometry and
// port arrangement here are this design's choices.
//
// Timing: rd_data/rd_valid one clock after rd_en; a write is visible to a
// read issued in the following clock.
module global_buffer
  import skipopu_pkg::*;
#(
  parameter int LANES  = 64,
  parameter int ROWS   = 64,    // B_r
  parameter int CHUNKS = 80     // D_max / LANES
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wr_en,
  input  logic [$clog2(ROWS)-1:0]   wr_row,
  input  logic [$clog2(CHUNKS)-1:0] wr_chunk,
  input  fp16_t wr_data [LANES],
  input  logic  rd_en,
  input  logic [$clog2(ROWS)-1:0]   rd_row,
  input  logic [$clog2(CHUNKS)-1:0] rd_chunk,
  output logic  rd_valid,
  output fp16_t rd_data [LANES]
);
  fp16_t mem [ROWS][CHUNKS][LANES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row][wr_chunk] <= wr_data;
    if (rd_en) rd_data <= mem[rd_row][rd_chunk];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;

endmodule
