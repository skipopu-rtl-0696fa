// pingpong_buf -- localised ping-pong (double) buffer, used for the IFM,
// KER and PSUM buffers next to the PE array.
//
// Two banks of DEPTH words of W bits.  The fill side writes into the bank
// selected by the internal bank pointer while the PE side reads the other
// bank; swap exchanges the roles, so loading the next tile overlaps with
// computing on the current one.  The paper names these buffers and says
// they are ping-pong BRAM buffers; sizes and port details are this design's.
//
// Timing: registered read, rd_data valid one clock after rd_en.  swap takes
// effect from the next clock (a read or write in the same clock as swap
// still uses the old assignment).
module pingpong_buf #(
  parameter int W     = 1024,
  parameter int DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     swap,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [W-1:0]             wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [W-1:0]             rd_data,
  output logic                     rd_valid,
  output logic                     fill_bank
);
  logic [W-1:0] mem [2][DEPTH];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      fill_bank <= 1'b0;
      rd_valid  <= 1'b0;
    end else begin
      if (swap) fill_bank <= ~fill_bank;
      rd_valid <= rd_en;
    end

  always_ff @(posedge clk) begin
    if (wr_en) mem[fill_bank][wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[~fill_bank][rd_addr];
  end

endmodule
