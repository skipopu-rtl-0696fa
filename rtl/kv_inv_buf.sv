// kv_inv_buf -- the KV invariance buffer.
//
// BANKS independent banks, each with one read and one write port (a URAM
// cascade per bank in the paper's implementation), holding whole KV entries
// of tokens whose cache the next layer reuses.  Every bank is split into two
// halves selected by the layer parity: while layer i reads the entries
// prepared for it from one half, the entries for layer i+1 are written into
// the other, so a round can read and write the same bank in one clock.
// Within a half an entry occupies ENTRY_BEATS consecutive words (K then V).
//
// Default capacity: 16 banks x 2 halves x 32 slots x 512 words x 256 bits
// = 1024 token entries of a D = 4096 model, 16 MB, which fits the 512 URAM
// blocks (18 MB) the paper spends on it.  The bank count and the 1024-token
// capacity are the paper's; the parity split and the slot layout are this
// design's choice.
//
// Timing: read data is registered, rd_data follows rd_en by one clock.
module kv_inv_buf #(
  parameter int BANKS       = 16,
  parameter int SLOT_W      = 5,     // slots per bank and parity = 2^SLOT_W
  parameter int ENTRY_BEATS = 512,   // K + V entry, 256-bit words
  parameter int DW          = 256,
  localparam int BEAT_W     = $clog2(ENTRY_BEATS),
  localparam int AW         = 1 + SLOT_W + BEAT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [BANKS-1:0] rd_en,
  input  logic [AW-1:0]    rd_addr [BANKS],   // {parity, slot, beat}
  output logic [BANKS-1:0] rd_valid,
  output logic [DW-1:0]    rd_data [BANKS],
  input  logic [BANKS-1:0] wr_en,
  input  logic [AW-1:0]    wr_addr [BANKS],
  input  logic [DW-1:0]    wr_data [BANKS]
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rd_valid <= '0;
    else        rd_valid <= rd_en;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [DW-1:0] mem [2**AW];
    always_ff @(posedge clk) begin
      if (wr_en[b]) mem[wr_addr[b]] <= wr_data[b];
      if (rd_en[b]) rd_data[b] <= mem[rd_addr[b]];
    end
  end
endmodule
