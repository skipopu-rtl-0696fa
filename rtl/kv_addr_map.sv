// kv_addr_map -- token-wise KV cache memory mapping onto the HBM ports.
//
// Within one layer, the unskipped tokens get consecutive ranks 0,1,2,...
// (in token order).  The whole KV entry of the token with rank k lives in
// the local address space of a single HBM port (pseudo-channel), port
// k mod HBM_PORTS; the ports are filled round-robin, and a layer restarts at
// port 0.  Inside a port, slot k div HBM_PORTS of the layer's region holds
// the token's K entry followed by its V entry, each SPAN beats long, where
// SPAN = D * 16 bits / HBM port width (256 beats of 256 bits for D = 4096).
// A token's entry is therefore one long contiguous burst in one port,
// whichever layer it comes from.
//
// The round-robin port assignment, per-token placement and span formula are
// the paper's; the layer-region layout inside a port (layer-major, fixed
// region per layer) is this design's choice.
//
// Purely combinational.  addr is a byte address inside the port.
module kv_addr_map #(
  parameter int HBM_PORTS  = 32,
  parameter int MAX_TOKENS = 2048,
  parameter int SPAN       = 256,   // beats per K (or V) entry
  parameter int BEAT_BYTES = 32,    // 256-bit AXI data bus
  parameter int LAYER_W    = 6,
  parameter int ADDR_W     = 28     // 256 MB per pseudo-channel
) (
  input  logic [LAYER_W-1:0]               layer,
  input  logic [$clog2(MAX_TOKENS)-1:0]    rank,
  input  logic                             is_v,
  input  logic [$clog2(SPAN)-1:0]          beat,
  output logic [$clog2(HBM_PORTS)-1:0]     port,
  output logic [ADDR_W-1:0]                addr
);
  localparam int SLOTS       = (MAX_TOKENS + HBM_PORTS - 1) / HBM_PORTS;
  localparam int ENTRY_BEATS = 2 * SPAN;
  localparam int LAYER_BEATS = SLOTS * ENTRY_BEATS;

  logic [ADDR_W-1:0] beat_idx;
  always_comb begin
    port     = rank[$clog2(HBM_PORTS)-1:0];
    beat_idx = ADDR_W'(layer) * ADDR_W'(LAYER_BEATS)
             + ADDR_W'(rank / HBM_PORTS) * ADDR_W'(ENTRY_BEATS)
             + (is_v ? ADDR_W'(SPAN) : '0)
             + ADDR_W'(beat);
    addr     = beat_idx * ADDR_W'(BEAT_BYTES);
  end
endmodule
