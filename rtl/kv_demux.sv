// kv_demux -- DEMUX that routes newly computed KV cache segments to their
// HBM write ports.
//
// Each incoming beat carries one 256-bit segment of a token's K or V entry,
// tagged with the layer, the token's rank among the layer's unskipped tokens
// and the beat number.  Using the token-wise mapping (kv_addr_map) the DEMUX
// forwards it to HBM write port rank mod HBM_PORTS with the matching
// address, so every AXI channel writes only its own local HBM region.
//
// Handshake: valid/ready on the input and on every output port; the input
// is accepted when the selected port is ready.  Outputs are registered
// (one stage); a port's register is refilled in the same clock it drains.
//
// Lint note: the assertions use the reset as their `disable iff` condition,
// so linters that see rst_n both as an asynchronous flop reset and inside a
// clocked expression report it as a mixed synchronous/asynchronous net.  The
// assertions are simulation-only and the reset stays a pure asynchronous
// reset in the synthesised logic, so the warning is left standing.
module kv_demux #(
  parameter int HBM_PORTS  = 32,
  parameter int MAX_TOKENS = 2048,
  parameter int SPAN       = 256,
  parameter int DW         = 256,
  parameter int LAYER_W    = 6,
  parameter int ADDR_W     = 28
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [LAYER_W-1:0]            in_layer,
  input  logic [$clog2(MAX_TOKENS)-1:0] in_rank,
  input  logic                          in_is_v,
  input  logic [$clog2(SPAN)-1:0]       in_beat,
  input  logic [DW-1:0]                 in_data,
  output logic [HBM_PORTS-1:0]          wr_valid,
  input  logic [HBM_PORTS-1:0]          wr_ready,
  output logic [ADDR_W-1:0]             wr_addr [HBM_PORTS],
  output logic [DW-1:0]                 wr_data [HBM_PORTS]
);
  logic [$clog2(HBM_PORTS)-1:0] sel;
  logic [ADDR_W-1:0]            addr;

  kv_addr_map #(.HBM_PORTS(HBM_PORTS), .MAX_TOKENS(MAX_TOKENS), .SPAN(SPAN),
                .BEAT_BYTES(DW / 8), .LAYER_W(LAYER_W), .ADDR_W(ADDR_W)) u_map (
    .layer(in_layer), .rank(in_rank), .is_v(in_is_v), .beat(in_beat),
    .port(sel), .addr);

  assign in_ready = !wr_valid[sel] || wr_ready[sel];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) wr_valid <= '0;
    else
      for (int p = 0; p < HBM_PORTS; p++)
        if (in_valid && in_ready && sel == p[$clog2(HBM_PORTS)-1:0]) wr_valid[p] <= 1'b1;
        else if (wr_ready[p])                                        wr_valid[p] <= 1'b0;

  always_ff @(posedge clk)
    if (in_valid && in_ready) begin
      wr_addr[sel] <= addr;
      wr_data[sel] <= in_data;
    end

  for (genvar p = 0; p < HBM_PORTS; p++) begin : g_chk
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      wr_valid[p] && !wr_ready[p] |=> wr_valid[p] && $stable(wr_data[p]) && $stable(wr_addr[p]));
  end

endmodule
