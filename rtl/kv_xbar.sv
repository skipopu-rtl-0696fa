// kv_xbar -- crossbar in front of the KV invariance buffer write ports.
//
// N_IN data inputs (the HBM read ports followed by the buffer read ports)
// and N_OUT outputs (one per buffer bank write port).  Each output picks any
// input through its own select; several outputs may pick the same input.
// Sizes follow the paper (48 x 16: 32 HBM + 16 buffer inputs, 16 buffer
// write ports).  One register stage on data, enable and select path, so an
// output appears one clock after its input.
module kv_xbar #(
  parameter int N_IN  = 48,
  parameter int N_OUT = 16,
  parameter int DW    = 256,
  localparam int SW   = $clog2(N_IN)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [DW-1:0]    in_data [N_IN],
  input  logic [N_OUT-1:0] en,
  input  logic [SW-1:0]    sel [N_OUT],
  output logic [N_OUT-1:0] out_en,
  output logic [DW-1:0]    out_data [N_OUT]
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_en <= '0;
    else        out_en <= en;

  for (genvar o = 0; o < N_OUT; o++) begin : g_out
    always_ff @(posedge clk)
      if (en[o]) out_data[o] <= in_data[sel[o]];
  end
endmodule
