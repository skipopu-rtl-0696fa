// dsp_mac -- arithmetic of one DSP48E2 slice in the configuration the PE uses.
//
// Computes P = (D +/- A) * B + C: a 27-bit pre-adder, a 27x18 signed
// multiplier and a 48-bit post-adder whose third operand enters through the
// C port.  All operands are two's complement.  The paper instantiates the
// vendor DSP48E2 primitive directly; this module writes the same arithmetic
// as portable RTL so the PE can be simulated and synthesised anywhere.
//
// Timing: one register on P (the slice's PREG); P is valid one clock after
// the operands when ce is high.  sub=1 selects D - A in the pre-adder.
module dsp_mac (
  input  logic               clk,
  input  logic               ce,
  input  logic               sub,
  input  logic signed [26:0] a,
  input  logic signed [26:0] d,
  input  logic signed [17:0] b,
  input  logic signed [47:0] c,
  output logic signed [47:0] p
);
  logic signed [26:0] pre;
  logic signed [47:0] prod;

  always_comb begin
    pre  = sub ? (d - a) : (d + a);
    prod = 48'(pre) * 48'(b);
  end

  always_ff @(posedge clk)
    if (ce) p <= prod + c;

endmodule
