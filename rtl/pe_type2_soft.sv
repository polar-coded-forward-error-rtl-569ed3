// Multi-bit Type II processing element (f-function) for the soft SC decoders.
//
// z = sign(x) * sign(y) * min(|x|, |y|), the min-sum approximation of the
// paper, on W-bit signed LLRs. Inputs are expected within
// +-(2^(W-1)-1), which every producer in this design guarantees by saturating.
// Combinational.
module pe_type2_soft #(
  parameter int unsigned W = 6
) (
  input  logic signed [W-1:0] x,
  input  logic signed [W-1:0] y,
  output logic signed [W-1:0] z
);
  logic [W-1:0] ax, ay, m;
  logic         neg;
  always_comb begin
    ax  = x[W-1] ? W'(-x) : W'(x);
    ay  = y[W-1] ? W'(-y) : W'(y);
    m   = (ax < ay) ? ax : ay;
    neg = x[W-1] ^ y[W-1];
    z   = neg ? -$signed(m) : $signed(m);
  end
endmodule
