// Multi-bit Type I processing element (g-function) for the soft SC decoders.
//
// z = (-1)^u * x + y on W-bit signed LLRs, saturated symmetrically to
// +-(2^(W-1)-1). The function is the paper's min-sum SC update; the width and
// the saturation are this design's choice (the paper evaluates the soft
// decoders with floating-point LLRs). Combinational.
module pe_type1_soft #(
  parameter int unsigned W = 6
) (
  input  logic                u,
  input  logic signed [W-1:0] x,
  input  logic signed [W-1:0] y,
  output logic signed [W-1:0] z
);
  localparam logic signed [W:0] MAXV = (W+1)'((1 << (W-1)) - 1);
  logic signed [W:0] sum;
  always_comb begin
    sum = u ? (W+1)'(y) - (W+1)'(x) : (W+1)'(y) + (W+1)'(x);
    if (sum > MAXV)       z = MAXV[W-1:0];
    else if (sum < -MAXV) z = -MAXV[W-1:0];
    else                  z = sum[W-1:0];
  end
endmodule
