// Binary Type II processing element (f-function) of the binary-input SC decoder.
//
// With LLRs quantized to {-1, 0, +1} the min-sum f-function reduces to the
// product of its operands. In 2-bit two's complement both +1 (01) and -1 (11)
// have LSB 1, so the output LSB is the AND of the input LSBs (0 as soon as one
// input is 0), and the output MSB is the XOR of the input MSBs, passed by a
// multiplexer only when the output is nonzero. This is the paper's structure:
// one AND gate, one XOR gate and one multiplexer. Combinational.
module pe_type2_bin (
  input  logic [1:0] x,
  input  logic [1:0] y,
  output logic [1:0] z
);
  logic nonzero;
  assign nonzero = x[0] & y[0];
  assign z[0]    = nonzero;
  assign z[1]    = nonzero ? (x[1] ^ y[1]) : 1'b0;
endmodule
