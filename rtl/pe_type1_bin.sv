// Binary Type I processing element (g-function) of the binary-input SC decoder.
//
// Operands are 2-bit two's-complement LLRs restricted to {-1, 0, +1}
// (11, 00, 01). With u the partial-sum bit of the left sub-tree the result is
// X+Y for u=0 and -X+Y for u=1; results of +-2 saturate to +-1. The module is
// the 18-row truth table of that function, written as a case statement, so
// it synthesizes to a small two-level network with a 2:1 output multiplexer
// per bit selected by u. Purely combinational, zero latency.
//
// The truth table follows the paper. The paper also prints sum-of-products
// equations for this table; they disagree with the table in some rows (for
// u=0, X=00, Y=01 they give Z_M=1), so the table is what is implemented.
// Input code 10 (-2) never occurs in the decoder and maps to 00 here.
module pe_type1_bin (
  input  logic       u,
  input  logic [1:0] x,
  input  logic [1:0] y,
  output logic [1:0] z
);
  always_comb begin
    unique case ({u, x, y})
      // u = 0 : Z = X + Y
      5'b0_11_11: z = 2'b11;
      5'b0_11_00: z = 2'b11;
      5'b0_11_01: z = 2'b00;
      5'b0_00_11: z = 2'b11;
      5'b0_00_00: z = 2'b00;
      5'b0_00_01: z = 2'b01;
      5'b0_01_11: z = 2'b00;
      5'b0_01_00: z = 2'b01;
      5'b0_01_01: z = 2'b01;
      // u = 1 : Z = -X + Y
      5'b1_11_11: z = 2'b00;
      5'b1_11_00: z = 2'b01;
      5'b1_11_01: z = 2'b01;
      5'b1_00_11: z = 2'b11;
      5'b1_00_00: z = 2'b00;
      5'b1_00_01: z = 2'b01;
      5'b1_01_11: z = 2'b11;
      5'b1_01_00: z = 2'b11;
      5'b1_01_01: z = 2'b00;
      default:    z = 2'b00;   // operand -2 (10) is never produced
    endcase
  end
endmodule
