// Gray mapping of a codeword bit pair onto an MLC program level.
//
// Two codeword bits (MSB, LSB) select one of four threshold-voltage states
// S0 < S1 < S2 < S3 with the paper's Gray assignment 00, 10, 11, 01, so that
// neighbouring states differ in exactly one bit and a cell that drifts into
// its neighbour costs one raw bit error. level is the state index 0..3.
// Combinational.
module gray_mapper (
  input  logic       msb,
  input  logic       lsb,
  output logic [1:0] level
);
  always_comb begin
    unique case ({msb, lsb})
      2'b00:   level = 2'd0;   // S0
      2'b10:   level = 2'd1;   // S1
      2'b11:   level = 2'd2;   // S2
      default: level = 2'd3;   // S3 (01)
    endcase
  end
endmodule
