// Shared types and helpers of the polar-coded MLC NAND error-correction module.
// The decoder modes follow the three decoders of the pre-check scheme; the
// reference indices name the nine read voltages of the practical sensing
// scheme (three hard-decision references V0, V1, V2 and six soft-decision
// references q1..q6). The numeric encodings are this design's own choice.
package polar_pkg;

  // Decoder picked by the pre-check scheme.
  typedef enum logic [1:0] {
    MODE_BINARY = 2'd0,   // 2-bit binary-input SC decoder, 3 page reads
    MODE_QSOFT  = 2'd1,   // quantized-soft SC decoder, 9 page reads
    MODE_PSOFT  = 2'd2    // pure-soft SC decoder, LLRs supplied from outside
  } dec_mode_e;

  // Read reference voltages. The LSB reference V1 comes first because the
  // detector decides the LSB first; V0/V2 then give the MSB.
  typedef enum logic [3:0] {
    REF_V1 = 4'd0,   // hard boundary between S1 and S2 (H2)
    REF_V0 = 4'd1,   // hard boundary between S0 and S1 (H1)
    REF_V2 = 4'd2,   // hard boundary between S2 and S3 (H3)
    REF_Q1 = 4'd3,
    REF_Q2 = 4'd4,
    REF_Q3 = 4'd5,
    REF_Q4 = 4'd6,
    REF_Q5 = 4'd7,
    REF_Q6 = 4'd8
  } ref_e;

  localparam int unsigned NUM_REFS     = 9;
  localparam int unsigned READS_BINARY = 3;
  localparam int unsigned READS_QSOFT  = 9;

  // Reverse the low nbits bits of v (permutation B_N of the generator matrix).
  function automatic int unsigned bitrev(input int unsigned v, input int unsigned nbits);
    int unsigned r;
    r = 0;
    for (int unsigned k = 0; k < nbits; k++) r |= ((v >> k) & 1) << (nbits - 1 - k);
    return r;
  endfunction

  // Number of trailing zero bits of a nonzero value.
  function automatic int unsigned ctz(input int unsigned v, input int unsigned nbits);
    int unsigned r;
    r = nbits;
    for (int k = int'(nbits) - 1; k >= 0; k--) if (((v >> k) & 1) != 0) r = k;
    return r;
  endfunction

endpackage
