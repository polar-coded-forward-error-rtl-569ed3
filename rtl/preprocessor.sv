// Pre-processing: sensing sequence, hard-result buffer and LLR conversion.
//
// A read of one page (CELLS cells) starts with start. For the binary-input
// decoder three page reads are issued (V1, then V0 and V2); for the
// quantized-soft decoder nine (V1, V0, V2, q1..q6). Each read is a
// sense_req/sense_ack handshake with the flash: sense_ref names the
// reference and sense_bits returns, per cell, 1 if its threshold voltage is
// above that reference. The results are kept in a buffer of nine
// CELLS-bit words, one per reference, written once per read.
//
// Then the cells are streamed to the decoder, one per clock under
// out_valid/out_ready, with both LLR forms computed from the buffer:
//   binary-input: LSB = c(V1); MSB = LSB XOR c(V0 or V2), the reference
//                 chosen by the LSB (Gray code). A hard bit b becomes the
//                 2-bit LLR {b,1}, i.e. +1 for 0 and -1 for 1, so
//                 bit 0 of bin_msb and bin_lsb is always 1 (the decoder's
//                 inner LLRs can also be 0, hence the 2-bit format).
//   quantized-soft: the LSB region is the number of q3, V1, q4 exceeded
//                 (0..3), the MSB region the number of q1, V0, q2, q5, V2,
//                 q6 exceeded (0..6); each region indexes a programmable
//                 LLR table (positive = bit 0) that software fills from
//                 the Gaussian model of the cells.
// The reference set and the XOR-based hard detection follow the paper;
// page-wide reads, the buffer, the tables and all encodings are this
// design's choices. mode must stay stable during a read; a start in pure-soft
// mode does nothing (that decoder takes its LLRs from elsewhere).
module preprocessor
  import polar_pkg::*;
#(
  parameter int unsigned CELLS = 4096,
  parameter int unsigned QW    = 6
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  dec_mode_e            mode,
  input  logic                 start,
  output logic                 busy,
  // page sensing
  output logic                 sense_req,
  output ref_e                 sense_ref,
  input  logic                 sense_ack,
  input  logic [CELLS-1:0]     sense_bits,
  // quantized-soft LLR tables
  input  logic signed [QW-1:0] lut_lsb [4],
  input  logic signed [QW-1:0] lut_msb [7],
  // LLR stream, one cidx per clock
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [1:0]           bin_msb,
  output logic [1:0]           bin_lsb,
  output logic signed [QW-1:0] q_msb,
  output logic signed [QW-1:0] q_lsb
);
  localparam int unsigned CW = $clog2(CELLS);

  typedef enum logic [1:0] {S_IDLE, S_SENSE, S_STREAM} state_e;
  state_e state;

  logic [CELLS-1:0]    hard [NUM_REFS]; // hard[r][c]: cell c above reference r
  logic [3:0]          rd;             // current read number
  logic [CW-1:0]       cidx;
  logic [3:0]          n_reads;

  assign n_reads   = (mode == MODE_QSOFT) ? 4'(READS_QSOFT) : 4'(READS_BINARY);
  assign sense_req = (state == S_SENSE);
  assign sense_ref = ref_e'(rd);
  assign out_valid = (state == S_STREAM);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      rd    <= '0;
      cidx  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start && mode != MODE_PSOFT) begin
          rd    <= '0;
          state <= S_SENSE;
        end
        S_SENSE: if (sense_ack) begin
          rd <= rd + 1'b1;
          if (rd == n_reads - 1'b1) begin
            cidx  <= '0;
            state <= S_STREAM;
          end
        end
        S_STREAM: if (out_ready) begin
          cidx <= cidx + 1'b1;
          if (cidx == CW'(CELLS - 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_SENSE && sense_ack) hard[rd] <= sense_bits;
  end

  // ---------------------------------------------------------------- LLRs
  logic [NUM_REFS-1:0] h;
  logic                hb_lsb, hb_msb;
  logic [1:0]          reg_lsb;
  logic [2:0]          reg_msb;
  always_comb begin
    for (int unsigned r = 0; r < NUM_REFS; r++) h[r] = hard[r][cidx];
    hb_lsb  = h[REF_V1];
    hb_msb  = hb_lsb ^ (hb_lsb ? h[REF_V2] : h[REF_V0]);
    bin_lsb = {hb_lsb, 1'b1};
    bin_msb = {hb_msb, 1'b1};
    reg_lsb = 2'(h[REF_Q3]) + 2'(h[REF_V1]) + 2'(h[REF_Q4]);
    reg_msb = 3'(h[REF_Q1]) + 3'(h[REF_V0]) + 3'(h[REF_Q2])
            + 3'(h[REF_Q5]) + 3'(h[REF_V2]) + 3'(h[REF_Q6]);
    q_lsb   = lut_lsb[reg_lsb];
    q_msb   = lut_msb[reg_msb];
  end
endmodule
