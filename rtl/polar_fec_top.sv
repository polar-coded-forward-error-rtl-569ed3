// Polar-coded error-correction module for a 2-bit/cell (MLC) NAND page.
//
// Write path: information bits -> polar_encoder (x = u G_N) -> gray_mapper
// -> one program level per cell on prog_*. Read path: rd_start latches the
// pre-check decision (precheck), which picks one of three SC decoders:
//   binary-input   (2-bit LLRs, 3 page reads, binary PEs),
//   quantized-soft (QW-bit LLRs from region tables, 9 page reads),
//   pure-soft      (PSW-bit LLRs supplied on ps_* by an external
//                   voltage-to-LLR stage, no reads).
// For the first two the preprocessor runs the page reads on sense_* and
// streams per-cell LLRs into the chosen decoder; decoded information bits
// leave on rd_valid/rd_bit and rd_done pulses at the end of the frame.
// rd_mode shows the decoder in use; rd_busy is high while a read is in
// progress. The flash array and its sense
// amplifiers are outside this module. The three-decoder organisation
// follows the paper's block diagram; the ports, handshakes and the sharing
// of one frozen mask by encoder and decoders are this design's choices.
module polar_fec_top
  import polar_pkg::*;
#(
  parameter int unsigned N   = 8192,
  parameter int unsigned QW  = 6,
  parameter int unsigned PSW = 8,
  parameter int unsigned PW  = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N-1:0]          frozen,
  // write: information bits in, cell program levels out
  input  logic                  wr_valid,
  output logic                  wr_ready,
  input  logic                  wr_bit,
  output logic                  prog_valid,
  input  logic                  prog_ready,
  output logic [1:0]            prog_level,
  // read control and pre-check
  input  logic                  rd_start,
  input  logic [PW-1:0]         pe_est,
  input  logic [PW-1:0]         th_q,
  input  logic [PW-1:0]         th_p,
  output dec_mode_e             rd_mode,
  // quantized-soft LLR tables
  input  logic signed [QW-1:0]  lut_lsb [4],
  input  logic signed [QW-1:0]  lut_msb [7],
  // page sensing
  output logic                  sense_req,
  output ref_e                  sense_ref,
  input  logic                  sense_ack,
  input  logic [N/2-1:0]        sense_bits,
  // pure-soft LLRs, one cell per clock
  input  logic                  ps_valid,
  output logic                  ps_ready,
  input  logic signed [PSW-1:0] ps_llr_msb,
  input  logic signed [PSW-1:0] ps_llr_lsb,
  // decoded information bits
  output logic                  rd_valid,
  output logic                  rd_bit,
  output logic                  rd_done,
  output logic                  rd_busy
);
  localparam int unsigned CELLS = N / 2;

  // ---------------------------------------------------------------- write path
  logic enc_msb, enc_lsb;
  polar_encoder #(.N(N)) u_enc (
    .clk, .rst_n, .frozen,
    .in_valid(wr_valid), .in_ready(wr_ready), .in_bit(wr_bit),
    .out_valid(prog_valid), .out_ready(prog_ready),
    .out_msb(enc_msb), .out_lsb(enc_lsb));

  gray_mapper u_gray (.msb(enc_msb), .lsb(enc_lsb), .level(prog_level));

  // ---------------------------------------------------------------- pre-check
  logic rd_start_q;
  precheck #(.PW(PW)) u_pc (
    .clk, .rst_n, .load(rd_start), .pe_est, .th_q, .th_p, .mode(rd_mode));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rd_start_q <= 1'b0;
    else        rd_start_q <= rd_start;

  // ---------------------------------------------------------------- sensing
  logic                 pp_valid, pp_ready, pp_busy;
  logic [1:0]           pp_bin_msb, pp_bin_lsb;
  logic signed [QW-1:0] pp_q_msb, pp_q_lsb;
  preprocessor #(.CELLS(CELLS), .QW(QW)) u_pp (
    .clk, .rst_n, .mode(rd_mode), .start(rd_start_q), .busy(pp_busy),
    .sense_req, .sense_ref, .sense_ack, .sense_bits,
    .lut_lsb, .lut_msb,
    .out_valid(pp_valid), .out_ready(pp_ready),
    .bin_msb(pp_bin_msb), .bin_lsb(pp_bin_lsb), .q_msb(pp_q_msb), .q_lsb(pp_q_lsb));

  // ---------------------------------------------------------------- decoders
  logic bin_rdy, qs_rdy, ps_rdy;
  logic bin_ov, qs_ov, ps_ov, bin_ob, qs_ob, ps_ob, bin_dn, qs_dn, ps_dn;
  logic bin_busy, qs_busy, ps_busy;

  sc_decoder #(.N(N), .W(2), .BINARY(1'b1)) u_dec_bin (
    .clk, .rst_n, .frozen,
    .in_valid(pp_valid && rd_mode == MODE_BINARY), .in_ready(bin_rdy),
    .in_llr_msb(pp_bin_msb), .in_llr_lsb(pp_bin_lsb),
    .out_valid(bin_ov), .out_bit(bin_ob), .done(bin_dn), .busy(bin_busy));

  sc_decoder #(.N(N), .W(QW), .BINARY(1'b0)) u_dec_qsoft (
    .clk, .rst_n, .frozen,
    .in_valid(pp_valid && rd_mode == MODE_QSOFT), .in_ready(qs_rdy),
    .in_llr_msb(pp_q_msb), .in_llr_lsb(pp_q_lsb),
    .out_valid(qs_ov), .out_bit(qs_ob), .done(qs_dn), .busy(qs_busy));

  sc_decoder #(.N(N), .W(PSW), .BINARY(1'b0)) u_dec_psoft (
    .clk, .rst_n, .frozen,
    .in_valid(ps_valid && rd_mode == MODE_PSOFT), .in_ready(ps_rdy),
    .in_llr_msb(ps_llr_msb), .in_llr_lsb(ps_llr_lsb),
    .out_valid(ps_ov), .out_bit(ps_ob), .done(ps_dn), .busy(ps_busy));

  assign rd_busy  = pp_busy || bin_busy || qs_busy || ps_busy;
  assign pp_ready = (rd_mode == MODE_QSOFT) ? qs_rdy : bin_rdy;
  assign ps_ready = (rd_mode == MODE_PSOFT) && ps_rdy;

  always_comb begin
    unique case (rd_mode)
      MODE_QSOFT: begin rd_valid = qs_ov;  rd_bit = qs_ob;  rd_done = qs_dn;  end
      MODE_PSOFT: begin rd_valid = ps_ov;  rd_bit = ps_ob;  rd_done = ps_dn;  end
      default:    begin rd_valid = bin_ov; rd_bit = bin_ob; rd_done = bin_dn; end
    endcase
  end
endmodule
