// Pre-check scheme: picks the decoder for a read.
//
// The raw error probability P_E of the cells grows with program/erase wear.
// P_E is compared with two programmable thresholds when a read starts:
// below th_q the low-latency binary-input decoder is used, below th_p the
// quantized-soft decoder, otherwise the pure-soft decoder. The selection is
// registered on load and held until the next load. P_E is an unsigned
// fixed-point estimate supplied by the system; how it is estimated, the
// number format and the two-threshold form are this design's choices.
module precheck
  import polar_pkg::*;
#(
  parameter int unsigned PW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [PW-1:0] pe_est,
  input  logic [PW-1:0] th_q,
  input  logic [PW-1:0] th_p,
  output dec_mode_e     mode
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            mode <= MODE_BINARY;
    else if (load) begin
      if (pe_est < th_q)      mode <= MODE_BINARY;
      else if (pe_est < th_p) mode <= MODE_QSOFT;
      else                    mode <= MODE_PSOFT;
    end
  end
endmodule
