// Behavioural model of an MLC NAND page and its sense amplifiers (not
// synthesizable; for testbenches only).
//
// Each cell is programmed to a level 0..3 and gets a threshold voltage drawn
// from a Gaussian with mean 0, 3.25, 4.55 or 6.5 V and standard deviation
// 2s, s, s or 1.4s, where s (sigma) is set by the testbench. A page read at
// reference r returns, per cell, 1 if the cell voltage is above vref[r].
// The hard references V0, V1, V2 are the intersections of neighbouring
// densities; q1..q6 sit qoff*s on either side of them. On ps_start the model
// also streams, one cell per clock, the exact-voltage LLRs
// ln(sum p(bit=0) / sum p(bit=1)) of MSB and LSB, scaled by LLR_SCALE and
// saturated to PSW bits, which is what a pure-soft front end would deliver.
// prog_ready and sense_ack come with random delays to exercise handshakes.
module nand_mlc_model
  import polar_pkg::*;
#(
  parameter int CELLS = 512,
  parameter int PSW   = 8
) (
  input  logic                  clk,
  input  logic                  prog_valid,
  output logic                  prog_ready,
  input  logic [1:0]            prog_level,
  input  logic                  sense_req,
  input  ref_e                  sense_ref,
  output logic                  sense_ack,
  output logic [CELLS-1:0]      sense_bits,
  input  logic                  ps_start,
  output logic                  ps_valid,
  input  logic                  ps_ready,
  output logic signed [PSW-1:0] ps_llr_msb,
  output logic signed [PSW-1:0] ps_llr_lsb
);
  localparam real LLR_SCALE = 2.0;
  real mean [4] = '{0.0, 3.25, 4.55, 6.5};
  real sdm  [4] = '{2.0, 1.0, 1.0, 1.4};
  real sigma = 0.25;
  real qoff  = 0.4;
  real volt [CELLS];
  logic [1:0] level [CELLS];
  real vref [NUM_REFS];
  int  prog_cnt = 0, prog_stalls = 0, ps_cnt = 0;
  bit  ps_on = 0;

  // Gray code of each level as (MSB, LSB)
  function automatic bit msb_of(int l); return l == 1 || l == 2; endfunction
  function automatic bit lsb_of(int l); return l >= 2; endfunction

  function automatic real pdf(int l, real x);
    real s = sdm[l] * sigma;
    return $exp(-((x - mean[l]) ** 2) / (2.0 * s * s)) / (s * $sqrt(2.0 * 3.14159265358979));
  endfunction

  function automatic real gauss();
    real u1 = (real'($urandom) + 1.0) / 4294967297.0;
    real u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * 3.14159265358979 * u2);
  endfunction

  // bisection for pdf(l) = pdf(l+1) between the two means
  function automatic real crossing(int l);
    real lo = mean[l], hi = mean[l+1], mid;
    for (int it = 0; it < 60; it++) begin
      mid = (lo + hi) / 2.0;
      if (pdf(l, mid) > pdf(l + 1, mid)) lo = mid; else hi = mid;
    end
    return mid;
  endfunction

  function automatic void set_sigma(real s);
    sigma = s;
    vref[REF_V0] = crossing(0); vref[REF_V1] = crossing(1); vref[REF_V2] = crossing(2);
    vref[REF_Q1] = vref[REF_V0] - qoff * s; vref[REF_Q2] = vref[REF_V0] + qoff * s;
    vref[REF_Q3] = vref[REF_V1] - qoff * s; vref[REF_Q4] = vref[REF_V1] + qoff * s;
    vref[REF_Q5] = vref[REF_V2] - qoff * s; vref[REF_Q6] = vref[REF_V2] + qoff * s;
  endfunction

  function automatic int sat(real v);
    int m = (1 << (PSW - 1)) - 1;
    int r = int'(v);
    if (r > m) r = m;
    if (r < -m) r = -m;
    return r;
  endfunction

  // exact-voltage LLRs (positive = bit 0)
  function automatic int soft_llr(real x, bit is_msb);
    real p0 = 1e-300, p1 = 1e-300;
    for (int l = 0; l < 4; l++) begin
      bit b = is_msb ? msb_of(l) : lsb_of(l);
      if (b) p1 += pdf(l, x); else p0 += pdf(l, x);
    end
    return sat(LLR_SCALE * $ln(p0 / p1));
  endfunction

  initial set_sigma(0.25);

  always @(posedge clk) begin
    prog_ready <= ($urandom_range(3) != 0);
    if (prog_valid && prog_ready) begin
      level[prog_cnt % CELLS] = prog_level;
      volt[prog_cnt % CELLS]  = mean[prog_level] + sdm[prog_level] * sigma * gauss();
      prog_cnt++;
    end else if (prog_valid) prog_stalls++;
  end

  always @(posedge clk) begin
    sense_ack <= 1'b0;
    if (sense_req && !sense_ack && $urandom_range(3) == 0) begin
      for (int c = 0; c < CELLS; c++) sense_bits[c] <= volt[c] > vref[sense_ref];
      sense_ack <= 1'b1;
    end
  end

  assign ps_valid   = ps_on;
  assign ps_llr_msb = PSW'(soft_llr(volt[ps_cnt], 1'b1));
  assign ps_llr_lsb = PSW'(soft_llr(volt[ps_cnt], 1'b0));
  always @(posedge clk) begin
    if (ps_start) begin ps_on <= 1'b1; ps_cnt <= 0; end
    else if (ps_on && ps_ready) begin
      if (ps_cnt == CELLS - 1) begin ps_on <= 1'b0; ps_cnt <= 0; end
      else ps_cnt <= ps_cnt + 1;
    end
  end
endmodule
