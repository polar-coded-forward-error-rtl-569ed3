// End-to-end test of the error-correction module with a behavioural MLC page.
//
// Frames are written (information bits -> encoder -> Gray levels -> page
// model with Gaussian cell voltages) and read back with each of the three
// decoders, picked by the pre-check from the P_E estimate. Every decoded
// bit is compared with a reference SC decoder fed with LLRs that the
// testbench derives itself from the cell voltages (hard decisions at V0/V1/V2,
// quantized regions with tables computed here from Gaussian tail
// probabilities, or exact-voltage LLRs). The test counts, and requires at
// least once each: a read per decoder mode, programming stalled by the page,
// delayed sense acknowledges, and a frame with raw bit errors that decodes
// to the original data. Code rate 7/8 as in the paper's (8192,7168) code by
// default; K can be overridden, e.g. to 512 for a (1024,512) code.
module automatic tb_polar_fec_top;
  import polar_pkg::*;
  import polar_ref_pkg::*;
  parameter int N = 1024;
  parameter int FRAMES = 6;
  parameter int K = N / 8 * 7;  // -GK=512 gives the (1024,512) code
  localparam int CELLS = N / 2, QW = 6, PSW = 8, PW = 16;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] frozen;
  logic wr_valid = 0, wr_ready, wr_bit = 0, prog_valid, prog_ready;
  logic [1:0] prog_level;
  logic rd_start = 0;
  logic [PW-1:0] pe_est = 0, th_q = 16'd100, th_p = 16'd200;
  dec_mode_e rd_mode;
  logic signed [QW-1:0] lut_lsb [4], lut_msb [7];
  logic sense_req, sense_ack;
  ref_e sense_ref;
  logic [CELLS-1:0] sense_bits;
  logic ps_valid, ps_ready, ps_start = 0;
  logic signed [PSW-1:0] ps_llr_msb, ps_llr_lsb;
  logic rd_valid, rd_bit, rd_done, rd_busy;
  int checks = 0, failures = 0;

  polar_fec_top #(.N(N)) dut (.*);
  nand_mlc_model #(.CELLS(CELLS), .PSW(PSW)) flash (
    .clk, .prog_valid, .prog_ready, .prog_level,
    .sense_req, .sense_ref, .sense_ack, .sense_bits,
    .ps_start, .ps_valid, .ps_ready, .ps_llr_msb, .ps_llr_lsb);

  always #5 clk = ~clk;

  int sense_waits = 0;
  always @(posedge clk) if (sense_req && !sense_ack) sense_waits++;

  function automatic real qfun(real x);   // Gaussian tail, erfc approximation
    real z = (x < 0 ? -x : x) / $sqrt(2.0);
    real t = 1.0 / (1.0 + 0.5 * z);
    real e = t * $exp(-z*z - 1.26551223 + t*(1.00002368 + t*(0.37409196 + t*(0.09678418 +
             t*(-0.18628806 + t*(0.27886807 + t*(-1.13520398 + t*(1.48851587 +
             t*(-0.82215223 + t*0.17087277)))))))));
    return x >= 0 ? 0.5 * e : 1.0 - 0.5 * e;
  endfunction

  // probability that a cell with the given bit lands between lo and hi
  function automatic real preg(bit is_msb, bit b, real lo, real hi);
    real p = 0;
    for (int l = 0; l < 4; l++) begin
      bit lb = is_msb ? flash.msb_of(l) : flash.lsb_of(l);
      real s = flash.sdm[l] * flash.sigma;
      if (lb == b) p += qfun((lo - flash.mean[l]) / s) - qfun((hi - flash.mean[l]) / s);
    end
    return p + 1e-30;
  endfunction

  function automatic int satq(real v);
    int m = (1 << (QW - 1)) - 1, r = int'(v);
    return r > m ? m : r < -m ? -m : r;
  endfunction

  // LSB regions: (-inf,q3) (q3,V1) (V1,q4) (q4,inf); MSB regions split at q1 V0 q2 q5 V2 q6
  function automatic void make_luts();
    real e_l [5], e_m [8];
    e_l = '{-100.0, flash.vref[REF_Q3], flash.vref[REF_V1], flash.vref[REF_Q4], 100.0};
    e_m = '{-100.0, flash.vref[REF_Q1], flash.vref[REF_V0], flash.vref[REF_Q2],
            flash.vref[REF_Q5], flash.vref[REF_V2], flash.vref[REF_Q6], 100.0};
    for (int r = 0; r < 4; r++)
      lut_lsb[r] = QW'(satq(2.0 * $ln(preg(0, 0, e_l[r], e_l[r+1]) / preg(0, 1, e_l[r], e_l[r+1]))));
    for (int r = 0; r < 7; r++)
      lut_msb[r] = QW'(satq(2.0 * $ln(preg(1, 0, e_m[r], e_m[r+1]) / preg(1, 1, e_m[r], e_m[r+1]))));
  endfunction

  bit frz[];
  int mode_count [3] = '{0, 0, 0};
  int corrected = 0;

  initial begin
    construct(N, K, frz);
    foreach (frz[i]) frozen[i] = frz[i];
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      bit u[], x[], uref[];
      int info[$], got[$], llr[], raw_err = 0;
      dec_mode_e m = dec_mode_e'(f % 3);
      flash.set_sigma(m == MODE_BINARY ? 0.235 : 0.26);
      make_luts();
      // ---- write
      u = new[N];
      foreach (u[i]) begin u[i] = frz[i] ? 1'b0 : 1'($urandom); if (!frz[i]) info.push_back(int'(u[i])); end
      encode(u, x);
      flash.prog_cnt = 0;
      while (info.size() > 0) begin
        wr_valid = 1; wr_bit = 1'(info[0]);
        @(posedge clk);
        if (wr_ready) void'(info.pop_front());
        #1;
      end
      wr_valid = 0;
      while (flash.prog_cnt < CELLS) @(posedge clk);
      #1;
      // check the programmed Gray levels and build the expected LLRs
      llr = new[N];
      for (int c = 0; c < CELLS; c++) begin
        int l = flash.level[c];
        real v = flash.volt[c];
        checks++;
        if (flash.msb_of(l) != x[2*c] || flash.lsb_of(l) != x[2*c+1]) begin
          failures++; if (failures < 10) $display("FAIL programmed level cell %0d: level %0d x=%0d%0d prog_cnt=%0d", c, l, x[2*c], x[2*c+1], flash.prog_cnt);
        end
        if (m == MODE_BINARY) begin
          bit hl = v > flash.vref[REF_V1];
          bit hm = hl ^ (hl ? (v > flash.vref[REF_V2]) : (v > flash.vref[REF_V0]));
          llr[2*c] = hm ? -1 : 1; llr[2*c+1] = hl ? -1 : 1;
        end else if (m == MODE_QSOFT) begin
          int rl = (v > flash.vref[REF_Q3]) + (v > flash.vref[REF_V1]) + (v > flash.vref[REF_Q4]);
          int rm = (v > flash.vref[REF_Q1]) + (v > flash.vref[REF_V0]) + (v > flash.vref[REF_Q2])
                 + (v > flash.vref[REF_Q5]) + (v > flash.vref[REF_V2]) + (v > flash.vref[REF_Q6]);
          llr[2*c] = int'(lut_msb[rm]); llr[2*c+1] = int'(lut_lsb[rl]);
        end else begin
          llr[2*c] = flash.soft_llr(v, 1'b1); llr[2*c+1] = flash.soft_llr(v, 1'b0);
        end
        if ((llr[2*c] < 0) != x[2*c]) raw_err++;
        if ((llr[2*c+1] < 0) != x[2*c+1]) raw_err++;
      end
      sc_decode(llr, frz, m == MODE_BINARY ? 2 : (m == MODE_QSOFT ? QW : PSW), uref);
      // ---- read
      pe_est = (m == MODE_BINARY) ? 16'd50 : (m == MODE_QSOFT) ? 16'd150 : 16'd250;
      @(negedge clk) rd_start = 1;
      @(negedge clk) rd_start = 0;
      checks++;
      if (rd_mode != m) begin failures++; $display("FAIL pre-check picked %0d, expected %0d", rd_mode, m); end
      mode_count[rd_mode]++;
      if (m == MODE_PSOFT) begin ps_start = 1; @(negedge clk) ps_start = 0; end
      while (!rd_done) begin
        @(posedge clk);
        if (rd_valid) got.push_back(int'(rd_bit));
        #1;
      end
      begin
        int k = 0; bit ok = 1;
        checks++;
        if (got.size() != K) begin failures++; $display("FAIL %0d bits out", got.size()); end
        for (int i = 0; i < N; i++) if (!frz[i]) begin
          checks++;
          if (k >= got.size() || got[k] != int'(uref[i])) begin
            failures++; if (failures < 10) $display("FAIL frame %0d bit %0d", f, i);
          end
          if (k >= got.size() || got[k] != int'(u[i])) ok = 0;
          k++;
        end
        if (ok && raw_err > 0) corrected++;
        $display("frame %0d mode %0d raw errors %0d decoded %s", f, m, raw_err, ok ? "correctly" : "with errors");
      end
      repeat (2) @(posedge clk);
      #1;
      checks++;
      if (rd_busy) failures++;
    end
    foreach (mode_count[i]) begin
      checks++;
      if (mode_count[i] == 0) begin failures++; $display("FAIL mode %0d never used", i); end
    end
    checks += 3;
    if (flash.prog_stalls == 0) begin failures++; $display("FAIL no programming stall"); end
    if (sense_waits == 0) begin failures++; $display("FAIL no sense wait"); end
    if (corrected == 0) begin failures++; $display("FAIL no frame with corrected raw errors"); end
    $display("modes binary=%0d qsoft=%0d psoft=%0d, prog stalls=%0d, sense waits=%0d, corrected frames=%0d",
             mode_count[0], mode_count[1], mode_count[2], flash.prog_stalls, sense_waits, corrected);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (FRAMES * (N * 40 + 50000)) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
