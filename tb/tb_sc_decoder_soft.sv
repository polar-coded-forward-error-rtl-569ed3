// Soft (min-sum) SC decoder check, W-bit LLRs (N=256 by default).
// Each frame: random information bits, encode with the matrix definition,
// add Gaussian-like noise to +-A, saturate to W bits (positive = 0),
// and compare every decoded bit with the
// reference SC model. Error-free frames must return the data exactly.
// The decoding time is checked against N/2 + nN + N + (n-1)N/2 clocks.
module automatic tb_sc_decoder_soft;
  import polar_ref_pkg::*;
  parameter int N = 256, K = 192;
  localparam int LOGN = $clog2(N);
  parameter int W = 6;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] frozen;
  logic in_valid = 0, in_ready, out_valid, out_bit, done, busy;
  logic signed [W-1:0] in_llr_msb = 0, in_llr_lsb = 0;
  int checks = 0, failures = 0;
  sc_decoder #(.N(N), .W(W), .BINARY(1'b0)) dut (.*);
  always #5 clk = ~clk;
  bit frz[];
  initial begin
    int exp_cycles = N/2 + LOGN*N + N + (LOGN-1)*N/2;
    construct(N, K, frz);
    foreach (frz[i]) frozen[i] = frz[i];
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int f = 0; f < 30; f++) begin
      bit u[], x[], uref[];
      int llr[];
      int got[$], cyc, nerr, pct;
      u = new[N]; llr = new[N];
      foreach (u[i]) u[i] = frz[i] ? 1'b0 : 1'($urandom);
      encode(u, x);
      pct = (f < 3) ? 0 : int'($urandom_range(8));
      nerr = 0;
      foreach (x[i]) begin
        int maxv = (1 << (W-1)) - 1;
        int nz = 0;
        for (int t = 0; t < 4; t++) nz += int'($urandom_range(2*pct)) - pct;
        llr[i] = (x[i] ? -6 : 6) + nz;
        if (llr[i] > maxv) llr[i] = maxv;
        if (llr[i] < -maxv) llr[i] = -maxv;
        if ((llr[i] < 0) != x[i]) nerr++;
      end
      sc_decode(llr, frz, W, uref);
      cyc = 0;
      for (int c = 0; c < N/2; c++) begin
        in_valid = 1; in_llr_msb = W'(llr[2*c]); in_llr_lsb = W'(llr[2*c+1]);
        @(posedge clk); cyc++; #1;
        if (!in_ready && c < N/2 - 1) begin failures++; $display("FAIL not ready while loading"); end
      end
      in_valid = 0;
      while (!done) begin
        @(posedge clk); cyc++;
        if (out_valid) got.push_back(int'(out_bit));
        #1;
      end
      checks++;
      if (cyc != exp_cycles) begin failures++; $display("FAIL cycles %0d expected %0d", cyc, exp_cycles); end
      begin
        int k = 0;
        for (int i = 0; i < N; i++) if (!frz[i]) begin
          checks++;
          if (k >= got.size() || got[k] != int'(uref[i])) begin
            failures++;
            if (failures < 10) $display("FAIL frame %0d bit %0d", f, i);
          end
          if (pct == 0) begin checks++; if (k >= got.size() || got[k] != int'(u[i])) failures++; end
          k++;
        end
        checks++;
        if (got.size() != K) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
