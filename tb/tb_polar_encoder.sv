// Encoder check: random information words on a constructed (N,K) code are
// encoded and compared, cell by cell, with u G_N computed from the matrix
// definition. Also checks the cycle budget (N fill + log2 N butterfly
// clocks before the first cell) and random output back-pressure.
module automatic tb_polar_encoder;
  import polar_ref_pkg::*;
  localparam int N = 64, K = 40, LOGN = 6;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] frozen;
  logic in_valid = 0, in_ready, in_bit = 0, out_valid, out_ready = 0, out_msb, out_lsb;
  int checks = 0, failures = 0;
  polar_encoder #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  bit frz[];
  initial begin
    construct(N, K, frz);
    foreach (frz[i]) frozen[i] = frz[i];
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int f = 0; f < 20; f++) begin
      bit u[], x[];
      int info[$], cyc, c;
      u = new[N];
      for (int i = 0; i < N; i++) begin u[i] = frz[i] ? 1'b0 : 1'($urandom); if (!frz[i]) info.push_back(int'(u[i])); end
      encode(u, x);
      cyc = 0;
      // stream the information bits (valid with random gaps only in later frames)
      while (info.size() > 0 || !out_valid) begin
        in_valid = (info.size() > 0) && (f == 0 || $urandom_range(3) != 0);
        in_bit   = (info.size() > 0) ? 1'(info[0]) : 1'b0;
        @(posedge clk);
        cyc++;
        if (in_valid && in_ready) void'(info.pop_front());
        #1;
      end
      in_valid = 0;
      if (f == 0) begin
        checks++;
        if (cyc != N + LOGN) begin failures++; $display("FAIL cycles %0d expected %0d", cyc, N + LOGN); end
      end
      c = 0;
      while (c < N/2) begin
        out_ready = (f < 2) || ($urandom_range(2) != 0);
        #1;
        if (out_valid && out_ready) begin
          checks++;
          if (out_msb != x[2*c] || out_lsb != x[2*c+1]) begin
            failures++;
            if (failures < 10) $display("FAIL frame %0d cell %0d got %b%b exp %b%b", f, c, out_msb, out_lsb, x[2*c], x[2*c+1]);
          end
          c++;
        end
        @(posedge clk); #1;
      end
      out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
