// Random and corner checks of the W-bit min-sum Type I (g) and Type II (f) PEs.
module automatic tb_pe_soft;
  localparam int W = 6;
  localparam int M = (1 << (W-1)) - 1;
  logic u;
  logic signed [W-1:0] x, y, zg, zf;
  int checks = 0, failures = 0;
  pe_type1_soft #(.W(W)) dut_g (.u, .x, .y, .z(zg));
  pe_type2_soft #(.W(W)) dut_f (.x, .y, .z(zf));
  initial begin
    for (int t = 0; t < 4000; t++) begin
      int xi, yi, eg, ef, ax, ay;
      if (t < 2 * (2*M+1) * (2*M+1)) begin
        xi = (t / (2*M+1)) % (2*M+1) - M; yi = t % (2*M+1) - M; u = t >= (2*M+1)*(2*M+1);
      end else begin
        xi = int'($urandom_range(2*M)) - M; yi = int'($urandom_range(2*M)) - M; u = $urandom_range(1);
      end
      x = W'(xi); y = W'(yi);
      #1;
      eg = u ? yi - xi : yi + xi;
      if (eg > M) eg = M;
      if (eg < -M) eg = -M;
      ax = xi < 0 ? -xi : xi; ay = yi < 0 ? -yi : yi;
      ef = (ax < ay ? ax : ay) * ((xi < 0) != (yi < 0) ? -1 : 1);
      checks += 2;
      if (int'(zg) != eg) begin failures++; if (failures < 10) $display("FAIL g u=%0d %0d %0d -> %0d exp %0d", u, xi, yi, zg, eg); end
      if (int'(zf) != ef) begin failures++; if (failures < 10) $display("FAIL f %0d %0d -> %0d exp %0d", xi, yi, zf, ef); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
