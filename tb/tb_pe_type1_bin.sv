// Exhaustive check of the binary Type I PE against (-1)^u X + Y saturated to +-1.
module automatic tb_pe_type1_bin;
  logic u; logic [1:0] x, y, z;
  int checks = 0, failures = 0;
  pe_type1_bin dut (.u, .x, .y, .z);
  function automatic int dec2(logic [1:0] v); return v == 2'b11 ? -1 : int'(v); endfunction
  initial begin
    logic [1:0] codes [3] = '{2'b11, 2'b00, 2'b01};
    for (int uu = 0; uu < 2; uu++)
      foreach (codes[a]) foreach (codes[b]) begin
        int e;
        u = uu[0]; x = codes[a]; y = codes[b];
        #1;
        e = (uu ? -dec2(x) : dec2(x)) + dec2(y);
        if (e > 1) e = 1;
        if (e < -1) e = -1;
        checks++;
        if (dec2(z) != e) begin
          failures++;
          $display("FAIL u=%0d x=%b y=%b z=%b expected %0d", u, x, y, z, e);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
