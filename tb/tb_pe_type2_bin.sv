// Exhaustive check of the binary Type II PE against the product X*Y.
module automatic tb_pe_type2_bin;
  logic [1:0] x, y, z;
  int checks = 0, failures = 0;
  pe_type2_bin dut (.x, .y, .z);
  function automatic int dec2(logic [1:0] v); return v == 2'b11 ? -1 : int'(v); endfunction
  initial begin
    logic [1:0] codes [3] = '{2'b11, 2'b00, 2'b01};
    foreach (codes[a]) foreach (codes[b]) begin
      x = codes[a]; y = codes[b];
      #1;
      checks++;
      if (dec2(z) != dec2(x) * dec2(y) || z == 2'b10) begin
        failures++;
        $display("FAIL x=%b y=%b z=%b", x, y, z);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
