// Checks the Gray assignment S0..S3 = 00, 10, 11, 01 (MSB, LSB) and that
// neighbouring levels differ in one bit.
module automatic tb_gray_mapper;
  logic msb, lsb; logic [1:0] level;
  int checks = 0, failures = 0;
  gray_mapper dut (.msb, .lsb, .level);
  initial begin
    logic [1:0] sym [4] = '{2'b00, 2'b10, 2'b11, 2'b01};
    logic [1:0] back [4];
    for (int l = 0; l < 4; l++) begin
      {msb, lsb} = sym[l];
      #1;
      checks++;
      if (int'(level) != l) begin failures++; $display("FAIL %b -> %0d, expected %0d", sym[l], level, l); end
      back[level] = sym[l];
    end
    for (int l = 0; l < 3; l++) begin
      checks++;
      if ($countones(back[l] ^ back[l+1]) != 1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
