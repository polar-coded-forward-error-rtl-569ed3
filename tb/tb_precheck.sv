// Checks the decoder selection against the two thresholds, that it is
// registered on load and held otherwise.
module automatic tb_precheck;
  import polar_pkg::*;
  logic clk = 0, rst_n = 0, load = 0;
  logic [15:0] pe_est = 0, th_q = 16'd100, th_p = 16'd1000;
  dec_mode_e mode;
  int checks = 0, failures = 0;
  precheck #(.PW(16)) dut (.*);
  always #5 clk = ~clk;
  logic [15:0] corner [6] = '{16'd0, 16'd99, 16'd100, 16'd999, 16'd1000, 16'd65535};
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      dec_mode_e exp_m, prev_mode;
      pe_est = t < 6 ? corner[t] : 16'($urandom_range(2000));
      prev_mode = mode;
      @(negedge clk);
      checks++;
      if (mode != prev_mode) failures++;        // no load: held
      load = 1;
      @(negedge clk);
      load = 0;
      exp_m = pe_est < th_q ? MODE_BINARY : pe_est < th_p ? MODE_QSOFT : MODE_PSOFT;
      checks++;
      if (mode != exp_m) begin failures++; $display("FAIL pe=%0d mode=%0d exp=%0d", pe_est, mode, exp_m); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
