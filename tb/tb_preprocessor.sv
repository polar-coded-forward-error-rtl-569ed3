// Pre-processing check on a small page (CELLS=16). For each mode the
// testbench answers the page reads with per-cell voltages drawn at random
// against a fixed ladder of reference voltages, then checks the order of
// the references requested, the number of reads (3 binary, 9 quantized-
// soft), and every cell's hard-decision and table LLRs against values
// derived from the cell's true voltage interval. Random back-pressure on
// the LLR stream.
module automatic tb_preprocessor;
  import polar_pkg::*;
  localparam int CELLS = 16, QW = 6;
  logic clk = 0, rst_n = 0, start = 0, busy;
  dec_mode_e mode = MODE_BINARY;
  logic sense_req, sense_ack = 0;
  ref_e sense_ref;
  logic [CELLS-1:0] sense_bits = '0;
  logic signed [QW-1:0] lut_lsb [4], lut_msb [7];
  logic out_valid, out_ready = 0;
  logic [1:0] bin_msb, bin_lsb;
  logic signed [QW-1:0] q_msb, q_lsb;
  int checks = 0, failures = 0;
  preprocessor #(.CELLS(CELLS), .QW(QW)) dut (.*);
  always #5 clk = ~clk;

  // reference voltages in mV, ascending: q1 V0 q2 q3 V1 q4 q5 V2 q6
  int refmv [9];
  int volt [CELLS];
  initial begin
    refmv[REF_Q1] = 1000; refmv[REF_V0] = 1600; refmv[REF_Q2] = 2200;
    refmv[REF_Q3] = 3300; refmv[REF_V1] = 3900; refmv[REF_Q4] = 4400;
    refmv[REF_Q5] = 5000; refmv[REF_V2] = 5500; refmv[REF_Q6] = 6000;
    for (int r = 0; r < 4; r++) lut_lsb[r] = QW'(11 - 7 * r);
    for (int r = 0; r < 7; r++) lut_msb[r] = QW'(-20 + 5 * r);
  end

  // flash side: answer each read after a random delay
  int reads = 0;
  ref_e seen [$];
  always @(posedge clk) begin
    sense_ack <= 0;
    if (sense_req && !sense_ack && $urandom_range(2) == 0) begin
      for (int c = 0; c < CELLS; c++) sense_bits[c] <= volt[c] > refmv[sense_ref];
      sense_ack <= 1;
      reads++;
      seen.push_back(sense_ref);
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int f = 0; f < 12; f++) begin
      int c = 0;
      mode = (f % 2) ? MODE_QSOFT : MODE_BINARY;
      for (int k = 0; k < CELLS; k++) volt[k] = int'($urandom_range(7000)) - 500;
      reads = 0; seen.delete();
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (c < CELLS) begin
        out_ready = $urandom_range(1);
        #1;
        if (out_valid && out_ready) begin
          int v = volt[c];
          bit lsb_h = v > refmv[REF_V1];
          // Gray: S0=00 S1=10 S2=11 S3=01 (MSB,LSB); MSB=1 between V0 and V2
          bit msb_h = (v > refmv[REF_V0]) && !(v > refmv[REF_V2]);
          int rl = (v > refmv[REF_Q3]) + (v > refmv[REF_V1]) + (v > refmv[REF_Q4]);
          int rm = (v > refmv[REF_Q1]) + (v > refmv[REF_V0]) + (v > refmv[REF_Q2])
                 + (v > refmv[REF_Q5]) + (v > refmv[REF_V2]) + (v > refmv[REF_Q6]);
          checks += 2;
          if (bin_lsb != {lsb_h, 1'b1} || bin_msb != {msb_h, 1'b1}) begin
            failures++; $display("FAIL bin cell %0d v=%0d got %b %b", c, v, bin_msb, bin_lsb);
          end
          if (mode == MODE_QSOFT && (q_lsb != lut_lsb[rl] || q_msb != lut_msb[rm])) begin
            failures++; $display("FAIL q cell %0d v=%0d", c, v);
          end
          c++;
        end
        @(posedge clk); #1;
      end
      out_ready = 0;
      repeat (3) @(posedge clk);
      checks += 2;
      if (reads != (mode == MODE_QSOFT ? 9 : 3)) begin failures++; $display("FAIL reads %0d", reads); end
      if (seen[0] != REF_V1) failures++;
      checks++;
      if (busy) failures++;
    end
    // pure-soft: no reads
    mode = MODE_PSOFT; reads = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (reads != 0 || busy) failures++;
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
