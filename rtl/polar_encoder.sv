// Polar encoder: information bit stream in, codeword out one MLC cell at a time.
//
// Computes x = u G_N with G_N = B_N F^(x)n (F = [1 0; 1 1], B_N the bit-reversal
// permutation). Three phases:
//   FILL  N clocks: position i of u takes the next stream bit if i is an
//         information position, or 0 if frozen (in_ready is low then);
//   BFLY  log2 N clocks: one butterfly stage of F^(x)n per clock on an
//         N-bit register (v[j] ^= v[j + 2^s] for every j with bit s clear);
//   OUT   N/2 clocks: cell c carries codeword bits 2c and 2c+1, read from
//         the register at bit-reversed addresses (this applies B_N), under
//         out_valid/out_ready.
// The code construction (the frozen mask, 1 = frozen) is an input. The paper
// defines the code by G_N; the serial-in / stage-per-clock structure is this
// design's choice.
module polar_encoder
  import polar_pkg::*;
#(
  parameter int unsigned N = 8192
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] frozen,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic         in_bit,
  output logic         out_valid,
  input  logic         out_ready,
  output logic         out_msb,
  output logic         out_lsb
);
  localparam int unsigned LOGN = $clog2(N);

  typedef enum logic [1:0] {S_FILL, S_BFLY, S_OUT} state_e;
  state_e state;

  logic [N-1:0]    v;
  logic [LOGN-1:0] idx;     // FILL: u position; OUT: cell number
  logic [LOGN-1:0] stage;

  assign in_ready  = (state == S_FILL) && !frozen[idx];
  assign out_valid = (state == S_OUT);
  assign out_msb   = v[bitrev(32'(idx) * 2,     LOGN)];
  assign out_lsb   = v[bitrev(32'(idx) * 2 + 1, LOGN)];

  // One butterfly stage of F^(x)n: each bit XORs in its partner 2^stage
  // above when its bit 'stage' is clear. Partners are constant per stage, so
  // each bit is an AND-OR selection over the stages in front of an XOR.
  logic [N-1:0] v_next;
  for (genvar j = 0; j < N; j++) begin : g_bfly
    logic [LOGN-1:0] hit;
    for (genvar s = 0; s < LOGN; s++) begin : g_stage
      if (((j >> s) & 1) == 0) begin : g_pair
        assign hit[s] = (stage == LOGN'(s)) && v[j + (1 << s)];
      end else begin : g_none
        assign hit[s] = 1'b0;
      end
    end
    assign v_next[j] = v[j] ^ (|hit);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_FILL;
      idx   <= '0;
      stage <= '0;
      v     <= '0;
    end else begin
      unique case (state)
        S_FILL: if (frozen[idx] || in_valid) begin
          v[idx] <= frozen[idx] ? 1'b0 : in_bit;
          idx    <= idx + 1'b1;
          if (idx == LOGN'(N - 1)) begin
            idx   <= '0;
            stage <= '0;
            state <= S_BFLY;
          end
        end
        S_BFLY: begin
          v     <= v_next;
          stage <= stage + 1'b1;
          if (stage == LOGN'(LOGN - 1)) state <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          idx <= idx + 1'b1;
          if (idx == LOGN'(N/2 - 1)) begin
            idx   <= '0;
            state <= S_FILL;
          end
        end
        default: state <= S_FILL;
      endcase
    end
  end
endmodule
