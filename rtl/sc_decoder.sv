// Successive-cancellation (SC) polar decoder, fully sequential.
//
// Decodes one frame of an (N, K) polar code with generator G_N = B_N F^(x)n.
// The same module is the paper's binary-input decoder (BINARY=1, W=2: the
// 2-bit Type I/Type II PEs of the paper) and the quantized-soft and pure-soft
// decoders (BINARY=0: W-bit min-sum PEs).
//
// How it works. The channel LLR of codeword bit i is stored at bit-reversed
// position bitrev(i) of the top stage, which turns G_N into the plain
// Kronecker power and lets the decoder walk the code tree in natural order.
// The LLR memory holds stage s (2^s words) at addresses 2^s .. 2^(s+1)-1;
// stage n = log2 N holds the channel. For bit i the decoder recomputes stage
// k = ctz(i) with the Type I PE (g) from stage k+1 and the left sibling's
// partial sums, then stages k-1 .. 0 with the Type II PE (f); stage 0 gives
// the decision (bit 0 if the LLR is >= 0, 1 otherwise; frozen bits are 0).
// Partial sums are kept per stage in a left-node and a right-node memory and
// are combined upward, one pair per clock, whenever a right node completes.
// One PE operation per clock; the PEs and the schedule follow standard SC,
// the memory organisation and the one-PE schedule are this design's own.
//
// Interface. in_valid/in_ready load one MLC cidx per clock: in_llr_msb and
// in_llr_lsb are the LLRs of codeword bits 2c and 2c+1, positive meaning
// bit 0. After N/2 cells decoding starts by itself; every non-frozen
// decision appears on out_valid/out_bit in order u_1 .. u_N, and done pulses
// for one clock after the last decision. frozen (1 = frozen) must stay stable
// during a frame.
//
// Timing. Load N/2 cycles; decoding n*N (f and g operations, N/2*log2 N of
// each) + N (decisions) + (n-1)*N/2 (partial-sum updates) cycles; done in the
// cycle after the last decision.
module sc_decoder
  import polar_pkg::*;
#(
  parameter int unsigned N      = 8192,
  parameter int unsigned W      = 2,
  parameter bit          BINARY = 1'b1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        frozen,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic signed [W-1:0] in_llr_msb,
  input  logic signed [W-1:0] in_llr_lsb,
  output logic                out_valid,
  output logic                out_bit,
  output logic                done,
  output logic                busy
);
  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned AW   = LOGN + 1;

  typedef enum logic [2:0] {S_LOAD, S_CALC, S_DECIDE, S_PSUM} state_e;
  state_e state;

  logic signed [W-1:0] alpha [2*N];   // LLR memory, stage s at 2^s + j
  logic                beta_l [N];    // partial sums of left nodes
  logic                beta_r [N];    // partial sums of right nodes

  logic [LOGN-1:0] cidx;              // load counter
  logic [LOGN-1:0] bit_i;             // index of the bit being decoded
  logic [LOGN-1:0] stage;             // stage being written (CALC) or read (PSUM)
  logic [LOGN-1:0] j;                 // element within the stage
  logic            op_g;              // CALC: 1 = Type I (g), 0 = Type II (f)

  // ---------------------------------------------------------------- PEs
  logic [AW-1:0]       a_idx, b_idx, o_idx;
  logic signed [W-1:0] pe_a, pe_b, f_out, g_out, decision_llr;
  logic                pe_u, u_hat;

  always_comb begin
    o_idx = AW'((1 << stage) + j);
    a_idx = AW'((2 << stage) + j);
    b_idx = AW'((2 << stage) + (1 << stage) + j);
  end
  assign pe_a         = alpha[a_idx];
  assign pe_b         = alpha[b_idx];
  assign pe_u         = beta_l[o_idx[LOGN-1:0]];
  assign decision_llr = alpha[1];
  assign u_hat        = frozen[bit_i] ? 1'b0 : decision_llr[W-1];

  if (BINARY) begin : g_bin
    pe_type2_bin u_f (.x(pe_a), .y(pe_b), .z(f_out));
    pe_type1_bin u_g (.u(pe_u), .x(pe_a), .y(pe_b), .z(g_out));
  end else begin : g_soft
    pe_type2_soft #(.W(W)) u_f (.x(pe_a), .y(pe_b), .z(f_out));
    pe_type1_soft #(.W(W)) u_g (.u(pe_u), .x(pe_a), .y(pe_b), .z(g_out));
  end

  // ---------------------------------------------------------------- helpers
  logic last_stage_elem;
  assign last_stage_elem = (j == LOGN'((1 << stage) - 1));

  logic [LOGN-1:0] next_i;
  assign next_i = bit_i + 1'b1;

  // Partial-sum combine addresses: stage s (read) -> stage s+1 (write).
  logic [LOGN-1:0] ps_src, ps_dst0, ps_dst1;
  logic            ps_v, ps_w, ps_to_right;
  always_comb begin
    ps_src      = LOGN'((1 << stage) + j);
    ps_dst0     = LOGN'((2 << stage) + j);
    ps_dst1     = LOGN'((2 << stage) + (1 << stage) + j);
    ps_v        = beta_l[ps_src] ^ beta_r[ps_src];
    ps_w        = beta_r[ps_src];
    ps_to_right = |(bit_i & (LOGN'(2) << stage));
  end

  assign in_ready = (state == S_LOAD);
  assign busy     = (state != S_LOAD) || (cidx != '0);

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_LOAD;
      cidx      <= '0;
      bit_i     <= '0;
      stage     <= '0;
      j         <= '0;
      op_g      <= 1'b0;
      out_valid <= 1'b0;
      out_bit   <= 1'b0;
      done      <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_LOAD: if (in_valid) begin
          cidx <= cidx + 1'b1;
          if (cidx == LOGN'(N/2 - 1)) begin
            cidx  <= '0;
            bit_i <= '0;
            stage <= LOGN'(LOGN - 1);
            j     <= '0;
            op_g  <= 1'b0;
            state <= S_CALC;
          end
        end
        S_CALC: begin
          j <= j + 1'b1;
          if (last_stage_elem) begin
            j    <= '0;
            op_g <= 1'b0;
            if (stage == '0) state <= S_DECIDE;
            else             stage <= stage - 1'b1;
          end
        end
        S_DECIDE: begin
          out_valid <= !frozen[bit_i];
          out_bit   <= u_hat;
          if (bit_i[0] && LOGN >= 2) begin
            state <= S_PSUM;
            stage <= '0;
            j     <= '0;
          end else begin
            state <= S_CALC;
            bit_i <= next_i;
            stage <= LOGN'(ctz(32'(next_i), LOGN));
            j     <= '0;
            op_g  <= 1'b1;
          end
        end
        S_PSUM: begin
          j <= j + 1'b1;
          if (last_stage_elem) begin
            j <= '0;
            if (32'(stage) + 1 <= LOGN - 2 && ps_to_right) begin
              stage <= stage + 1'b1;
            end else if (bit_i == LOGN'(N - 1)) begin
              done  <= 1'b1;
              bit_i <= '0;
              stage <= '0;
              state <= S_LOAD;
            end else begin
              state <= S_CALC;
              bit_i <= next_i;
              stage <= LOGN'(ctz(32'(next_i), LOGN));
              op_g  <= 1'b1;
            end
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // ---------------------------------------------------------------- memories
  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) begin
      alpha[AW'(N + bitrev(32'(cidx) * 2,     LOGN))] <= in_llr_msb;
      alpha[AW'(N + bitrev(32'(cidx) * 2 + 1, LOGN))] <= in_llr_lsb;
    end
    if (state == S_CALC) alpha[o_idx] <= op_g ? g_out : f_out;
  end

  always_ff @(posedge clk) begin
    if (state == S_DECIDE) begin
      if (bit_i[0]) beta_r[1] <= u_hat;
      else          beta_l[1] <= u_hat;
    end
    if (state == S_PSUM) begin
      if (ps_to_right) begin
        beta_r[ps_dst0] <= ps_v;
        beta_r[ps_dst1] <= ps_w;
      end else begin
        beta_l[ps_dst0] <= ps_v;
        beta_l[ps_dst1] <= ps_w;
      end
    end
  end

  // The last bit (index N-1) is odd, so a frame always ends through S_PSUM.
  if (N < 4 || (1 << LOGN) != N) begin : g_bad_n
    $error("sc_decoder: N must be a power of two >= 4");
  end
endmodule
