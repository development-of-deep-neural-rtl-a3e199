// softmax -- table-based softmax over N Q6.10 values, pipelined.
//
// w[i] = exp(x[i] - max x) / sum_j exp(x[j] - max x), produced as Q6.10
// numbers in [0, 1].  Subtracting the maximum first keeps every exponent in
// (0, 1], so one table serves all inputs.
//
// Stages (one clock each, LATENCY = 5, a new vector may enter every clock):
//   1. maximum of the N inputs
//   2. e[i] = EXP_T[(max - x[i]) in steps of 1/64], unsigned Q1.16,
//      differences of 8 or more read the last entry
//   3. sum of the e[i]
//   4. r = INV_T[sum in steps of 1/64], reciprocal in Q0.16 (sum is >= 1)
//   5. w[i] = e[i] * r, floor-rounded to Q6.10
// Both tables are computed during elaboration.  The published design builds
// softmax from precomputed lookup tables as well; the table sizes, the
// max subtraction and the pipeline split are this design's choices.
//
// The weights lie in [0, 1], so the top integer bits of each Q6.10 output
// are always zero; the format is kept to match the rest of the network.
module softmax
  import dnn_pkg::*;
#(
  parameter int unsigned N = 27
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  act_t in_x [N],
  output logic out_valid,
  output act_t out_w [N]
);

  localparam int unsigned EXP_BITS = 9;             // 512 entries, [0, 8)
  localparam int unsigned EXP_SIZE = 1 << EXP_BITS;
  localparam int unsigned STEP_FR  = 6;             // 1/64 steps
  localparam int unsigned SUM_W    = 17 + $clog2(N);
  localparam int unsigned INV_BITS = 11;            // sums in [1, 32)
  localparam int unsigned INV_SIZE = 1 << INV_BITS;

  typedef logic [16:0] exp_tab_t [EXP_SIZE];
  typedef logic [16:0] inv_tab_t [INV_SIZE];

  function automatic exp_tab_t make_exp();
    exp_tab_t t;
    for (int unsigned k = 0; k < EXP_SIZE; k++)
      t[k] = 17'($rtoi($floor($exp(-real'(k) / real'(1 << STEP_FR)) * 65536.0 + 0.5)));
    return t;
  endfunction

  function automatic inv_tab_t make_inv();
    inv_tab_t t;
    for (int unsigned k = 0; k < INV_SIZE; k++) begin
      real s;
      s = (real'(k) + 0.5) / real'(1 << STEP_FR);
      t[k] = (s < 1.0) ? 17'd65535 : 17'($rtoi($floor(65536.0 / s + 0.5)));
    end
    return t;
  endfunction

  localparam exp_tab_t EXP_T = make_exp();
  localparam inv_tab_t INV_T = make_inv();

  logic [4:0] v;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[3:0], in_valid};
  end
  assign out_valid = v[4];

  // Stage 1: maximum
  act_t x1 [N];
  act_t m1;
  always_ff @(posedge clk) begin
    act_t m;
    m = in_x[0];
    for (int unsigned i = 1; i < N; i++) if (in_x[i] > m) m = in_x[i];
    x1 <= in_x;
    m1 <= m;
  end

  // Stage 2: exponentials
  logic [16:0] e2 [N];
  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < N; i++) begin
      logic [16:0] d;   // max - x >= 0, Q.10
      logic [16:0] k;
      d = 17'(18'(m1) - 18'(x1[i]));
      k = d >> (ACT_FR - STEP_FR);
      e2[i] <= (k >= 17'(EXP_SIZE)) ? EXP_T[EXP_SIZE-1] : EXP_T[k[EXP_BITS-1:0]];
    end
  end

  // Stage 3: sum
  logic [16:0]      e3 [N];
  logic [SUM_W-1:0] s3;
  always_ff @(posedge clk) begin
    logic [SUM_W-1:0] s;
    s = '0;
    for (int unsigned i = 0; i < N; i++) s += SUM_W'(e2[i]);
    s3 <= s;
    e3 <= e2;
  end

  // Stage 4: reciprocal
  logic [16:0] e4 [N];
  logic [16:0] r4;
  always_ff @(posedge clk) begin
    logic [SUM_W-1:0] k;
    k = s3 >> (16 - STEP_FR);
    r4 <= (k >= SUM_W'(INV_SIZE)) ? INV_T[INV_SIZE-1] : INV_T[k[INV_BITS-1:0]];
    e4 <= e3;
  end

  // Stage 5: normalise
  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < N; i++) begin
      logic [33:0] p;
      p = 34'(e4[i]) * 34'(r4);
      out_w[i] <= act_t'(p >> (32 - ACT_FR));
    end
  end

endmodule
