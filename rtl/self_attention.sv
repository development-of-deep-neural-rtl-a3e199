// self_attention -- simplified single-matrix self-attention on N features.
//
//   x_A = Softmax(x W_w) (.) (x W_v + b_v)
//
// Two linear layers run in parallel on the embedded features x: the weight
// branch (W_w, no bias) feeds a softmax, the value branch (W_v with bias
// b_v) is delayed by the softmax latency, and the two N-vectors are
// multiplied element by element, so the softmax weights select which
// embedded features pass on.  This is the published mechanism (one matrix
// for the attention weights instead of query and key).  Reading the product
// as element-wise follows from the published multiply count, which charges
// one N-wide multiply for it, and from the next layer taking an N-vector.
//
// Timing: linear (GROUPS+1) + softmax (5) + product (1) clocks; accepts one
// vector every GROUPS clocks, like the linear layers.
//
// rst_n is an asynchronous reset; it also appears in the assertions'
// `disable iff`, which the linter reports as synchronous use.
module self_attention
  import dnn_pkg::*;
#(
  parameter int unsigned N       = 27,
  parameter int unsigned GROUPS  = N_GROUPS,
  parameter int unsigned EXPERTS = N_EXPERTS,
  parameter int unsigned W_LAYER = 2,
  parameter int unsigned V_LAYER = 3
) (
  input  logic    clk,
  input  logic    rst_n,
  input  wcfg_t   cfg,
  input  logic    in_valid,
  input  act_t    in_x [N],
  input  expert_t in_expert,
  output logic    out_valid,
  output act_t    out_y [N],
  output expert_t out_expert
);

  localparam int unsigned SM_LAT = 5;

  logic    w_valid, v_valid, sm_valid;
  act_t    w_y [N];
  act_t    v_y [N];
  act_t    sm_w [N];
  expert_t w_e, v_e;

  linear_layer #(.IN(N), .OUT(N), .GROUPS(GROUPS), .EXPERTS(EXPERTS),
                 .LAYER_ID(W_LAYER), .HAS_BIAS(1'b0)) u_ww (
    .clk, .rst_n, .cfg, .in_valid, .in_x, .in_expert,
    .out_valid(w_valid), .out_y(w_y), .out_expert(w_e));

  linear_layer #(.IN(N), .OUT(N), .GROUPS(GROUPS), .EXPERTS(EXPERTS),
                 .LAYER_ID(V_LAYER), .HAS_BIAS(1'b1)) u_wv (
    .clk, .rst_n, .cfg, .in_valid, .in_x, .in_expert,
    .out_valid(v_valid), .out_y(v_y), .out_expert(v_e));

  softmax #(.N(N)) u_sm (
    .clk, .rst_n, .in_valid(w_valid), .in_x(w_y),
    .out_valid(sm_valid), .out_w(sm_w));

  // Value branch delay line, matched to the softmax latency.
  act_t    vd [SM_LAT][N];
  expert_t ed [SM_LAT];
  always_ff @(posedge clk) begin
    vd[0] <= v_y;
    ed[0] <= v_e;
    for (int unsigned s = 1; s < SM_LAT; s++) begin
      vd[s] <= vd[s-1];
      ed[s] <= ed[s-1];
    end
  end

  // Element-wise product (Q6.10 * Q6.10 -> Q6.10, floor, saturate).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= sm_valid;
  end

  always_ff @(posedge clk) begin
    if (sm_valid) begin
      out_expert <= ed[SM_LAT-1];
      for (int unsigned i = 0; i < N; i++)
        out_y[i] <= sat_act((64'(sm_w[i]) * 64'(vd[SM_LAT-1][i])) >>> ACT_FR);
    end
  end

  // The two branches run in lock step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                              w_valid == v_valid && (!w_valid || w_e == v_e))
    else $error("self_attention: weight and value branches out of step");

endmodule
