// ffn -- feed-forward block: Linear(IN->HID), LeakyReLU, Linear(HID->OUT).
//
// One hidden layer of HID nodes with LeakyReLU in between, the optimum the
// published hyperparameter search found for both FFNs of the network (one
// layer, 27 nodes).  The embedding FFN maps the 71 inputs to 27 features;
// the prediction FFN maps the 27 attention outputs to the 3 outputs.
// Timing: 2*(GROUPS+1) + 1 clocks; one vector every GROUPS clocks.
module ffn
  import dnn_pkg::*;
#(
  parameter int unsigned IN       = 71,
  parameter int unsigned HID      = 27,
  parameter int unsigned OUT      = 27,
  parameter int unsigned GROUPS   = N_GROUPS,
  parameter int unsigned EXPERTS  = N_EXPERTS,
  parameter int unsigned L1_ID    = 0,
  parameter int unsigned L2_ID    = 1,
  parameter int          ALPHA_Q10 = 10
) (
  input  logic    clk,
  input  logic    rst_n,
  input  wcfg_t   cfg,
  input  logic    in_valid,
  input  act_t    in_x [IN],
  input  expert_t in_expert,
  output logic    out_valid,
  output act_t    out_y [OUT],
  output expert_t out_expert
);

  logic    h_valid, a_valid;
  act_t    h [HID];
  act_t    a [HID];
  expert_t h_e, a_e;

  linear_layer #(.IN(IN), .OUT(HID), .GROUPS(GROUPS), .EXPERTS(EXPERTS),
                 .LAYER_ID(L1_ID)) u_l1 (
    .clk, .rst_n, .cfg, .in_valid, .in_x, .in_expert,
    .out_valid(h_valid), .out_y(h), .out_expert(h_e));

  leaky_relu #(.N(HID), .ALPHA_Q10(ALPHA_Q10)) u_act (
    .clk, .rst_n, .in_valid(h_valid), .in_x(h), .in_expert(h_e),
    .out_valid(a_valid), .out_y(a), .out_expert(a_e));

  linear_layer #(.IN(HID), .OUT(OUT), .GROUPS(GROUPS), .EXPERTS(EXPERTS),
                 .LAYER_ID(L2_ID)) u_l2 (
    .clk, .rst_n, .cfg, .in_valid(a_valid), .in_x(a), .in_expert(a_e),
    .out_valid, .out_y, .out_expert);

endmodule
