// dnn_core -- the track-parameter network: FFN, self-attention, FFN, tanh.
//
//   x   = FFN1(inputs)                       71 -> 27 -> 27
//   x_A = Softmax(x W_w) (.) (x W_v + b_v)   27 -> 27
//   y   = tanh(FFN2(x_A))                    27 -> 27 -> 3  = (z0, theta0, Q)
//
// Five weight sets ("experts") are stored; in_expert picks the one trained
// for the pattern of missing stereo super layers of this track.  The MAC
// count is (27*4 + 71 + 3 + 2 + 1) * 27 = 4995 as published: six linear
// layers, two LeakyReLUs and the attention product.  Weights are written
// through `cfg` (see linear_layer for the layer numbers).
//
// Timing with GROUPS = 4: each linear layer takes GROUPS+1 = 5 clocks, so
// 5+1+5 (FFN1) + 5+5+1 (attention) + 5+1+5 (FFN2) + 1 (tanh) = 34 clocks
// (6*GROUPS + 10) from in_valid to out_valid, one track every 4 clocks
// (31.8 MHz at the 127.216 MHz system clock).
//
// rst_n is an asynchronous reset; it also appears in the assertions'
// `disable iff`, which the linter reports as synchronous use.
module dnn_core
  import dnn_pkg::*;
#(
  parameter int unsigned IN        = N_IN,
  parameter int unsigned HID       = N_HID,
  parameter int unsigned GROUPS    = N_GROUPS,
  parameter int unsigned EXPERTS   = N_EXPERTS,
  parameter int          ALPHA_Q10 = 10
) (
  input  logic    clk,
  input  logic    rst_n,
  input  wcfg_t   cfg,
  input  logic    in_valid,
  input  act_t    in_x [IN],
  input  expert_t in_expert,
  output logic    out_valid,
  output out_t    out_y [N_OUT],
  output expert_t out_expert
);

  logic    e_valid, a_valid, f_valid;
  act_t    e_x [HID];
  act_t    a_x [HID];
  act_t    f_y [N_OUT];
  expert_t e_e, a_e, f_e;
  logic    t_valid [N_OUT];

  ffn #(.IN(IN), .HID(HID), .OUT(HID), .GROUPS(GROUPS), .EXPERTS(EXPERTS),
        .L1_ID(0), .L2_ID(1), .ALPHA_Q10(ALPHA_Q10)) u_ffn1 (
    .clk, .rst_n, .cfg, .in_valid, .in_x, .in_expert,
    .out_valid(e_valid), .out_y(e_x), .out_expert(e_e));

  self_attention #(.N(HID), .GROUPS(GROUPS), .EXPERTS(EXPERTS),
                   .W_LAYER(2), .V_LAYER(3)) u_att (
    .clk, .rst_n, .cfg, .in_valid(e_valid), .in_x(e_x), .in_expert(e_e),
    .out_valid(a_valid), .out_y(a_x), .out_expert(a_e));

  ffn #(.IN(HID), .HID(HID), .OUT(N_OUT), .GROUPS(GROUPS), .EXPERTS(EXPERTS),
        .L1_ID(4), .L2_ID(5), .ALPHA_Q10(ALPHA_Q10)) u_ffn2 (
    .clk, .rst_n, .cfg, .in_valid(a_valid), .in_x(a_x), .in_expert(a_e),
    .out_valid(f_valid), .out_y(f_y), .out_expert(f_e));

  for (genvar o = 0; o < N_OUT; o++) begin : g_tanh
    tanh_lut u_tanh (.clk, .in_valid(f_valid), .in_x(f_y[o]),
                     .out_valid(t_valid[o]), .out_y(out_y[o]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= f_valid;
  end

  always_ff @(posedge clk) begin
    if (f_valid) out_expert <= f_e;
  end

  // The three tables run in step with out_valid.
  a_tanh_step: assert property (@(posedge clk) disable iff (!rst_n)
                                t_valid[0] == out_valid && t_valid[1] == out_valid &&
                                t_valid[2] == out_valid)
    else $error("dnn_core: tanh tables out of step");

endmodule
