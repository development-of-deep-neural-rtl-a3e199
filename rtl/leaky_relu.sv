// leaky_relu -- registered LeakyReLU on a vector of Q6.10 values.
//
// y = x for x >= 0 and y = floor(x * ALPHA_Q10 / 1024) for x < 0.  The
// negative slope is a multiplication by a constant, as the published design
// maps LeakyReLU onto DSP multipliers.  The slope itself is not published;
// the default 10/1024 (about 0.01) is the usual library default and is this
// design's assumption.  Latency: one clock; the expert tag travels along.
module leaky_relu
  import dnn_pkg::*;
#(
  parameter int unsigned N         = 27,
  parameter int          ALPHA_Q10 = 10
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  act_t    in_x [N],
  input  expert_t in_expert,
  output logic    out_valid,
  output act_t    out_y [N],
  output expert_t out_expert
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      out_expert <= in_expert;
      for (int unsigned i = 0; i < N; i++) begin
        if (in_x[i] >= 0) out_y[i] <= in_x[i];
        else              out_y[i] <= act_t'((32'(in_x[i]) * ALPHA_Q10) >>> ACT_FR);
      end
    end
  end

endmodule
