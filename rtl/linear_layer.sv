// linear_layer -- fully connected layer with int8 per-node quantised weights,
// shared multipliers over four input groups, and five selectable weight sets.
//
// Function: y[o] = s[o] * ( sum_i q[o][i]*x[i]  -  z[o] * sum_i x[i] ) + b[o]
// which equals sum_i (q[o][i]-z[o])*s[o]*x[i] + b[o], the dequantised product
// of the int8 weights q with zero point z and scale s of node o.  x, b and y
// are Q6.10; the result is floor-rounded (arithmetic shift) and saturated.
//
// Timing: the inputs are split into GROUPS groups of ceil(IN/GROUPS) and one
// group is multiplied per clock, so every multiplier is reused GROUPS times.
// A vector accepted with in_valid in cycle t is processed in t+1..t+GROUPS
// and out_valid is high GROUPS+1 clocks after in_valid.  A new vector may be
// presented on the cycle the previous one finishes, i.e. one every GROUPS
// cycles: with GROUPS = 4 this is the 31.8 MHz input rate of the trigger.
// Presenting a vector faster than that is a protocol error (assertion).
//
// Weights, zero points, scales and biases are held in register arrays for
// EXPERTS networks and written one word per cycle through `cfg` when
// cfg.layer == LAYER_ID.  The network used is chosen per vector by in_expert.
//
// Follows the published design: int8 weights with per-node scale and zero
// point, 16-bit Q6.10 nodes, four input groups per layer with multiplier
// reuse, five expert networks.  Own choices: the Q0.16 scale and Q8.8 zero
// point formats, the loadable register storage (the published firmware
// bakes weights into HLS-generated logic) and saturation on overflow.
//
// rst_n is an asynchronous reset; it also appears in the assertions'
// `disable iff`, which the linter reports as synchronous use.
module linear_layer
  import dnn_pkg::*;
#(
  parameter int unsigned IN       = 27,
  parameter int unsigned OUT      = 27,
  parameter int unsigned GROUPS   = N_GROUPS,
  parameter int unsigned EXPERTS  = N_EXPERTS,
  parameter int unsigned LAYER_ID = 0,
  parameter bit          HAS_BIAS = 1'b1
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

  localparam int unsigned GSIZE = (IN + GROUPS - 1) / GROUPS;
  localparam int unsigned CW    = (GROUPS > 1) ? $clog2(GROUPS) : 1;
  localparam int unsigned ACC_W = 40;

  // ------------------------------------------------------------ parameters
  wgt_t                w_q   [EXPERTS][OUT][IN];
  logic signed [15:0]  w_z   [EXPERTS][OUT];
  logic [15:0]         w_s   [EXPERTS][OUT];
  act_t                w_b   [EXPERTS][OUT];

  localparam int unsigned EW = (EXPERTS > 1) ? $clog2(EXPERTS) : 1;
  localparam int unsigned RW = (OUT > 1) ? $clog2(OUT) : 1;
  localparam int unsigned IW = (IN > 1) ? $clog2(IN) : 1;
  logic [EW-1:0] cfg_e;
  logic [RW-1:0] cfg_r;
  logic [IW-1:0] cfg_c;
  assign cfg_e = cfg.expert[EW-1:0];
  assign cfg_r = cfg.row[RW-1:0];
  assign cfg_c = cfg.col[IW-1:0];

  always_ff @(posedge clk) begin
    if (cfg.en && cfg.layer == 3'(LAYER_ID) && 32'(cfg.expert) < EXPERTS
        && 32'(cfg.row) < OUT) begin
      unique case (cfg.kind)
        WK_WEIGHT: if (32'(cfg.col) < IN) w_q[cfg_e][cfg_r][cfg_c] <= wgt_t'(cfg.data[7:0]);
        WK_ZERO:   w_z[cfg_e][cfg_r] <= cfg.data;
        WK_SCALE:  w_s[cfg_e][cfg_r] <= cfg.data;
        WK_BIAS:   w_b[cfg_e][cfg_r] <= HAS_BIAS ? act_t'(cfg.data) : '0;
      endcase
    end
  end

  // ------------------------------------------------------------ control
  logic                 busy;
  logic [CW-1:0]        grp;
  act_t                 x_r [IN];
  expert_t              e_r;
  logic signed [ACC_W-1:0] acc  [OUT];
  logic signed [ACC_W-1:0] xsum;
  logic                 last;

  assign last = busy && (32'(grp) == GROUPS - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      grp  <= '0;
    end else if (in_valid) begin
      busy <= 1'b1;
      grp  <= '0;
    end else if (last) begin
      busy <= 1'b0;
      grp  <= '0;
    end else if (busy) begin
      grp  <= grp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      x_r <= in_x;
      e_r <= in_expert;
    end
  end

  // ------------------------------------------------------------ datapath
  // Partial sums of the current group (GSIZE multipliers per output node).
  logic signed [ACC_W-1:0] part [OUT];
  logic signed [ACC_W-1:0] xpart;
  logic signed [ACC_W-1:0] acc_n [OUT];
  logic signed [ACC_W-1:0] xsum_n;

  always_comb begin
    xpart = '0;
    for (int unsigned k = 0; k < GSIZE; k++) begin
      int unsigned i;
      i = 32'(grp) * GSIZE + k;
      if (i < IN) xpart += ACC_W'(x_r[i]);
    end
    xsum_n = ((grp == '0) ? '0 : xsum) + xpart;
    for (int unsigned o = 0; o < OUT; o++) begin
      part[o] = '0;
      for (int unsigned k = 0; k < GSIZE; k++) begin
        int unsigned i;
        i = 32'(grp) * GSIZE + k;
        if (i < IN) part[o] += ACC_W'(w_q[e_r][o][i]) * ACC_W'(x_r[i]);
      end
      acc_n[o] = ((grp == '0) ? '0 : acc[o]) + part[o];
    end
  end

  always_ff @(posedge clk) begin
    if (busy) begin
      acc  <= acc_n;
      xsum <= xsum_n;
    end
  end

  // Final scaling on the last group: s * (acc - z*xsum) >> (16 + 8) + bias.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else begin
      out_valid <= last;
    end
  end

  always_ff @(posedge clk) begin
    if (last) begin
      out_expert <= e_r;
      for (int unsigned o = 0; o < OUT; o++) begin
        logic signed [63:0] centred;
        logic signed [63:0] scaled;
        // acc is Q.10; bring it to Q.18 to subtract z (Q8.8) * xsum (Q.10).
        centred = (64'(acc_n[o]) <<< 8) - 64'(w_z[e_r][o]) * 64'(xsum_n);
        scaled  = (centred * $signed({48'd0, w_s[e_r][o]})) >>> 24;
        out_y[o] <= sat_act(scaled + (HAS_BIAS ? 64'(w_b[e_r][o]) : 64'sd0));
      end
    end
  end

  // ------------------------------------------------------------ protocol
  // A new vector may only arrive when the layer is idle or finishing.
  a_rate: assert property (@(posedge clk) disable iff (!rst_n)
                           in_valid |-> (!busy || last))
    else $error("linear_layer %0d: input faster than one vector per %0d cycles",
                LAYER_ID, GROUPS);

endmodule
