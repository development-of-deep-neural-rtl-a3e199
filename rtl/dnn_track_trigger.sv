// dnn_track_trigger -- first-level 3D track trigger with an attention DNN.
//
// Inputs each clock: one 2D track word (at most one every GROUPS clocks),
// one track segment per super layer, and the event time when the event
// time finder reports one.  For every 2D track the block finds the stereo
// and axial segments that belong to it, builds 71 scaled input features,
// and, when at least 3 of the 4 stereo SLs contributed, runs the network
// chosen for the missing-SL pattern.  The output is z0, theta0 and the
// signal/background score Q (all tanh-scaled, Q1.12), plus a pass flag for
// the cut |z0| < Z_CUT and Q < Q_CUT.
//
// Pipeline (register stage after the clock edge that takes the 2D track):
//   1 track2d_decode      2 alpha_calc          3 ts_selection
//   4 phi_rel_calc / drift_time_calc / nn_selection
//   5 input_scaling and network enable   6..39 dnn_core (6*GROUPS + 10)
//   40 output register: track_out is valid 40 clocks after track_in
//   (314 ns at 127.216 MHz, inside the 80-clock budget).
// Track segments wait in ts_persistor (27 clocks), the event time in
// t0_shift_reg.  The block diagram, the 27-clock segment store, the
// 3-of-4 rule, the five experts and the network follow the published
// design.  The cut values default to |z0| < 50 cm and Q < 0.8 assuming the
// z0 output spans +-100 cm; the word formats are this design's choices.
// All registers reset asynchronously; the linter's note that rst_n is also
// used synchronously refers to the `disable iff (!rst_n)` of the protocol
// assertions, which sample it at the clock edge by definition.
module dnn_track_trigger
  import dnn_pkg::*;
#(
  parameter int unsigned GROUPS = N_GROUPS,
  parameter int unsigned DEPTH  = FIFO_DEPTH,
  parameter int          Z_CUT  = 2048,   // 0.5 in Q1.12 = 50 cm
  parameter int          Q_CUT  = 3277    // 0.8 in Q1.12
) (
  input  logic         clk,
  input  logic         rst_n,
  input  wcfg_t        cfg,
  input  track2d_raw_t track_in,
  input  ts_t          ts_in [N_SL],
  input  logic         t0_valid,
  input  time_t        t0_in,
  output track3d_t     track_out,
  output logic         track_rejected   // 2D track without enough stereo SLs
);

  localparam int unsigned DNN_LAT = 6 * GROUPS + 10;   // dnn_core latency

  // ------------------------------------------------------------ inputs
  track2d_t trk_d, trk_a, trk_s;
  slgeo_t   geo_a [N_SL];
  slgeo_t   geo_s [N_SL];
  sel_t     sel_s [N_SL];
  ts_t      taps  [N_SL][DEPTH];
  logic     t0_ok;
  time_t    t0;

  track2d_decode u_dec (.clk, .rst_n, .in_raw(track_in), .out_trk(trk_d));

  alpha_calc u_alpha (.clk, .rst_n, .in_trk(trk_d), .out_trk(trk_a), .out_geo(geo_a));

  ts_persistor #(.DEPTH(DEPTH)) u_pers (.clk, .rst_n, .in_ts(ts_in), .out_taps(taps));

  t0_shift_reg u_t0 (.clk, .rst_n, .in_valid(t0_valid), .in_t0(t0_in),
                     .out_valid(t0_ok), .out_t0(t0));

  ts_selection #(.DEPTH(DEPTH)) u_sel (
    .clk, .rst_n, .in_trk(trk_a), .in_geo(geo_a), .in_taps(taps),
    .out_trk(trk_s), .out_geo(geo_s), .out_sel(sel_s));

  // ------------------------------------------------------------ features
  dphi_t   phi_rel [N_SL];
  logic signed [TIME_W:0] tp [N_SL];
  time_t   ti [N_SL][N_TS_WIRES];
  logic [N_TS_WIRES-1:0] hit [N_SL];
  logic    nn_en, nn_rej;
  expert_t nn_exp;
  slgeo_t  geo_f [N_SL];
  logic    found_f [N_SL];
  track2d_t trk_f;

  phi_rel_calc u_phi (.clk, .rst_n, .in_valid(trk_s.valid), .in_geo(geo_s),
                      .in_sel(sel_s), .out_phi_rel(phi_rel));

  drift_time_calc u_drift (.clk, .rst_n, .in_valid(trk_s.valid), .in_sel(sel_s),
                           .in_t0(t0), .out_tp(tp), .out_ti(ti), .out_hit(hit));

  nn_selection u_nnsel (.clk, .rst_n, .in_valid(trk_s.valid), .in_sel(sel_s),
                        .out_enable(nn_en), .out_reject(nn_rej), .out_expert(nn_exp));

  // Geometry and found flags ride along with the feature stage.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      geo_f   <= '{default: '0};
      found_f <= '{default: '0};
      trk_f   <= '0;
    end else begin
      trk_f.valid <= trk_s.valid;
      if (trk_s.valid) begin
        trk_f <= trk_s;
        geo_f <= geo_s;
        for (int unsigned s = 0; s < N_SL; s++) found_f[s] <= sel_s[s].found;
      end
    end
  end

  act_t    x [N_IN];
  logic    x_valid;
  expert_t x_exp;
  track2d_t trk_x;

  input_scaling u_scale (.clk, .rst_n, .in_valid(trk_f.valid), .in_found(found_f),
                         .in_phi_rel(phi_rel), .in_tp(tp), .in_geo(geo_f),
                         .in_ti(ti), .in_hit(hit), .out_x(x));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_valid <= 1'b0;
      x_exp   <= '0;
      trk_x   <= '0;
      track_rejected <= 1'b0;
    end else begin
      x_valid <= nn_en;
      track_rejected <= nn_rej;
      if (nn_en) begin
        x_exp <= nn_exp;
        trk_x <= trk_f;
      end
    end
  end

  // ------------------------------------------------------------ network
  logic    y_valid;
  out_t    y [N_OUT];
  expert_t y_exp;

  dnn_core #(.GROUPS(GROUPS)) u_dnn (
    .clk, .rst_n, .cfg, .in_valid(x_valid), .in_x(x), .in_expert(x_exp),
    .out_valid(y_valid), .out_y(y), .out_expert(y_exp));

  // 2D track parameters travel beside the network.
  track2d_t trk_dl [DNN_LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trk_dl <= '{default: '0};
    end else begin
      trk_dl[0] <= trk_x;
      for (int unsigned d = 1; d < DNN_LAT; d++) trk_dl[d] <= trk_dl[d-1];
    end
  end

  // ------------------------------------------------------------ output
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      track_out <= '0;
    end else begin
      track_out.valid <= y_valid;
      if (y_valid) begin
        track_out.z0     <= y[0];
        track_out.theta0 <= y[1];
        track_out.q      <= y[2];
        track_out.expert <= y_exp;
        track_out.phi0   <= trk_dl[DNN_LAT-1].phi0;
        track_out.omega  <= trk_dl[DNN_LAT-1].omega;
        track_out.pass   <= (y[0] < out_t'(Z_CUT)) && (y[0] > out_t'(-Z_CUT)) &&
                            (y[2] < out_t'(Q_CUT));
      end
    end
  end

  // ------------------------------------------------------------ protocol
  // 2D tracks arrive at most once every GROUPS clocks (31.8 MHz for 4).
  logic [7:0] since_trk;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              since_trk <= 8'hff;
    else if (track_in.valid) since_trk <= 8'd1;
    else if (since_trk != 8'hff) since_trk <= since_trk + 8'd1;
  end
  a_trk_rate: assert property (@(posedge clk) disable iff (!rst_n)
                               track_in.valid |-> since_trk >= 8'(GROUPS))
    else $error("dnn_track_trigger: 2D tracks closer than %0d clocks", GROUPS);

  // t0_ok is informational: without an event time, drift times use t0 = 0.
  logic unused_t0_ok;
  assign unused_t0_ok = t0_ok;

endmodule
