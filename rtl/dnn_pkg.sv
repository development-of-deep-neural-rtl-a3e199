// dnn_pkg -- types, formats and constants shared by the DNN track trigger.
//
// Number formats
//   * Network activations ("inner nodes") are 16-bit signed fixed point with
//     6 integer bits (sign included) and 10 fraction bits (Q6.10).  This is
//     the format the trigger's published description gives for inner nodes.
//   * The three network outputs (z0, theta0, Q) are 13-bit signed with
//     1 integer bit (the sign) and 12 fraction bits (Q1.12), as published.
//   * Weights are 8-bit signed integers with a per-node scale and zero point
//     (post-training quantisation q = floor(r/s + z)).  The scale is held as
//     an unsigned 16-bit number with 16 fraction bits, the zero point as a
//     signed Q8.8 number; both formats are this design's choice.
//   * Azimuthal angles use a binary circle: 2**PHI_BITS units per 2*pi.
//   * Times are in 2 ns units (priority-wire TDC resolution); the 32 ns
//     coarse wire times are multiplied by 16 to reach the same unit.
//
// Detector constants (wire counts per super layer, radii of the priority
// layers) are this design's assumptions taken from the public CDC layout,
// not from the trigger description; they are parameters and can be replaced.
package dnn_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_SL        = 9;   // super layers SL0..SL8
  localparam int unsigned N_STEREO    = 4;   // SL1,3,5,7
  localparam int unsigned N_TS_WIRES  = 11;  // wires in one track segment (3+2+1+2+3)
  localparam int unsigned N_IN        = 71;  // 5 axial * 3 + 4 stereo * 14
  localparam int unsigned N_HID       = 27;  // nodes per layer (both FFNs)
  localparam int unsigned N_OUT       = 3;   // z0, theta0, Q
  localparam int unsigned N_EXPERTS   = 5;   // networks for missing stereo SLs
  localparam int unsigned N_GROUPS    = 4;   // input groups per linear layer
  localparam int unsigned FIFO_DEPTH  = 27;  // clock cycles a TS is kept

  // ---------------------------------------------------------------- formats
  localparam int unsigned ACT_W   = 16;      // Q6.10
  localparam int unsigned ACT_FR  = 10;
  localparam int unsigned OUT_W   = 13;      // Q1.12
  localparam int unsigned OUT_FR  = 12;
  localparam int unsigned WGT_W   = 8;       // int8 weights
  localparam int unsigned PHI_BITS = 13;     // 8192 units per full circle
  localparam int unsigned TIME_W  = 9;       // 2 ns units, 1.024 us window
  localparam int unsigned CTIME_W = 5;       // 32 ns units
  localparam int unsigned TSID_W  = 9;       // priority wire index within SL

  typedef logic signed [ACT_W-1:0]   act_t;
  typedef logic signed [OUT_W-1:0]   out_t;
  typedef logic signed [WGT_W-1:0]   wgt_t;
  typedef logic [PHI_BITS-1:0]       phi_t;     // unsigned angle, wraps
  typedef logic signed [PHI_BITS-1:0] dphi_t;   // signed angle difference
  typedef logic [TIME_W-1:0]         time_t;
  typedef logic [2:0]                expert_t;

  localparam act_t ACT_ONE     = act_t'(1 << ACT_FR);
  localparam act_t ACT_MAX     = act_t'((1 << (ACT_W-1)) - 1);
  localparam act_t ACT_MIN     = act_t'(-(1 << (ACT_W-1)));
  localparam act_t ACT_UNIT_HI = act_t'((1 << ACT_FR) - 1);   // largest value < 1
  localparam act_t ACT_UNIT_LO = act_t'(-((1 << ACT_FR) - 1)); // smallest value > -1

  // ---------------------------------------------------------------- detector
  typedef int unsigned sl_int_t [N_SL];
  // Priority-layer wire count per SL (public CDC layout).
  localparam sl_int_t SL_NWIRES = '{160, 160, 192, 224, 256, 288, 320, 352, 384};
  // Priority-layer radius per SL in 1/16 cm (approximate public CDC layout).
  localparam sl_int_t SL_RADIUS = '{317, 643, 792, 941, 1090, 1238, 1387, 1536, 1685};
  // Half width of the delta-phi search window per SL, in PHI units.
  // Axial SLs: about two wire pitches; stereo SLs: wide enough for the
  // stereo skew of the wire between backward endplate and crossing point.
  localparam sl_int_t SL_DPHI   = '{100, 400, 86, 300, 64, 260, 52, 240, 43};

  function automatic logic sl_is_stereo(int unsigned sl);
    return (sl % 2) == 1;
  endfunction

  // Index of SL within the stereo list (SL1->0, SL3->1, SL5->2, SL7->3).
  function automatic int unsigned stereo_index(int unsigned sl);
    return sl / 2;
  endfunction

  // Offset of SL's first feature in the 71-feature input vector.
  // Order: per SL, phi_rel, signed t_drift^p, alpha, then (stereo only)
  // the 11 wire drift times.
  function automatic int unsigned feat_base(int unsigned sl);
    int unsigned b = 0;
    for (int unsigned s = 0; s < sl; s++) b += sl_is_stereo(s) ? 14 : 3;
    return b;
  endfunction

  // Azimuth of the priority wire `id` of SL `sl`, in PHI units:
  // id * 2**PHI_BITS / nwires, evaluated with a constant reciprocal.
  function automatic phi_t wire_phi(int unsigned sl, logic [TSID_W-1:0] id);
    logic [31:0] recip;
    logic [47:0] prod;
    recip = 32'(((64'd1 << (PHI_BITS + 16)) + 64'(SL_NWIRES[sl] / 2)) / 64'(SL_NWIRES[sl]));
    prod  = 48'(id) * 48'(recip) + 48'(1 << 15);
    return phi_t'(prod >> 16);
  endfunction

  // ---------------------------------------------------------------- inputs
  // Drift direction of a track segment, from its hit pattern.
  typedef enum logic [1:0] {
    LR_UNKNOWN = 2'd0,
    LR_LEFT    = 2'd1,
    LR_RIGHT   = 2'd2
  } lr_t;

  // One track segment as delivered by the track segment finder.
  typedef struct packed {
    logic                          valid;
    logic [TSID_W-1:0]             id;         // priority wire index
    time_t                         prio_time;  // 2 ns TDC of priority wire
    lr_t                           lr;         // drift direction
    logic [N_TS_WIRES-1:0]         wire_hit;   // hit flag per TS wire
    logic [N_TS_WIRES-1:0][CTIME_W-1:0] wire_time; // 32 ns TDC per TS wire
  } ts_t;

  // Raw 2D track word from the 2D track finder (Hough cell indices).
  typedef struct packed {
    logic       valid;
    logic [7:0] phi_idx;    // Hough phi cell
    logic [5:0] omega_idx;  // Hough curvature cell
  } track2d_raw_t;

  // Decoded 2D track.
  typedef struct packed {
    logic               valid;
    phi_t               phi0;    // track direction at the IP
    logic signed [15:0] omega;   // signed curvature, 2**-20 per cm
  } track2d_t;

  // Per-SL geometry of the 2D track at the priority layer radius.
  typedef struct packed {
    phi_t  phi_cross;   // azimuth where the track crosses the layer
    dphi_t alpha;       // crossing angle mu/(2r), PHI units, signed
    logic  reach;       // track reaches this radius
  } slgeo_t;

  // Result of track-segment selection for one SL.
  typedef struct packed {
    logic  found;
    ts_t   ts;
  } sel_t;

  // Output 3D track.
  typedef struct packed {
    logic     valid;
    out_t     z0;        // tanh-scaled z0
    out_t     theta0;    // tanh-scaled theta0
    out_t     q;         // signal (-1) / background (+1) score
    expert_t  expert;    // network used
    phi_t     phi0;      // from the 2D track
    logic signed [15:0] omega;
    logic     pass;      // |z0| and Q selection passed
  } track3d_t;

  // ---------------------------------------------------------------- weights
  // Configuration write into the weight memories.
  typedef enum logic [1:0] {
    WK_WEIGHT = 2'd0,   // int8 weight q[row][col]
    WK_ZERO   = 2'd1,   // zero point of node `row`, Q8.8
    WK_SCALE  = 2'd2,   // scale of node `row`, unsigned Q0.16
    WK_BIAS   = 2'd3    // bias of node `row`, Q6.10
  } wkind_t;

  typedef struct packed {
    logic        en;
    logic [2:0]  layer;    // 0: FFN1 in, 1: FFN1 out, 2: W_w, 3: W_v,
                           // 4: FFN2 hidden, 5: FFN2 out
    wkind_t      kind;
    expert_t     expert;
    logic [4:0]  row;      // output node
    logic [6:0]  col;      // input index (weights only)
    logic [15:0] data;
  } wcfg_t;

  // Saturate a wide signed value to Q6.10.
  function automatic act_t sat_act(logic signed [63:0] v);
    if (v > 64'(signed'(ACT_MAX))) return ACT_MAX;
    if (v < 64'(signed'(ACT_MIN))) return ACT_MIN;
    return act_t'(v);
  endfunction

  // Saturate to the open unit interval (-1, 1) in Q6.10.
  function automatic act_t sat_unit(logic signed [63:0] v);
    if (v > 64'(signed'(ACT_UNIT_HI))) return ACT_UNIT_HI;
    if (v < 64'(signed'(ACT_UNIT_LO))) return ACT_UNIT_LO;
    return act_t'(v);
  endfunction

endpackage
