// input_scaling -- builds the 71 network inputs, each scaled into (-1, 1).
//
// Per SL, in order SL0..SL8: phi_rel, signed priority drift time, alpha;
// stereo SLs then add the 11 wire drift times.  5*3 + 4*14 = 71 inputs in
// Q6.10, as published.  Scalings (this design's choices, parameters):
//   phi_rel / DPHI[sl]        (the search window maps onto (-1, 1))
//   t^p / T_MAX               (T_MAX = 256 * 2 ns = 512 ns)
//   alpha / (pi/2)
//   t^i / T_MAX in (0, 1) for a hit wire, exactly -1 for a wire without hit
//   (published rule for the extra wires).
// Everything is clamped to the open interval.  An SL with no selected
// segment gives phi_rel = t^p = alpha = 0 and all wire times -1.
// Latency: one clock.
module input_scaling
  import dnn_pkg::*;
#(
  parameter sl_int_t     DPHI  = SL_DPHI,
  parameter int unsigned T_MAX = 256
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  logic    in_found [N_SL],
  input  dphi_t   in_phi_rel [N_SL],
  input  logic signed [TIME_W:0] in_tp [N_SL],
  input  slgeo_t  in_geo [N_SL],
  input  time_t   in_ti [N_SL][N_TS_WIRES],
  input  logic [N_TS_WIRES-1:0] in_hit [N_SL],
  output act_t    out_x [N_IN]
);

  localparam int unsigned T_SHIFT = $clog2(T_MAX);

  function automatic int unsigned phi_recip(int unsigned sl);
    return ((1 << (ACT_FR + 12)) + DPHI[sl] / 2) / DPHI[sl];
  endfunction

  act_t x_c [N_IN];

  always_comb begin
    x_c = '{default: '0};
    for (int unsigned s = 0; s < N_SL; s++) begin
      int unsigned b;
      b = feat_base(s);
      if (in_found[s]) begin
        x_c[b]   = sat_unit((64'(in_phi_rel[s]) * longint'(phi_recip(s))) >>> 12);
        x_c[b+1] = sat_unit((64'(in_tp[s]) <<< ACT_FR) >>> T_SHIFT);
        x_c[b+2] = sat_unit((64'(in_geo[s].alpha) <<< ACT_FR) >>> (PHI_BITS - 2));
      end
      if (sl_is_stereo(s)) begin
        for (int unsigned w = 0; w < N_TS_WIRES; w++)
          x_c[b+3+w] = in_hit[s][w]
                       ? sat_unit((64'(in_ti[s][w]) <<< ACT_FR) >>> T_SHIFT)
                       : -ACT_ONE;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        out_x <= '{default: '0};
    else if (in_valid) out_x <= x_c;
  end

endmodule
