// ts_selection -- picks, per super layer, the track segment that belongs to a 2D track.
//
// When a track arrives (in_trk.valid) every stored segment of every SL is
// tested in parallel: it must be valid, have a known drift direction, and
// its priority wire must lie within +-DPHI[sl] of the track's crossing
// azimuth phi_cross (wrap-around of the circle handled).  Among the
// candidates of an SL the one with the shortest priority drift time wins;
// as all segments of one event share t0, the smallest priority TDC value
// is used (ties: the most recently stored).  The same search is applied to
// the axial SLs, whose features the network also uses.
// The window test, the shortest-drift-time rule and the known-direction
// requirement follow the published description; the window widths, the
// use of the search on axial SLs and the tie rule are this design's.
// Latency: one clock; the track geometry is forwarded alongside.
module ts_selection
  import dnn_pkg::*;
#(
  parameter int unsigned DEPTH = FIFO_DEPTH,
  parameter sl_int_t     DPHI  = SL_DPHI
) (
  input  logic     clk,
  input  logic     rst_n,
  input  track2d_t in_trk,
  input  slgeo_t   in_geo [N_SL],
  input  ts_t      in_taps [N_SL][DEPTH],
  output track2d_t out_trk,
  output slgeo_t   out_geo [N_SL],
  output sel_t     out_sel [N_SL]
);

  sel_t sel_c [N_SL];

  always_comb begin
    for (int unsigned s = 0; s < N_SL; s++) begin
      sel_c[s] = '0;
      for (int unsigned d = 0; d < DEPTH; d++) begin
        dphi_t diff;
        logic  inwin;
        diff  = dphi_t'(in_geo[s].phi_cross - wire_phi(s, in_taps[s][d].id));
        inwin = (diff >= 0) ? (32'(diff) <= DPHI[s]) : (32'(-diff) <= DPHI[s]);
        if (in_taps[s][d].valid && in_taps[s][d].lr != LR_UNKNOWN && inwin &&
            in_geo[s].reach &&
            (!sel_c[s].found || in_taps[s][d].prio_time < sel_c[s].ts.prio_time)) begin
          sel_c[s].found = 1'b1;
          sel_c[s].ts    = in_taps[s][d];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_trk <= '0;
      out_geo <= '{default: '0};
      for (int unsigned s = 0; s < N_SL; s++) out_sel[s] <= '0;
    end else begin
      out_trk.valid <= in_trk.valid;
      if (in_trk.valid) begin
        out_trk <= in_trk;
        out_geo <= in_geo;
        out_sel <= sel_c;
      end
    end
  end

endmodule
