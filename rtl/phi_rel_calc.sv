// phi_rel_calc -- relative azimuth of each selected track segment.
//
// phi_rel = phi_cross - phi_wire, the azimuthal distance between the point
// where the 2D track crosses the SL and the selected priority wire, as a
// signed angle (the circle wraps).  phi_wire is the wire's azimuth computed
// from its index (wire index * 2pi / wires in the layer); for stereo wires
// this is taken as the azimuth at the backward endplate (phi_B of the
// published definition phi_rel = phi_cross - phi_B).  An SL without a
// selected segment gives 0.  Latency: one clock.
module phi_rel_calc
  import dnn_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  slgeo_t in_geo [N_SL],
  input  sel_t   in_sel [N_SL],
  output dphi_t  out_phi_rel [N_SL]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_phi_rel <= '{default: '0};
    end else if (in_valid) begin
      for (int unsigned s = 0; s < N_SL; s++)
        out_phi_rel[s] <= in_sel[s].found
                          ? dphi_t'(in_geo[s].phi_cross - wire_phi(s, in_sel[s].ts.id))
                          : '0;
    end
  end

endmodule
