// alpha_calc -- crossing angle and crossing azimuth of a 2D track per SL.
//
// A track from the interaction point with signed curvature omega = 1/r
// reaches radius R after the transverse arc length mu with
// R = 2 r sin(mu / 2r).  The crossing angle alpha = mu/(2r) is therefore
// asin(R*omega/2), and the track passes radius R at azimuth
// phi_cross = phi0 - alpha.  For each of the nine SLs, at the radius of its
// priority layer, the block forms x = R*omega/2 (Q.12), looks up asin(|x|)
// in a 1024-entry table computed during elaboration, and applies the sign.
// |x| >= 1 means the track curls up before that layer: `reach` is cleared
// and alpha saturates at +-pi/2.  alpha follows the published definition
// alpha = mu/(2r); the table method and the sign convention of phi_cross
// are this design's choices.  Latency: one clock.
module alpha_calc
  import dnn_pkg::*;
#(
  parameter sl_int_t RADIUS = SL_RADIUS   // 1/16 cm
) (
  input  logic     clk,
  input  logic     rst_n,
  input  track2d_t in_trk,
  output track2d_t out_trk,
  output slgeo_t   out_geo [N_SL]
);

  localparam int unsigned TB = 10;
  typedef logic [PHI_BITS-1:0] asin_tab_t [1 << TB];

  function automatic asin_tab_t make_asin();
    asin_tab_t t;
    for (int unsigned k = 0; k < (1 << TB); k++) begin
      real xc;
      xc   = (real'(k) + 0.5) / real'(1 << TB);
      t[k] = PHI_BITS'($rtoi($floor($asin(xc) / (2.0 * 3.14159265358979) *
                                    real'(1 << PHI_BITS) + 0.5)));
    end
    return t;
  endfunction

  localparam asin_tab_t ASIN_T = make_asin();
  localparam int QUARTER = 1 << (PHI_BITS - 2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_trk <= '0;
      out_geo <= '{default: '0};
    end else begin
      out_trk.valid <= in_trk.valid;
      if (in_trk.valid) begin
      out_trk.phi0  <= in_trk.phi0;
      out_trk.omega <= in_trk.omega;
      for (int unsigned s = 0; s < N_SL; s++) begin
        logic signed [31:0] x;     // R*omega/2 in Q.12
        logic [31:0]        ax;
        logic [PHI_BITS-1:0] a;
        x  = (32'(signed'({1'b0, 12'(RADIUS[s])})) * 32'(in_trk.omega)) >>> 13;
        ax = (x < 0) ? 32'(-x) : 32'(x);
        if (ax >= 32'(1 << 12)) a = PHI_BITS'(QUARTER);
        else                    a = ASIN_T[ax[11:12-TB]];
        out_geo[s].reach     <= (ax < 32'(1 << 12));
        out_geo[s].alpha     <= (x < 0) ? dphi_t'(-signed'({1'b0, a})) : dphi_t'(a);
        out_geo[s].phi_cross <= in_trk.phi0 - ((x < 0) ? phi_t'(-a) : phi_t'(a));
      end
      end
    end
  end

endmodule
