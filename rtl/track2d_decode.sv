// track2d_decode -- turns a 2D-finder track word into a direction and curvature.
//
// The 2D track finder reports the Hough cell of each track: a phi cell out
// of PHI_CELLS around the circle and a curvature cell out of OMEGA_CELLS
// spanning -OMEGA_MAX..+OMEGA_MAX.  The decoder returns the cell centres:
//   phi0  = (2*phi_idx + 1) * 2**PHI_BITS / (2*PHI_CELLS)   (PHI units)
//   omega = (2*omega_idx - (OMEGA_CELLS-1)) * OMEGA_MAX / (OMEGA_CELLS-1)
// with omega in units of 2**-20 per cm (signed, sign = charge).  The word
// format and the Hough grid are not published with the trigger; the grid
// (160 x 34 cells) and OMEGA_MAX (1/66.7 cm, a 0.3 GeV track in 1.5 T) are
// this design's assumptions.  Latency: one clock.
module track2d_decode
  import dnn_pkg::*;
#(
  parameter int unsigned PHI_CELLS   = 160,
  parameter int unsigned OMEGA_CELLS = 34,
  parameter int unsigned OMEGA_MAX   = 15720
) (
  input  logic         clk,
  input  logic         rst_n,
  input  track2d_raw_t in_raw,
  output track2d_t     out_trk
);

  localparam longint PHI_STEP_Q16 = ((64'd1 << (PHI_BITS + 16)) + 64'(PHI_CELLS)) / 64'(2 * PHI_CELLS);
  localparam int     OM_HALF      = (OMEGA_MAX + (OMEGA_CELLS - 1) / 2) / (OMEGA_CELLS - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_trk <= '0;
    end else begin
      out_trk.valid <= in_raw.valid;
      if (in_raw.valid) begin
      out_trk.phi0  <= phi_t'(((64'(in_raw.phi_idx) * 2 + 1) * PHI_STEP_Q16 + 64'(1 << 15)) >> 16);
      out_trk.omega <= 16'((32'(in_raw.omega_idx) * 2 - 32'(OMEGA_CELLS - 1)) * OM_HALF);
      end
    end
  end

endmodule
