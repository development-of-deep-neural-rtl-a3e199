// nn_selection -- validity check and choice of expert network.
//
// A track is a valid 3D track when at least 3 of the 4 stereo SLs (SL1, 3,
// 5, 7) have a selected segment; only then is the network enabled.  One of
// five networks is chosen: 0 when all four stereo SLs are present, 1..4
// when SL1, SL3, SL5 or SL7 respectively is missing.  The 3-of-4 rule and
// the five networks for missing-SL cases are published; the numbering is
// this design's.  Latency: one clock.
module nn_selection
  import dnn_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  sel_t    in_sel [N_SL],
  output logic    out_enable,    // valid 3D track, run the network
  output logic    out_reject,    // track dropped: fewer than 3 stereo SLs
  output expert_t out_expert
);

  logic [N_STEREO-1:0] st;
  always_comb
    for (int unsigned k = 0; k < N_STEREO; k++) st[k] = in_sel[2*k+1].found;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_enable <= 1'b0;
      out_reject <= 1'b0;
      out_expert <= '0;
    end else begin
      out_enable <= in_valid && ($countones(st) >= 3);
      out_reject <= in_valid && ($countones(st) < 3);
      unique case (st)
        4'b1111: out_expert <= 3'd0;
        4'b1110: out_expert <= 3'd1;  // SL1 missing
        4'b1101: out_expert <= 3'd2;  // SL3 missing
        4'b1011: out_expert <= 3'd3;  // SL5 missing
        4'b0111: out_expert <= 3'd4;  // SL7 missing
        default: out_expert <= 3'd0;
      endcase
    end
  end

endmodule
