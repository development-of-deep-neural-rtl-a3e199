// drift_time_calc -- drift times of the selected segments relative to t0.
//
// Priority wire: t^p = prio_time - t0 (2 ns units, taken modulo the
// 1.024 us time window as a signed number -256..255, negative results
// clamped to 0), signed by the drift
// direction: minus for a track passing left of the wire, plus for right.
// Extra wires: t^i = 16*wire_time - t0 for each of the 11 wires of the
// segment (32 ns TDC), clamped to >= 0, with a flag for wires without hit.
// An SL without selected segment gives t^p = 0 and no wire hits.
// The signed priority time and per-wire times follow the published input
// definition; the sign convention and the clamping are this design's.
// Latency: one clock.
module drift_time_calc
  import dnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  sel_t  in_sel [N_SL],
  input  time_t in_t0,
  output logic signed [TIME_W:0] out_tp [N_SL],                // signed, 2 ns
  output time_t                  out_ti [N_SL][N_TS_WIRES],    // 2 ns
  output logic [N_TS_WIRES-1:0]  out_hit [N_SL]
);

  function automatic time_t rel_time(time_t t, time_t t0);
    logic signed [TIME_W-1:0] d;
    d = signed'(time_t'(t - t0));  // wraps within the window: -256..255
    return (d < 0) ? '0 : time_t'(d);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_tp  <= '{default: '0};
      out_ti  <= '{default: '0};
      out_hit <= '{default: '0};
    end else if (in_valid) begin
      for (int unsigned s = 0; s < N_SL; s++) begin
        time_t tp;
        tp = rel_time(in_sel[s].ts.prio_time, in_t0);
        if (!in_sel[s].found)                out_tp[s] <= '0;
        else if (in_sel[s].ts.lr == LR_LEFT) out_tp[s] <= -signed'({1'b0, tp});
        else                                 out_tp[s] <= signed'({1'b0, tp});
        out_hit[s] <= in_sel[s].found ? in_sel[s].ts.wire_hit : '0;
        for (int unsigned w = 0; w < N_TS_WIRES; w++)
          out_ti[s][w] <= rel_time({in_sel[s].ts.wire_time[w], 4'b0000}, in_t0);
      end
    end
  end

endmodule
