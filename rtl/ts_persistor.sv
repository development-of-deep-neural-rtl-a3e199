// ts_persistor -- keeps every track segment for DEPTH clocks.
//
// Track segments reach this block earlier than the 2D track they belong to
// (drift times and the 2D finder's own latency).  Per SL the block is a
// DEPTH-long shift register: the segment that arrives in a cycle enters
// tap 0 and leaves after DEPTH cycles, and all taps are visible so the
// selection can search every stored segment in one clock.  DEPTH = 27
// clocks is the published storage time.  One segment per SL per clock at
// the input is this design's assumption about the link format.
module ts_persistor
  import dnn_pkg::*;
#(
  parameter int unsigned DEPTH = FIFO_DEPTH
) (
  input  logic clk,
  input  logic rst_n,
  input  ts_t  in_ts   [N_SL],
  output ts_t  out_taps [N_SL][DEPTH]
);

  ts_t mem [N_SL][DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned s = 0; s < N_SL; s++)
        for (int unsigned d = 0; d < DEPTH; d++) mem[s][d] <= '0;
    end else begin
      for (int unsigned s = 0; s < N_SL; s++) begin
        mem[s][0] <= in_ts[s];
        for (int unsigned d = 1; d < DEPTH; d++) mem[s][d] <= mem[s][d-1];
      end
    end
  end

  assign out_taps = mem;

endmodule
