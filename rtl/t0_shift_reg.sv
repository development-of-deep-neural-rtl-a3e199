// t0_shift_reg -- delays the event time and holds the latest value.
//
// The event time finder sends t0 (2 ns units) with a valid strobe.  The
// block delays the strobe and value by DELAY clocks in a shift register, so
// that t0 lines up with the track segments it was measured from, and then
// holds the most recent delayed t0 until the next one; `out_valid` tells
// whether any t0 has been seen since reset.  The published block is a
// shift register; DELAY and the hold behaviour are this design's choices.
module t0_shift_reg
  import dnn_pkg::*;
#(
  parameter int unsigned DELAY = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  time_t in_t0,
  output logic  out_valid,
  output time_t out_t0
);

  logic  v_sr [DELAY];
  time_t t_sr [DELAY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned d = 0; d < DELAY; d++) begin
        v_sr[d] <= 1'b0;
        t_sr[d] <= '0;
      end
      out_valid <= 1'b0;
      out_t0    <= '0;
    end else begin
      v_sr[0] <= in_valid;
      t_sr[0] <= in_t0;
      for (int unsigned d = 1; d < DELAY; d++) begin
        v_sr[d] <= v_sr[d-1];
        t_sr[d] <= t_sr[d-1];
      end
      if (v_sr[DELAY-1]) begin
        out_valid <= 1'b1;
        out_t0    <= t_sr[DELAY-1];
      end
    end
  end

endmodule
