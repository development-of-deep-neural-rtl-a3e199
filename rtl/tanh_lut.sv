// tanh_lut -- table-based hyperbolic tangent, Q6.10 in, Q1.12 out.
//
// The input range [-4, 4) is cut into 1024 equal bins (step 1/128); each
// table entry holds tanh of the bin centre rounded to Q1.12 and clamped to
// +-4095/4096.  Inputs outside the range use the first or last bin.  The
// table is computed while the design is elaborated, so no data file is
// needed.  Table size and range follow the defaults of the library the
// published design took its table approximations from; they are parameters.
// Latency: one clock.
module tanh_lut
  import dnn_pkg::*;
#(
  parameter int unsigned TABLE_BITS = 10,
  parameter real         RANGE      = 4.0
) (
  input  logic clk,
  input  logic in_valid,
  input  act_t in_x,
  output logic out_valid,
  output out_t out_y
);

  localparam int unsigned SIZE = 1 << TABLE_BITS;
  typedef out_t table_t [SIZE];

  function automatic table_t make_table();
    table_t t;
    for (int unsigned k = 0; k < SIZE; k++) begin
      real xc;
      int  v;
      xc = -RANGE + (real'(k) + 0.5) * (2.0 * RANGE / real'(SIZE));
      v  = $rtoi($floor($tanh(xc) * real'(1 << OUT_FR) + 0.5));
      if (v >  (1 << OUT_FR) - 1) v =  (1 << OUT_FR) - 1;
      if (v < -(1 << OUT_FR) + 1) v = -(1 << OUT_FR) + 1;
      t[k] = out_t'(v);
    end
    return t;
  endfunction

  localparam table_t TABLE = make_table();
  // Index = (x + RANGE) * SIZE / (2 RANGE), x in Q6.10.
  localparam int OFFSET = $rtoi(RANGE * real'(1 << ACT_FR));
  localparam int SHIFT  = ACT_FR + $clog2($rtoi(2.0 * RANGE)) - TABLE_BITS;

  logic signed [31:0] idx;
  always_comb begin
    idx = (32'(in_x) + OFFSET) >>> SHIFT;
    if (idx < 0)            idx = 0;
    if (idx > SIZE - 1)     idx = SIZE - 1;
  end

  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    out_y     <= TABLE[idx[TABLE_BITS-1:0]];
  end

endmodule
