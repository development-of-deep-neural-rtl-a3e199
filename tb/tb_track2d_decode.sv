// tb_track2d_decode -- every Hough cell is decoded and compared with the
// cell centre computed in real arithmetic (phi0 within one unit, omega
// within the rounding of the step); one-clock latency checked.
module tb_track2d_decode;
  import dnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  track2d_raw_t in_raw;
  track2d_t     out_trk;

  track2d_decode dut (.*);

  int checks = 0, failures = 0;
  function automatic real rabs(real v); return (v < 0.0) ? -v : v; endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_raw = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 160; p += 7)
      for (int o = 0; o < 34; o++) begin
        real pe, oe;
        @(negedge clk);
        in_raw.valid = 1; in_raw.phi_idx = 8'(p); in_raw.omega_idx = 6'(o);
        pe = (real'(p) + 0.5) * 8192.0 / 160.0;
        oe = (real'(2 * o) - 33.0) / 33.0 * 15720.0;
        @(negedge clk);
        in_raw.valid = 0;
        checks++;
        if (!out_trk.valid) failures++;
        checks++;
        if (rabs(real'(out_trk.phi0) - pe) > 1.0) begin
          failures++; $display("phi %0d: %0d vs %f", p, out_trk.phi0, pe);
        end
        checks++;
        if (rabs(real'(out_trk.omega) - oe) > 20.0) begin
          failures++; $display("omega %0d: %0d vs %f", o, out_trk.omega, oe);
        end
        @(negedge clk);
        checks++;
        if (out_trk.valid) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
