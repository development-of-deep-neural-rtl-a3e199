// tb_alpha_calc -- random tracks (both charges, curvatures up to beyond the
// curl-up limit of the outer SLs); alpha is compared with asin(R*omega/2)
// and phi_cross with phi0 - alpha in real arithmetic, reach with R*|omega|/2 < 1.
module tb_alpha_calc;
  import dnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  track2d_t in_trk, out_trk;
  slgeo_t   out_geo [N_SL];

  alpha_calc dut (.*);

  int checks = 0, failures = 0;
  function automatic real rabs(real v); return (v < 0.0) ? -v : v; endfunction
  localparam real TWO_PI = 6.283185307179586;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real wrapd(real d);
    while (d > 4096.0) d -= 8192.0;
    while (d < -4096.0) d += 8192.0;
    return d;
  endfunction

  initial begin
    in_trk = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int om;
      @(negedge clk);
      om = int'($urandom_range(0, 2 * 20000)) - 20000;
      in_trk.valid = 1;
      in_trk.phi0  = phi_t'($urandom);
      in_trk.omega = 16'(om);
      @(negedge clk);
      in_trk.valid = 0;
      checks++;
      if (!out_trk.valid || out_trk.phi0 != in_trk.phi0) failures++;
      for (int s = 0; s < N_SL; s++) begin
        real x, a, ae, pc, tol;
        logic reach;
        x = real'(SL_RADIUS[s]) / 16.0 * real'(om) / 1048576.0 / 2.0;
        reach = (x < 1.0 && x > -1.0);
        if (x >= 1.0) x = 1.0;
        if (x <= -1.0) x = -1.0;
        ae = $asin(x) / TWO_PI * 8192.0;
        a = real'(out_geo[s].alpha);
        // near the curl-up limit the discrete reach test may differ
        if (rabs(x) < 0.995) begin
          checks++;
          if (out_geo[s].reach != reach) failures++;
        end
        if (rabs(x) < 0.97) begin
          // table bin (1/1024 in x) times the slope of asin, plus rounding
          tol = 1.5 + 1.5 / 1024.0 / $sqrt(1.0 - x * x) * 8192.0 / TWO_PI;
          checks++;
          if (rabs(a - ae) > tol) begin
            failures++; $display("sl %0d om %0d alpha %f vs %f", s, om, a, ae);
          end
          pc = real'(in_trk.phi0) - ae;
          checks++;
          if (rabs(wrapd(real'(out_geo[s].phi_cross) - pc)) > tol) begin
            failures++; $display("sl %0d phi_cross %0d vs %f", s, out_geo[s].phi_cross, pc);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
