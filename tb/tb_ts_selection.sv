// tb_ts_selection -- random tracks with random stored segments around them.
// A reference search in real arithmetic (wire azimuth id*2pi/N, window
// +-DPHI, known drift direction, shortest priority time, newest on a tie)
// must pick the same segment per SL.  Segments within 1.5 units of the
// window edge are made invalid so that rounding cannot decide a case.
module tb_ts_selection;
  import dnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  track2d_t in_trk, out_trk;
  slgeo_t   in_geo [N_SL];
  slgeo_t   out_geo [N_SL];
  ts_t      in_taps [N_SL][FIFO_DEPTH];
  sel_t     out_sel [N_SL];

  ts_selection dut (.*);

  int checks = 0, failures = 0;
  int n_multi = 0, n_found = 0, n_none = 0;

  initial begin
    repeat (20000) @(posedge clk);
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
    for (int s = 0; s < N_SL; s++) begin
      in_geo[s] = '0;
      for (int d = 0; d < FIFO_DEPTH; d++) in_taps[s][d] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      int exp_d [N_SL];
      @(negedge clk);
      in_trk.valid = 1;
      for (int s = 0; s < N_SL; s++) begin
        int nw, centre, best_t, ncand;
        nw = int'(SL_NWIRES[s]);
        in_geo[s].phi_cross = phi_t'($urandom);
        in_geo[s].reach = ($urandom % 10) != 0;
        centre = int'(real'(in_geo[s].phi_cross) * real'(nw) / 8192.0);
        exp_d[s] = -1; best_t = 1 << 30; ncand = 0;
        for (int d = FIFO_DEPTH - 1; d >= 0; d--) begin   // oldest first
          ts_t t;
          real diff;
          t = '0;
          t.valid = ($urandom % 4) != 0;
          t.id = TSID_W'((centre + nw + int'($urandom_range(0, 24)) - 12) % nw);
          t.prio_time = time_t'($urandom_range(0, 60));
          t.lr = lr_t'($urandom % 3);
          t.wire_hit = N_TS_WIRES'($urandom);
          diff = wrapd(real'(in_geo[s].phi_cross) - real'(t.id) * 8192.0 / real'(nw));
          if (rabs(rabs(diff) - real'(SL_DPHI[s])) < 1.5) t.valid = 0;
          in_taps[s][d] = t;
          if (t.valid && t.lr != LR_UNKNOWN && rabs(diff) <= real'(SL_DPHI[s]) &&
              in_geo[s].reach) begin
            ncand++;
            if (int'(t.prio_time) <= best_t) begin best_t = int'(t.prio_time); exp_d[s] = d; end
          end
        end
        if (ncand > 1) n_multi++;
      end
      @(negedge clk);
      in_trk.valid = 0;
      checks++;
      if (!out_trk.valid) failures++;
      for (int s = 0; s < N_SL; s++) begin
        checks++;
        if (exp_d[s] < 0) begin
          n_none++;
          if (out_sel[s].found) begin failures++; $display("n%0d sl%0d: unexpected", n, s); end
        end else begin
          n_found++;
          if (!out_sel[s].found || out_sel[s].ts != in_taps[s][exp_d[s]]) begin
            failures++;
            $display("n%0d sl%0d: wrong segment (exp tap %0d)", n, s, exp_d[s]);
          end
        end
      end
    end
    $display("found %0d, none %0d, several candidates %0d", n_found, n_none, n_multi);
    checks++;
    if (n_multi == 0 || n_none == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rabs(real v); return (v < 0.0) ? -v : v; endfunction
endmodule
