// tb_dnn_track_trigger -- end-to-end test of the trigger at its default
// parameters.
//
// Loads random int8 weights for all five experts (output-layer scales
// reduced so that z0 and Q land on both sides of the cut), then plays events: an
// event time, one signal segment per SL placed on the wire the 2D track
// crosses, and decoys the selection must ignore -- a segment with shorter
// drift time that is older than the 27-clock store, one with unknown drift
// direction, one in the window with longer drift time, and one outside the
// window.  Then the 2D track word arrives.  Stereo signal segments are left
// out to select each of the five experts and to make tracks fail the
// 3-of-4 rule.  A last phase sends tracks back to back, one every 4 clocks.
//
// Checks: (1) the 71 network inputs against real-valued features of the
// planted signal segments; (2) z0, theta0, Q against the golden network
// model run on those inputs, bit for bit; (3) expert, phi0, omega, the
// pass flag, the latency (40 clocks, within the 80-clock budget) and the
// reject flag.  Each mechanism is counted and must occur at least once.
module tb_dnn_track_trigger;
  import dnn_pkg::*;
  import dnn_ref_pkg::*;

  localparam int LAT = 40;
  localparam real TWO_PI = 6.283185307179586;

  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  wcfg_t        cfg;
  track2d_raw_t track_in;
  ts_t          ts_in [N_SL];
  logic         t0_valid;
  time_t        t0_in;
  track3d_t     track_out;
  logic         track_rejected;

  dnn_track_trigger dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_expert [5];
  int n_reject = 0, n_expired = 0, n_unknown_lr = 0, n_longer = 0, n_out = 0;
  int n_pass = 0, n_fail_cut = 0, n_fullrate = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rabs(real v); return (v < 0.0) ? -v : v; endfunction

  // ------------------------------------------------------------ expectations
  // per track sent: expected expert (-1 = reject), phi0, omega, send cycle,
  // and the planted features (real) for SLs with a signal segment
  int  q_exp [$];
  int  q_phi [$];
  int  q_om  [$];
  int  q_cyc [$];
  real q_feat [$];     // 71 values per accepted track, NaN-free; 99 = skip
  int  x_vecs [$];     // captured network inputs, 71 per track

  // (1) network inputs as they enter the network
  always @(posedge clk) if (rst_n && dut.x_valid) begin
    real e, tol;
    for (int i = 0; i < 71; i++) begin
      // phi_rel: 3 angle units (decode and asin table rounding); others 0.03
      tol = 0.03;
      for (int s = 0; s < N_SL; s++)
        if (i == int'(feat_base(s))) tol = 3.0 / real'(SL_DPHI[s]);
      x_vecs.push_back(int'(dut.x[i]));
      e = q_feat.pop_front();
      if (e < 50.0) begin
        checks++;
        if (rabs(real'(dut.x[i]) / 1024.0 - e) > tol) begin
          failures++;
          $display("feature %0d: got %f exp %f", i, real'(dut.x[i]) / 1024.0, e);
        end
      end
    end
  end

  // reject flag
  always @(posedge clk) if (rst_n && track_rejected) n_reject++;

  // (2), (3) outputs
  always @(posedge clk) if (rst_n && track_out.valid) begin
    int x[MAXN]; int y[3]; int e, t, ph, om;
    // skip rejected tracks in the expectation queue
    while (q_exp.size() > 0 && q_exp[0] < 0) begin
      void'(q_exp.pop_front()); void'(q_phi.pop_front());
      void'(q_om.pop_front()); void'(q_cyc.pop_front());
    end
    n_out++;
    e = q_exp.pop_front(); ph = q_phi.pop_front(); om = q_om.pop_front(); t = q_cyc.pop_front();
    x = '{default: 0};
    for (int i = 0; i < 71; i++) x[i] = x_vecs.pop_front();
    ref_dnn(x, e, y);
    if (n_out < 8) $display("out z0 %0d theta %0d q %0d", y[0], y[1], y[2]);
    checks++;
    if (int'(track_out.z0) != y[0] || int'(track_out.theta0) != y[1] || int'(track_out.q) != y[2]) begin
      failures++;
      $display("outputs %0d %0d %0d exp %0d %0d %0d", track_out.z0, track_out.theta0,
               track_out.q, y[0], y[1], y[2]);
    end
    checks++;
    if (int'(track_out.expert) != e) begin failures++; $display("expert %0d exp %0d", track_out.expert, e); end
    n_expert[e]++;
    checks++;
    if (cyc - t != LAT || LAT > 80) begin failures++; $display("latency %0d", cyc - t); end
    checks++;
    if (rabs(real'(track_out.phi0) - real'(ph)) > 1.0 || rabs(real'(track_out.omega) - real'(om)) > 20.0)
      failures++;
    checks++;
    if (track_out.pass != (y[0] < 2048 && y[0] > -2048 && y[2] < 3277)) failures++;
    if (track_out.pass) n_pass++; else n_fail_cut++;
  end

  // ------------------------------------------------------------ stimulus
  ts_t ts_plan [int];           // cycle*16 + SL -> segment to inject

  function automatic void plan_ts(int c, int s, ts_t t);
    ts_plan[c * 16 + s] = t;
  endfunction

  function automatic ts_t make_ts(int id, int prio, lr_t lr);
    ts_t t;
    t = '0;
    t.valid = 1; t.id = TSID_W'(id); t.prio_time = time_t'(prio); t.lr = lr;
    for (int w = 0; w < N_TS_WIRES; w++) begin
      t.wire_hit[w] = ($urandom % 3) != 0;
      t.wire_time[w] = CTIME_W'(((prio + int'($urandom_range(0, 60))) / 16) % 32);
    end
    return t;
  endfunction

  // Plan one event; the track word is sent at cycle tc, segments earlier.
  // miss: bit k set = leave stereo SL 2k+1 without signal segment.
  task automatic plan_event(int tc, int p, int o, int t0, int miss, bit decoys,
                            output real feat[71], output int exp_e);
    real phi0, om, b;
    int nst;
    phi0 = (2.0 * real'(p) + 1.0) * 8192.0 / 320.0;
    om   = real'((2 * o - 33) * 476);
    b = 0;
    nst = 0;
    for (int i = 0; i < 71; i++) feat[i] = 99.0;
    for (int s = 0; s < N_SL; s++) begin
      real x, a, pc, wphi, prel;
      int nw, id, drift, fb;
      lr_t lr;
      bit missing;
      nw = int'(SL_NWIRES[s]);
      x  = real'(SL_RADIUS[s]) / 16.0 * om / 1048576.0 / 2.0;
      a  = $asin(x) / TWO_PI * 8192.0;
      pc = phi0 - a;
      while (pc < 0.0) pc += 8192.0;
      while (pc >= 8192.0) pc -= 8192.0;
      id = int'(pc * real'(nw) / 8192.0 + 0.5) % nw;
      wphi = real'(id) * 8192.0 / real'(nw);
      prel = pc - wphi;
      if (prel > 4096.0) prel -= 8192.0;
      if (prel < -4096.0) prel += 8192.0;
      drift = int'($urandom_range(40, 200));
      lr = ($urandom % 2) ? LR_LEFT : LR_RIGHT;
      missing = (s % 2 == 1) && miss[s / 2];
      fb = feat_base(s);
      if (!missing) begin
        ts_t sig;
        if (s % 2 == 1) nst++;
        sig = make_ts(id, t0 + drift, lr);
        plan_ts(tc - 12, s, sig);
        feat[fb]     = prel / real'(SL_DPHI[s]);
        feat[fb + 1] = ((lr == LR_LEFT) ? -1.0 : 1.0) * real'(drift) / 256.0;
        feat[fb + 2] = a / 2048.0;
        if (s % 2 == 1)
          for (int w = 0; w < N_TS_WIRES; w++) begin
            int ti;
            ti = 16 * int'(sig.wire_time[w]) - t0;
            if (ti < 0) ti = 0;
            feat[fb + 3 + w] = sig.wire_hit[w] ? ((ti >= 256) ? 1023.0 / 1024.0 : real'(ti) / 256.0) : -1.0;
          end
        if (decoys) begin
          // longer drift time, same window
          plan_ts(tc - 8, s, make_ts(id, t0 + drift + 20, lr));
          n_longer++;
        end
      end else begin
        feat[fb] = 0.0; feat[fb + 1] = 0.0; feat[fb + 2] = 0.0;
        for (int w = 0; w < N_TS_WIRES; w++) feat[fb + 3 + w] = -1.0;
      end
      if (decoys) begin
        // shorter drift but expired (older than 27 clocks at selection)
        plan_ts(tc - 29, s, make_ts(id, t0 + 2, lr));
        n_expired++;
        // shorter drift but unknown direction
        plan_ts(tc - 10, s, make_ts(id, t0 + 1, LR_UNKNOWN));
        n_unknown_lr++;
        // outside the window
        plan_ts(tc - 6, s, make_ts((id + nw / 2) % nw, t0 + 1, lr));
      end
    end
    if (nst < 3) exp_e = -1;
    else if (nst == 4) exp_e = 0;
    else exp_e = (miss[0] ? 1 : miss[1] ? 2 : miss[2] ? 3 : 4);
  endtask

  task automatic run_events(int base, int n, int spacing, bit decoys);
    int tcs [$];
    int t0s [$];
    int tcl;
    // plan
    for (int k = 0; k < n; k++) begin
      real feat[71];
      int e, p, o, t0, miss, tc;
      tc = base + 40 + k * spacing;
      p = int'($urandom_range(0, 159));
      o = int'($urandom_range(6, 27));
      t0 = int'($urandom_range(0, 200));
      if (!decoys) begin
        // full rate: tracks spread in phi so their windows do not overlap
        t0 = 100;
        p = k * 26 + int'($urandom_range(0, 4));
      end
      case (k % 8)
        0, 5:    miss = 0;
        1:       miss = 1;
        2:       miss = 2;
        3:       miss = 4;
        4:       miss = 8;
        6:       miss = 3;                 // two stereo SLs missing: reject
        default: miss = 0;
      endcase
      if (!decoys) miss = 0;
      plan_event(tc, p, o, t0, miss, decoys, feat, e);
      tcs.push_back(tc); t0s.push_back(t0);
      q_exp.push_back(e);
      q_phi.push_back(int'((2.0 * real'(p) + 1.0) * 8192.0 / 320.0 + 0.5) % 8192);
      q_om.push_back((2 * o - 33) * 476);
      q_cyc.push_back(tc);
      if (e >= 0) for (int i = 0; i < 71; i++) q_feat.push_back(feat[i]);
      // track word planned via a parallel list
      track_plan[tc] = {1'b1, 8'(p), 6'(o)};
      t0_plan[decoys ? tc - 30 : base + 2] = t0;
    end
    tcl = tcs[$];
    // play
    while (cyc < tcl + 2) begin
      @(negedge clk);
      for (int s = 0; s < N_SL; s++) ts_in[s] = '0;
      track_in = '0;
      t0_valid = 0;
      for (int s = 0; s < N_SL; s++) if (ts_plan.exists(cyc * 16 + s)) ts_in[s] = ts_plan[cyc * 16 + s];
      if (track_plan.exists(cyc)) begin
        track_in = track_plan[cyc];
        if (!decoys) n_fullrate++;
      end
      if (t0_plan.exists(cyc)) begin t0_valid = 1; t0_in = time_t'(t0_plan[cyc]); end
    end
    @(negedge clk);
    for (int s = 0; s < N_SL; s++) ts_in[s] = '0;
    track_in = '0;
  endtask

  track2d_raw_t track_plan [int];
  int           t0_plan [int];

  initial begin
    cfg = '0; track_in = '0; t0_valid = 0; t0_in = '0;
    for (int s = 0; s < N_SL; s++) ts_in[s] = '0;
    gen_weights();
    // smaller output-layer scales and biases keep the outputs inside the
    // tanh range so that both sides of the selection cut occur
    for (int e = 0; e < 5; e++)
      for (int o = 0; o < 3; o++) begin
        ws[5][e][o] = ws[5][e][o] / 24 + 1;
        wb[5][e][o] = wb[5][e][o] / 4;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < n_cfg_words(); k++) begin
      @(negedge clk); cfg = cfg_word(k);
    end
    @(negedge clk); cfg = '0;
    // phase 1: spaced events with decoys, all expert and reject cases
    run_events(cyc, 120, 40, 1'b1);
    // phase 2: full rate, one track every 4 clocks (segments spread in phi)
    run_events(cyc + 20, 6, 4, 1'b0);
    repeat (LAT + 20) @(posedge clk);
    checks++;
    if (q_exp.size() != 0 && !(q_exp.size() > 0 && q_exp[$] < 0)) begin
      failures++; $display("%0d tracks missing at the output", q_exp.size());
    end
    $display("outputs %0d, rejects %0d, experts %0d %0d %0d %0d %0d", n_out, n_reject,
             n_expert[0], n_expert[1], n_expert[2], n_expert[3], n_expert[4]);
    $display("decoys: expired %0d, unknown LR %0d, longer drift %0d; full-rate tracks %0d; pass %0d, cut %0d",
             n_expired, n_unknown_lr, n_longer, n_fullrate, n_pass, n_fail_cut);
    for (int e = 0; e < 5; e++) begin checks++; if (n_expert[e] == 0) failures++; end
    checks++; if (n_reject == 0) failures++;
    checks++; if (n_expired == 0 || n_unknown_lr == 0 || n_longer == 0) failures++;
    checks++; if (n_fullrate < 6) failures++;
    checks++; if (n_pass == 0 || n_fail_cut == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
