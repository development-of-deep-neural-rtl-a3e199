// tb_drift_time_calc -- random selected segments and event times; checks
// the signed priority drift time (minus for left, plus otherwise, clamped
// at 0, modulo the 1.024 us window) and the 11 wire times 16*t32 - t0.
module tb_drift_time_calc;
  import dnn_pkg::*;

  logic  clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  logic  in_valid;
  sel_t  in_sel [N_SL];
  time_t in_t0;
  logic signed [TIME_W:0] out_tp [N_SL];
  time_t out_ti [N_SL][N_TS_WIRES];
  logic [N_TS_WIRES-1:0] out_hit [N_SL];

  drift_time_calc dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rel(int t, int t0);
    int d;
    d = (t - t0 + 512) % 512;     // modulo the window
    if (d >= 256) d = 0;          // negative (before t0): clamp
    return d;
  endfunction

  initial begin
    in_valid = 0; in_t0 = '0;
    for (int s = 0; s < N_SL; s++) in_sel[s] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      in_valid = 1;
      in_t0 = time_t'($urandom);
      for (int s = 0; s < N_SL; s++) begin
        in_sel[s] = '0;
        in_sel[s].found = ($urandom % 5) != 0;
        in_sel[s].ts.prio_time = time_t'(int'(in_t0) + int'($urandom_range(0, 300)) - 40);
        in_sel[s].ts.lr = lr_t'($urandom_range(1, 2));
        in_sel[s].ts.wire_hit = N_TS_WIRES'($urandom);
        for (int w = 0; w < N_TS_WIRES; w++) in_sel[s].ts.wire_time[w] = CTIME_W'($urandom);
      end
      @(negedge clk);
      in_valid = 0;
      for (int s = 0; s < N_SL; s++) begin
        int etp;
        etp = rel(int'(in_sel[s].ts.prio_time), int'(in_t0));
        if (in_sel[s].ts.lr == LR_LEFT) etp = -etp;
        if (!in_sel[s].found) etp = 0;
        checks++;
        if (int'(out_tp[s]) != etp) begin
          failures++; $display("sl %0d tp got %0d exp %0d", s, out_tp[s], etp);
        end
        checks++;
        if (out_hit[s] != (in_sel[s].found ? in_sel[s].ts.wire_hit : '0)) failures++;
        for (int w = 0; w < N_TS_WIRES; w++) begin
          checks++;
          if (int'(out_ti[s][w]) != rel(16 * int'(in_sel[s].ts.wire_time[w]), int'(in_t0))) begin
            failures++; $display("sl %0d w %0d ti got %0d", s, w, out_ti[s][w]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
