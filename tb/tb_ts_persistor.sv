// tb_ts_persistor -- random segment streams; every tap d must show the
// segment that entered d+1 clocks earlier, and a segment is gone after 27.
module tb_ts_persistor;
  import dnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  ts_t in_ts [N_SL];
  ts_t out_taps [N_SL][FIFO_DEPTH];

  ts_persistor dut (.*);

  int checks = 0, failures = 0;
  ts_t hist [$];   // flattened history, N_SL entries per clock

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < N_SL; s++) in_ts[s] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      // check taps against history (newest at the back)
      for (int d = 0; d < FIFO_DEPTH; d++)
        for (int s = 0; s < N_SL; s++) begin
          int idx;
          idx = hist.size() - (d + 1) * N_SL + s;
          checks++;
          if (idx >= 0) begin
            if (out_taps[s][d] != hist[idx]) failures++;
          end else if (out_taps[s][d].valid) failures++;
        end
      for (int s = 0; s < N_SL; s++) begin
        ts_t t;
        t = '0;
        t.valid = ($urandom % 3) != 0;
        t.id = TSID_W'($urandom); t.prio_time = time_t'($urandom);
        t.lr = lr_t'($urandom % 3); t.wire_hit = N_TS_WIRES'($urandom);
        for (int w = 0; w < N_TS_WIRES; w++) t.wire_time[w] = CTIME_W'($urandom);
        if (n >= 250) t = '0;   // quiet tail: everything must drain
        in_ts[s] = t;
        hist.push_back(t);
      end
    end
    @(negedge clk);
    for (int s = 0; s < N_SL; s++) in_ts[s] = '0;
    repeat (30) @(negedge clk);
    for (int d = 0; d < FIFO_DEPTH; d++)
      for (int s = 0; s < N_SL; s++) begin
        checks++;
        if (out_taps[s][d].valid) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
