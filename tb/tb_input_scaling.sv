// tb_input_scaling -- random feature sets; each of the 71 outputs is
// compared with the real-valued scaling (phi_rel/DPHI, t/512 ns,
// alpha/(pi/2), wire times in (0,1) or -1 without hit) clamped to
// +-1023/1024, within 2 LSB; also the feature order and missing-SL zeros.
module tb_input_scaling;
  import dnn_pkg::*;

  logic   clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  logic   in_valid;
  logic   in_found [N_SL];
  dphi_t  in_phi_rel [N_SL];
  logic signed [TIME_W:0] in_tp [N_SL];
  slgeo_t in_geo [N_SL];
  time_t  in_ti [N_SL][N_TS_WIRES];
  logic [N_TS_WIRES-1:0] in_hit [N_SL];
  act_t   out_x [N_IN];

  input_scaling dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real clampu(real v);
    if (v > 1023.0 / 1024.0) return 1023.0 / 1024.0;
    if (v < -1023.0 / 1024.0) return -1023.0 / 1024.0;
    return v;
  endfunction

  task automatic expect_feat(int i, real e);
    checks++;
    if (rabs(real'(out_x[i]) / 1024.0 - e) > 2.0 / 1024.0) begin
      failures++;
      $display("feature %0d: got %f exp %f", i, real'(out_x[i]) / 1024.0, e);
    end
  endtask

  initial begin
    in_valid = 0;
    for (int s = 0; s < N_SL; s++) begin
      in_found[s] = 0; in_phi_rel[s] = '0; in_tp[s] = '0; in_geo[s] = '0; in_hit[s] = '0;
      for (int w = 0; w < N_TS_WIRES; w++) in_ti[s][w] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      int b;
      @(negedge clk);
      in_valid = 1;
      for (int s = 0; s < N_SL; s++) begin
        in_found[s] = ($urandom % 6) != 0;
        in_phi_rel[s] = dphi_t'(int'($urandom_range(0, 4 * SL_DPHI[s])) - 2 * int'(SL_DPHI[s]));
        in_tp[s] = (TIME_W+1)'(int'($urandom_range(0, 600)) - 300);
        in_geo[s].alpha = dphi_t'(int'($urandom_range(0, 4096)) - 2048);
        in_hit[s] = N_TS_WIRES'($urandom);
        for (int w = 0; w < N_TS_WIRES; w++) in_ti[s][w] = time_t'($urandom_range(0, 300));
      end
      @(negedge clk);
      in_valid = 0;
      b = 0;
      for (int s = 0; s < N_SL; s++) begin
        if (in_found[s]) begin
          expect_feat(b, clampu(real'(in_phi_rel[s]) / real'(SL_DPHI[s])));
          expect_feat(b + 1, clampu(real'(in_tp[s]) / 256.0));
          expect_feat(b + 2, clampu(real'(in_geo[s].alpha) / 2048.0));
        end else begin
          expect_feat(b, 0.0); expect_feat(b + 1, 0.0); expect_feat(b + 2, 0.0);
        end
        if (s % 2 == 1) begin
          for (int w = 0; w < N_TS_WIRES; w++)
            expect_feat(b + 3 + w, in_hit[s][w] ? clampu(real'(in_ti[s][w]) / 256.0) : -1.0);
          b += 14;
        end else b += 3;
      end
      checks++;
      if (b != 71) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rabs(real v); return (v < 0.0) ? -v : v; endfunction
endmodule
