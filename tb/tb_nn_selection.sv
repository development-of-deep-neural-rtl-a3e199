// tb_nn_selection -- all 16 stereo patterns (with random axial flags):
// enable only with >= 3 of 4 stereo SLs, reject otherwise, and the expert
// index 0 (all present) or 1..4 (SL1, 3, 5, 7 missing).
module tb_nn_selection;
  import dnn_pkg::*;

  logic    clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  logic    in_valid, out_enable, out_reject;
  sel_t    in_sel [N_SL];
  expert_t out_expert;

  nn_selection dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0;
    for (int s = 0; s < N_SL; s++) in_sel[s] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 64; n++) begin
      int pat, cnt, exp_e;
      pat = n % 16;
      @(negedge clk);
      in_valid = (n < 48);
      for (int s = 0; s < N_SL; s++) in_sel[s].found = ($urandom % 2) != 0;
      cnt = 0;
      for (int k = 0; k < 4; k++) begin
        in_sel[2 * k + 1].found = pat[k];
        cnt += pat[k];
      end
      exp_e = (pat == 15) ? 0 : (pat == 14) ? 1 : (pat == 13) ? 2 : (pat == 11) ? 3 : (pat == 7) ? 4 : -1;
      @(negedge clk);
      checks++;
      if (out_enable != (in_valid && cnt >= 3)) failures++;
      checks++;
      if (out_reject != (in_valid && cnt < 3)) failures++;
      if (in_valid && cnt >= 3) begin
        checks++;
        if (int'(out_expert) != exp_e) begin
          failures++; $display("pattern %b: expert %0d exp %0d", pat[3:0], out_expert, exp_e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
