// tb_t0_shift_reg -- event times at random intervals; the output must be
// the latest t0 that entered at least DELAY (4) clocks ago, valid only
// after the first one.
module tb_t0_shift_reg;
  import dnn_pkg::*;

  logic  clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  logic  in_valid, out_valid;
  time_t in_t0, out_t0;

  t0_shift_reg dut (.*);

  int checks = 0, failures = 0;
  int    sent_t [$];
  int    sent_c [$];
  int    cyc = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_t0 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      int exp_v, exp_t;
      @(negedge clk);
      // expected output now: latest entry sent at cycle <= cyc - 4
      exp_v = 0; exp_t = 0;
      foreach (sent_c[i]) if (sent_c[i] <= cyc - 4) begin exp_v = 1; exp_t = sent_t[i]; end
      checks++;
      if (int'(out_valid) != exp_v || (exp_v && int'(out_t0) != exp_t)) begin
        failures++;
        $display("cyc %0d: got %0d/%0d exp %0d/%0d", cyc, out_valid, out_t0, exp_v, exp_t);
      end
      in_valid = (n > 20) && ($urandom % 6 == 0);
      in_t0 = time_t'($urandom);
      if (in_valid) begin sent_c.push_back(cyc + 1); sent_t.push_back(int'(in_t0)); end
      cyc++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
