// tb_leaky_relu -- random and edge-case vectors through LeakyReLU; checks
// each node against x (x >= 0) or floor(x*10/1024) (x < 0), the one-clock
// latency and that the expert tag follows the data.
module tb_leaky_relu;
  import dnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  logic    in_valid, out_valid;
  act_t    in_x [27];
  act_t    out_y [27];
  expert_t in_expert, out_expert;

  leaky_relu #(.N(27)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x [27];
    in_valid = 0; in_expert = '0;
    for (int i = 0; i < 27; i++) in_x[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      for (int i = 0; i < 27; i++) begin
        x[i] = (n == 0) ? ((i % 3 == 0) ? -32768 : (i % 3 == 1) ? 32767 : -1)
                        : int'($urandom_range(0, 65535)) - 32768;
        in_x[i] = act_t'(x[i]);
      end
      in_expert = expert_t'(n % 5);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || int'(out_expert) != n % 5) failures++;
      for (int i = 0; i < 27; i++) begin
        int e;
        e = (x[i] >= 0) ? x[i] : int'($floor(real'(x[i]) * 10.0 / 1024.0));
        checks++;
        if (int'(out_y[i]) != e) begin
          failures++;
          $display("x=%0d got %0d exp %0d", x[i], out_y[i], e);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
