// tb_softmax -- random vectors (narrow and wide spread) through the table
// softmax, one vector per clock.  Each weight is compared with the exact
// real softmax (tolerance from the 1/64 table steps) and the weights must
// sum to about one; the 5-clock latency is checked.
module tb_softmax;
  import dnn_pkg::*;

  localparam int N = 27;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  logic in_valid, out_valid;
  act_t in_x [N];
  act_t out_w [N];

  softmax #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  real exp_w [$];
  int  exp_t [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    real s, w, d;
    int t;
    t = exp_t.pop_front();
    checks++;
    if (cyc - t != 5) begin failures++; $display("latency %0d", cyc - t); end
    s = 0.0;
    for (int i = 0; i < N; i++) begin
      w = exp_w.pop_front();
      d = real'(out_w[i]) / 1024.0 - w;
      if (d < 0) d = -d;
      s += real'(out_w[i]) / 1024.0;
      checks++;
      if (d > 0.03 * w + 2.0 / 1024.0) begin
        failures++;
        $display("w[%0d] got %f exp %f", i, real'(out_w[i]) / 1024.0, w);
      end
    end
    checks++;
    if (s < 0.95 || s > 1.03) begin failures++; $display("sum %f", s); end
  end

  initial begin
    in_valid = 0;
    for (int i = 0; i < N; i++) in_x[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      real xr [N]; real m, s;
      int spread;
      spread = (n % 3 == 0) ? 500 : (n % 3 == 1) ? 3000 : 12000;
      @(negedge clk);
      m = -1.0e9;
      for (int i = 0; i < N; i++) begin
        int x;
        x = int'($urandom_range(0, 2 * spread)) - spread;
        in_x[i] = act_t'(x);
        xr[i] = real'(x) / 1024.0;
        if (xr[i] > m) m = xr[i];
      end
      s = 0.0;
      for (int i = 0; i < N; i++) s += $exp(xr[i] - m);
      for (int i = 0; i < N; i++) exp_w.push_back($exp(xr[i] - m) / s);
      exp_t.push_back(cyc);
      in_valid = 1;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_t.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
