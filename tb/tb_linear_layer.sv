// tb_linear_layer -- checks the 71->27 quantised layer against the golden
// model for all five weight sets, its 4-clock latency and back-to-back
// operation at one vector every 4 clocks.
module tb_linear_layer;
  import dnn_pkg::*;
  import dnn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  wcfg_t   cfg;
  logic    in_valid, out_valid;
  act_t    in_x [71];
  act_t    out_y [27];
  expert_t in_expert, out_expert;

  linear_layer #(.IN(71), .OUT(27), .LAYER_ID(0)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results queue
  int exp_y [$];
  int exp_e [$];
  int exp_t [$];

  always @(posedge clk) if (rst_n && out_valid) begin
    int e; int t; int yo;
    if (exp_e.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = exp_e.pop_front(); t = exp_t.pop_front();
      checks++;
      if (cyc - t != 5) begin failures++; $display("latency %0d", cyc - t); end
      checks++;
      if (int'(out_expert) != e) failures++;
      for (int o = 0; o < 27; o++) begin
        checks++;
        yo = exp_y.pop_front();
        if (int'(out_y[o]) != yo) begin
          failures++;
          if (failures < 10) $display("node %0d: got %0d exp %0d", o, out_y[o], yo);
        end
      end
    end
  end

  task automatic send(int e, int gap);
    int x[MAXN]; int y[MAXN];
    x = '{default: 0};
    for (int i = 0; i < 71; i++) begin
      x[i] = srand(-1023, 1023);
      in_x[i] = act_t'(x[i]);
    end
    ref_linear(0, e, x, y);
    for (int o = 0; o < 27; o++) exp_y.push_back(y[o]);
    exp_e.push_back(e);
    in_expert = expert_t'(e);
    in_valid = 1;
    @(posedge clk); #1;
    exp_t.push_back(cyc - 1);
    in_valid = 0;
    repeat (gap - 1) @(posedge clk);
    #1;
  endtask

  initial begin
    cfg = '0; in_valid = 0; in_expert = '0;
    for (int i = 0; i < 71; i++) in_x[i] = '0;
    gen_weights();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < n_cfg_words(); k++) begin
      wcfg_t c;
      c = cfg_word(k);
      if (c.layer == 3'd0) begin
        @(negedge clk); cfg = c;
      end
    end
    @(negedge clk); cfg = '0;
    @(posedge clk); #1;
    // one vector per expert, spaced out
    for (int e = 0; e < 5; e++) send(e, 8);
    // back-to-back at the full rate
    for (int n = 0; n < 20; n++) send(n % 5, 4);
    repeat (20) @(posedge clk);
    checks++;
    if (exp_e.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
