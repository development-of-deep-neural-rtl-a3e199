// tb_self_attention -- checks Softmax(x W_w) (.) (x W_v + b_v) against the
// golden model for all five experts, the 11-clock latency and full-rate
// operation.
module tb_self_attention;
  import dnn_pkg::*;
  import dnn_ref_pkg::*;

  localparam int LAT = 11;   // clocks from in_valid to out_valid

  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  wcfg_t   cfg;
  logic    in_valid, out_valid;
  act_t    in_x [27];
  act_t    out_y [27];
  expert_t in_expert, out_expert;

  self_attention #(.N(27)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_y [$];
  int exp_e [$];
  int exp_t [$];
  int n_out = 0;

  always @(posedge clk) if (rst_n && out_valid) begin
    int e; int t; int yo;
    if (exp_e.size() == 0) begin failures++; $display("unexpected output at %0d", cyc); end
    else begin
      e = exp_e.pop_front(); t = exp_t.pop_front();
      n_out++;
      checks++;
      if (cyc - t != LAT) begin failures++; $display("latency %0d", cyc - t); end
      checks++;
      if (int'(out_expert) != e) failures++;
      for (int o = 0; o < 27; o++) begin
        yo = exp_y.pop_front();
        checks++;
        if (int'(out_y[o]) != yo) begin
          failures++;
          if (failures < 10) $display("out %0d: got %0d exp %0d", o, out_y[o], yo);
        end
      end
    end
  end

  task automatic send(int e, int gap);
    int x[MAXN]; int y[MAXN];
    x = '{default: 0};
    for (int i = 0; i < 27; i++) begin
      x[i] = srand(-1023, 1023);
      in_x[i] = act_t'(x[i]);
    end
    begin int ww[MAXN]; int vv[MAXN]; int sm[MAXN];
      ref_linear(2, e, x, ww);
      ref_linear(3, e, x, vv);
      ref_softmax(ww, 27, sm);
      y = '{default: 0};
      for (int i = 0; i < 27; i++) y[i] = sat16(longint'(floor_div(longint'(sm[i]) * vv[i], 1024)));
    end
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
    for (int i = 0; i < 27; i++) in_x[i] = '0;
    gen_weights();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < n_cfg_words(); k++) begin
      begin wcfg_t c; c = cfg_word(k); if (c.layer == 3'd2 || c.layer == 3'd3) begin @(negedge clk); cfg = c; end end
    end
    @(negedge clk); cfg = '0;
    @(posedge clk); #1;
    for (int e = 0; e < 5; e++) send(e, 40);
    for (int n = 0; n < 30; n++) send(n % 5, 4);
    repeat (LAT + 10) @(posedge clk);
    checks++;
    if (exp_e.size() != 0 || n_out != 35) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
