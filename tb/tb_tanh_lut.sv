// tb_tanh_lut -- sweeps the whole Q6.10 input range through the tanh table
// and compares with the real tanh: the error must stay within the table's
// bin width (derivative <= 1, half bin = 1/256) plus rounding, the output
// must be odd-symmetric to one LSB, monotonic, and saturate beyond +-4.
module tb_tanh_lut;
  import dnn_pkg::*;

  logic clk = 0;
  always #4 clk = ~clk;

  logic in_valid, out_valid;
  act_t in_x;
  out_t out_y;

  tanh_lut dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev;
    real err, maxerr;
    prev = -5000; maxerr = 0.0;
    in_valid = 0; in_x = '0;
    for (int x = -6000; x <= 6000; x += 3) begin
      @(negedge clk);
      in_x = act_t'(x); in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      err = real'(out_y) / 4096.0 - $tanh(real'(x) / 1024.0);
      if (err < 0) err = -err;
      if (err > maxerr) maxerr = err;
      checks++;
      if (err > 1.0 / 256.0 + 1.0 / 4096.0) begin
        failures++;
        $display("x=%0d y=%0d err=%f", x, out_y, err);
      end
      checks++;
      if (int'(out_y) < prev) failures++;
      prev = int'(out_y);
      if (x > 4200) begin checks++; if (int'(out_y) < 4090) failures++; end
      if (x < -4200) begin checks++; if (int'(out_y) > -4090) failures++; end
    end
    $display("max |error| = %f", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
