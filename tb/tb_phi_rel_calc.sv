// tb_phi_rel_calc -- random crossing azimuths and selected wires; phi_rel
// must equal phi_cross - id*2pi/N (wrapped, real arithmetic, within one
// unit), and 0 for an SL without selected segment.
module tb_phi_rel_calc;
  import dnn_pkg::*;

  logic   clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  logic   in_valid;
  slgeo_t in_geo [N_SL];
  sel_t   in_sel [N_SL];
  dphi_t  out_phi_rel [N_SL];

  phi_rel_calc dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0;
    for (int s = 0; s < N_SL; s++) begin in_geo[s] = '0; in_sel[s] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      in_valid = 1;
      for (int s = 0; s < N_SL; s++) begin
        in_geo[s].phi_cross = phi_t'($urandom);
        in_sel[s] = '0;
        in_sel[s].found = ($urandom % 5) != 0;
        in_sel[s].ts.id = TSID_W'($urandom_range(0, SL_NWIRES[s] - 1));
      end
      @(negedge clk);
      in_valid = 0;
      for (int s = 0; s < N_SL; s++) begin
        real e;
        e = real'(in_geo[s].phi_cross) - real'(in_sel[s].ts.id) * 8192.0 / real'(SL_NWIRES[s]);
        while (e >= 4096.0) e -= 8192.0;
        while (e < -4096.0) e += 8192.0;
        if (!in_sel[s].found) e = 0.0;
        checks++;
        if (rabs(real'(out_phi_rel[s]) - e) > 1.0 && rabs(rabs(real'(out_phi_rel[s]) - e) - 8192.0) > 1.0) begin
          failures++;
          $display("sl %0d: got %0d exp %f", s, out_phi_rel[s], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rabs(real v); return (v < 0.0) ? -v : v; endfunction
endmodule
