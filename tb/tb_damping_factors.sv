// tb_damping_factors: the three amplitudes for every iteration 0..15 and a
// range of noise scales against the reference table scaled in software.
module tb_damping_factors;
  import gn_pkg::*;
  import tb_gn_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [ITER_W-1:0] iter;
  ns_t  ns;
  llr_t aa, ab, ag;
  damping_factors dut (.iter(iter), .noise_scale(ns), .amp_alpha(aa), .amp_beta(ab), .amp_gamma(ag));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 256; s += 7) begin
      for (int t = 0; t < 16; t++) begin
        iter = ITER_W'(t); ns = ns_t'(s); #1;
        checks += 3;
        if (int'(aa) != ref_amp(0, t, s)) begin failures++; $display("FAIL alpha t=%0d s=%0d %0d", t, s, aa); end
        if (int'(ab) != ref_amp(1, t, s)) begin failures++; $display("FAIL beta t=%0d s=%0d %0d", t, s, ab); end
        if (int'(ag) != ref_amp(2, t, s)) begin failures++; $display("FAIL gamma t=%0d s=%0d %0d", t, s, ag); end
        @(posedge clk);
      end
    end
    // Spot value: gamma_2 = 1.9997 ~ 2.0 at 2/sigma^2 = 8.0 LSB gives 16.
    iter = 2; ns = 8'd128; #1;
    checks++;
    if (int'(ag) != 16) begin failures++; $display("FAIL gamma2 spot %0d", ag); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
