// tb_llr_generator: random channel LLRs, hard outputs, error flags and
// amplitudes (including saturating ones) against the two reference rules.
module tb_llr_generator;
  import gn_pkg::*;
  import tb_gn_ref_pkg::*;
  localparam int NC = 128;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  llr_t lch [NC];
  llr_t llr [NC];
  logic [NC-1:0] x1, x2, ep;
  llr_t aa, ab, ag;
  llr_generator dut (.lch(lch), .x1(x1), .x2(x2), .e_prev(ep),
                     .amp_alpha(aa), .amp_beta(ab), .amp_gamma(ag), .llr(llr));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int j = 0; j < NC; j++) lch[j] = llr_t'(int'($urandom % 63) - 31);
      x1 = {$urandom, $urandom, $urandom, $urandom};
      x2 = {$urandom, $urandom, $urandom, $urandom};
      ep = {$urandom, $urandom, $urandom, $urandom};
      aa = llr_t'($urandom % 32); ab = llr_t'($urandom % 32); ag = llr_t'($urandom % 32);
      #1;
      for (int j = 0; j < NC; j++) begin
        checks++;
        if (int'(llr[j]) != ref_llr(int'(lch[j]), x1[j], x2[j], ep[j], int'(aa), int'(ab), int'(ag))) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d j=%0d got %0d", t, j, llr[j]);
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
