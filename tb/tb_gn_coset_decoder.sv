// tb_gn_coset_decoder: end-to-end test of the whole decoder at N = 256
// (16 x 16 bit matrix), T_MAX = 8. Each frame is a product-code codeword
// (rows and columns are (16,11) polar codes, frozen positions 0,1,2,4,8), sent
// as BPSK through Gaussian noise and quantised to 6-bit LLRs. The decoded
// frame, the number of iterations, the stop reason, the number of activated
// SC decoders and the decoding latency are compared with the reference model
// of the algorithm. Noise levels range from clean to hopeless so that SC
// bypass, SC decoding, both LLR-generation rules, early stop and the
// iteration limit all occur; each is counted and must occur at least once.
module tb_gn_coset_decoder;
  import gn_pkg::*;
  import tb_gn_ref_pkg::*;
  localparam int N = 256;
  localparam int T_MAX = 8;
  localparam int NC = 16;
  localparam int NS = 128;                 // 2/sigma^2 = 8 LSB in Q4.4
  localparam real SIGMAS [10] = '{0.05, 0.30, 0.40, 0.45, 0.50, 0.55, 0.60, 0.70, 1.2, 1.5};
  localparam int WATCHDOG = 200000;

  int checks = 0, failures = 0;
  int n_bypass = 0, n_sc = 0, n_early = 0, n_limit = 0, n_fail_rule = 0, n_pass_rule = 0, n_correct = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ns_t  noise_scale = ns_t'(NS);
  logic [NC-1:0] frozen_row [NC], frozen_col [NC];
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last, early;
  llr_t in_llr [NC];
  logic [NC-1:0] out_row;
  logic [ITER_W-1:0] iters;
  logic [15:0] acts;

  gn_coset_decoder #(.N(N), .T_MAX(T_MAX)) dut (
    .clk, .rst_n, .noise_scale, .frozen_row, .frozen_col,
    .in_valid, .in_ready, .in_llr, .out_valid, .out_ready, .out_last, .out_row,
    .frame_iters(iters), .frame_early_stop(early), .frame_sc_activations(acts));

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frame(input real sigma);
    bvec_t fz;
    bmat_t cw, fzm;
    lmat_t lch;
    ref_result_t ref_r;
    int cyc, exp_cyc, bad;
    bit correct;
    fz = '0;
    for (int k = 0; k < NC; k++) fz[k] = ($countones(k) <= 1);
    for (int i = 0; i < NC; i++) begin
      frozen_row[i] = fz[NC-1:0];
      frozen_col[i] = fz[NC-1:0];
      fzm[i] = fz;
    end
    cw = make_codeword(fz, fz, NC);
    for (int r = 0; r < NC; r++)
      for (int c = 0; c < NC; c++)
        lch[r][c] = rsat($rtoi($floor(real'(NS) / 16.0 * ((cw[r][c] ? -1.0 : 1.0) + sigma * gauss()) + 0.5)));
    ref_r = ref_decode(lch, fzm, fzm, NC, T_MAX, NS);
    for (int r = 0; r < NC; r++) begin
      @(negedge clk);
      in_valid = 1;
      for (int c = 0; c < NC; c++) in_llr[c] = llr_t'(lch[r][c]);
      while (!in_ready) @(negedge clk);
    end
    @(negedge clk);
    in_valid = 0;
    cyc = 0;
    while (!out_valid) begin @(negedge clk); cyc++; end
    exp_cyc = 3 * ref_r.iters + (2 * NC - 2) * ref_r.sc_iters;
    bad = 0;
    correct = 1;
    out_ready = 1;
    for (int r = 0; r < NC; r++) begin
      if (!out_valid) bad++;
      for (int c = 0; c < NC; c++) begin
        if (out_row[c] != ref_r.x[r][c]) bad++;
        if (out_row[c] != cw[r][c]) correct = 0;
      end
      if (out_last != (r == NC - 1)) bad++;
      @(negedge clk);
    end
    out_ready = 0;
    checks += 5;
    if (bad != 0) begin failures++; $display("FAIL frame data mismatches=%0d", bad); end
    if (int'(iters) != ref_r.iters) begin failures++; $display("FAIL iters %0d exp %0d", iters, ref_r.iters); end
    if (early != ref_r.early) begin failures++; $display("FAIL early flag"); end
    if (int'(acts) != ref_r.activations) begin failures++; $display("FAIL activations %0d exp %0d", acts, ref_r.activations); end
    if (cyc != exp_cyc) begin failures++; $display("FAIL latency %0d exp %0d", cyc, exp_cyc); end
    $display("sigma=%0.2f iters=%0d early=%0d activations=%0d/%0d latency=%0d correct=%0d",
             sigma, ref_r.iters, ref_r.early, ref_r.activations, NC * ref_r.iters, cyc, correct);
    n_bypass    += ref_r.bypasses;
    n_sc        += ref_r.activations;
    n_early     += ref_r.early;
    n_limit     += !ref_r.early;
    n_fail_rule += ref_r.gen_fail;
    n_pass_rule += ref_r.gen_pass;
    n_correct   += correct;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (SIGMAS[k]) run_frame(SIGMAS[k]);
    $display("bypass=%0d sc=%0d early=%0d limit=%0d rule_fail=%0d rule_pass=%0d correct_frames=%0d",
             n_bypass, n_sc, n_early, n_limit, n_fail_rule, n_pass_rule, n_correct);
    checks += 7;
    if (n_bypass == 0)    begin failures++; $display("FAIL no SC bypass"); end
    if (n_sc == 0)        begin failures++; $display("FAIL no SC decoding"); end
    if (n_early == 0)     begin failures++; $display("FAIL no early stop"); end
    if (n_limit == 0)     begin failures++; $display("FAIL iteration limit never reached"); end
    if (n_fail_rule == 0) begin failures++; $display("FAIL E=1 LLR rule never used"); end
    if (n_pass_rule == 0) begin failures++; $display("FAIL E=0 LLR rule never used"); end
    if (n_correct == 0)   begin failures++; $display("FAIL no frame decoded correctly"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
