// tb_component_decoder: NC = 32. Bypass case: x1 is a codeword, so e = 0, the
// SC decoder stays idle, ho = x1 and busy never rises. Decode case: x1 is not a
// codeword, so e = 1 and after 2*NC-2 busy cycles ho equals the reference SC
// output of the reference LLRs. A second instance at the default NC = 128
// decodes the (128,119) component code of the rate 14161/16384 configuration
// (frozen positions 0,1,2,3,4,8,16,32,64) on noisy codewords.
module tb_component_decoder;
  import gn_pkg::*;
  import tb_gn_ref_pkg::*;
  localparam int NC = 32;
  int checks = 0, failures = 0, n_bypass = 0, n_decode = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  llr_t lch [NC];
  logic [NC-1:0] x1, x2, ep, fz, ho;
  llr_t aa, ab, ag;
  logic e, busy;

  component_decoder #(.NC(NC)) dut (
    .clk, .rst_n, .start, .lch, .x1, .x2, .e_prev(ep), .frozen(fz),
    .amp_alpha(aa), .amp_beta(ab), .amp_gamma(ag), .ho, .e, .busy);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Default-size instance with the (128,119) component code.
  logic start128 = 0;
  llr_t lch128 [128];
  logic [127:0] x1_128, x2_128, ep128, fz128, ho128;
  logic e128, busy128;
  component_decoder u_cd128 (
    .clk, .rst_n, .start(start128), .lch(lch128), .x1(x1_128), .x2(x2_128), .e_prev(ep128),
    .frozen(fz128), .amp_alpha(aa), .amp_beta(ab), .amp_gamma(ag), .ho(ho128), .e(e128), .busy(busy128));

  task automatic run128(input int t);
    bvec_t u, cw, exp, f;
    lvec_t lg;
    int cyc;
    bit err;
    f = '0;
    for (int k = 0; k < 128; k++) f[k] = ($countones(k) <= 1) || k == 3;
    fz128 = f;
    u  = {$urandom, $urandom, $urandom, $urandom} & ~f;
    cw = ref_encode(u, 128);
    for (int j = 0; j < 128; j++) lch128[j] = llr_t'(rsat((cw[j] ? -10 : 10) + $rtoi(4.0 * gauss())));
    x1_128 = cw;
    for (int j = 0; j < 128; j++) if ($urandom % 64 == 0) x1_128[j] = ~x1_128[j];
    x2_128 = {$urandom, $urandom, $urandom, $urandom};
    ep128  = {$urandom, $urandom, $urandom, $urandom};
    err = ref_detect(x1_128, f, 128);
    @(negedge clk); start128 = 1;
    @(negedge clk); start128 = 0;
    cyc = 0;
    while (busy128) begin @(negedge clk); cyc++; end
    checks += 3;
    if (e128 !== err) begin failures++; $display("FAIL e128 t=%0d", t); end
    if (err) begin
      n_decode++;
      for (int j = 0; j < 128; j++)
        lg[j] = ref_llr(int'(lch128[j]), x1_128[j], x2_128[j], ep128[j], int'(aa), int'(ab), int'(ag));
      exp = ref_sc(lg, f, 128);
      if (ho128 !== exp) begin failures++; $display("FAIL ho128 t=%0d", t); end
      if (cyc != 2 * 128 - 2) begin failures++; $display("FAIL latency128 %0d", cyc); end
    end else begin
      n_bypass++;
      if (ho128 !== x1_128) begin failures++; $display("FAIL bypass128 t=%0d", t); end
      if (cyc != 0) begin failures++; $display("FAIL bypass latency128 %0d", cyc); end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      aa = llr_t'($urandom % 16); ab = llr_t'($urandom % 16); ag = llr_t'($urandom % 16);
      run128(t);
    end
    for (int t = 0; t < 100; t++) begin
      bvec_t u, cw, exp;
      lvec_t lg;
      bit    bypass;
      int    cyc;
      fz = $urandom & $urandom;
      fz[0] = 1'b1;
      u  = bvec_t'($urandom & ~fz);
      cw = ref_encode(u, NC);
      bypass = (t % 2 == 0);
      x1 = bypass ? cw[NC-1:0] : cw[NC-1:0] ^ (NC'(1) << ($urandom % NC));
      x2 = $urandom;
      ep = $urandom;
      aa = llr_t'($urandom % 16); ab = llr_t'($urandom % 16); ag = llr_t'($urandom % 16);
      for (int j = 0; j < NC; j++) lch[j] = llr_t'(int'($urandom % 63) - 31);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 0;
      while (busy) begin @(negedge clk); cyc++; end
      checks += 3;
      if (e !== !bypass) begin failures++; $display("FAIL e t=%0d", t); end
      if (bypass) begin
        n_bypass++;
        if (ho !== x1) begin failures++; $display("FAIL bypass ho t=%0d", t); end
        if (cyc != 0) begin failures++; $display("FAIL bypass latency %0d", cyc); end
      end else begin
        n_decode++;
        for (int j = 0; j < NC; j++)
          lg[j] = ref_llr(int'(lch[j]), x1[j], x2[j], ep[j], int'(aa), int'(ab), int'(ag));
        exp = ref_sc(lg, bvec_t'(fz), NC);
        if (ho !== exp[NC-1:0]) begin failures++; $display("FAIL decode ho t=%0d", t); end
        if (cyc != 2 * NC - 2) begin failures++; $display("FAIL decode latency %0d", cyc); end
      end
    end
    checks++;
    if (n_bypass == 0 || n_decode == 0) failures++;
    $display("bypass=%0d decode=%0d", n_bypass, n_decode);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
