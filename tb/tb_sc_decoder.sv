// tb_sc_decoder: decodes random and noisy-codeword LLR vectors at NC = 128
// (default) and NC = 8, compares the codeword estimate with the reference SC
// decoder and checks that busy stays high exactly 2*NC-2 cycles.
module tb_sc_decoder;
  import gn_pkg::*;
  import tb_gn_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  llr_t l128 [128];
  llr_t l8 [8];
  logic [127:0] f128, x128;
  logic [7:0]   f8, x8;
  logic start128 = 0, start8 = 0, busy128, busy8;

  sc_decoder dut128 (.clk, .rst_n, .start(start128), .llr_in(l128), .frozen(f128), .busy(busy128), .x_hat(x128));
  sc_decoder #(.NC(8)) dut8 (.clk, .rst_n, .start(start8), .llr_in(l8), .frozen(f8), .busy(busy8), .x_hat(x8));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run128(input lvec_t lv, input bvec_t fz);
    int cyc;
    bvec_t exp;
    for (int k = 0; k < 128; k++) l128[k] = llr_t'(lv[k]);
    f128 = fz;
    @(negedge clk); start128 = 1;
    @(negedge clk); start128 = 0;
    cyc = 0;
    while (busy128) begin @(negedge clk); cyc++; end
    exp = ref_sc(lv, fz, 128);
    checks += 2;
    if (x128 !== exp) begin failures++; $display("FAIL x128"); end
    if (cyc != 2 * 128 - 2) begin failures++; $display("FAIL latency128 %0d", cyc); end
  endtask

  task automatic run8(input lvec_t lv, input bvec_t fz);
    int cyc;
    bvec_t exp;
    for (int k = 0; k < 8; k++) l8[k] = llr_t'(lv[k]);
    f8 = fz[7:0];
    @(negedge clk); start8 = 1;
    @(negedge clk); start8 = 0;
    cyc = 0;
    while (busy8) begin @(negedge clk); cyc++; end
    exp = ref_sc(lv, fz, 8);
    checks += 2;
    if (x8 !== exp[7:0]) begin failures++; $display("FAIL x8 got %h exp %h", x8, exp[7:0]); end
    if (cyc != 2 * 8 - 2) begin failures++; $display("FAIL latency8 %0d", cyc); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      lvec_t lv;
      bvec_t fz;
      fz = '0;
      for (int k = 0; k < 8; k++) begin
        lv[k] = int'($urandom % 63) - 31;
        fz[k] = ($urandom % 3 == 0);
      end
      run8(lv, fz);
    end
    for (int t = 0; t < 40; t++) begin
      lvec_t lv;
      bvec_t fz, u, cw;
      fz = {$urandom, $urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom, $urandom};
      u  = {$urandom, $urandom, $urandom, $urandom} & ~fz;
      cw = ref_encode(u, 128);
      for (int k = 0; k < 128; k++) begin
        if (t % 2 == 0) lv[k] = rsat((cw[k] ? -8 : 8) + $rtoi(4.0 * gauss()));
        else            lv[k] = int'($urandom % 63) - 31;
      end
      run128(lv, fz);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
