// tb_error_detector: codewords of random component codes must pass (e = 0),
// a codeword with one flipped bit must fail when position 0 is frozen, and
// random words must agree with the reference syndrome check. NC = 128.
module tb_error_detector;
  import tb_gn_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [127:0] ho, frozen;
  logic e;
  error_detector dut (.ho(ho), .frozen(frozen), .e(e));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      bvec_t u, cw;
      frozen = {$urandom, $urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom, $urandom};
      frozen[0] = 1'b1;
      u = {$urandom, $urandom, $urandom, $urandom} & ~frozen;
      cw = ref_encode(u, 128);
      ho = cw; #1;
      checks++;
      if (e !== 1'b0) begin failures++; $display("FAIL codeword t=%0d", t); end
      ho = cw ^ (128'(1) << ($urandom % 128)); #1;
      checks++;
      if (e !== 1'b1) begin failures++; $display("FAIL flipped t=%0d", t); end
      ho = {$urandom, $urandom, $urandom, $urandom};
      frozen = 128'(1) << ($urandom % 128);
      #1;
      checks++;
      if (e !== ref_detect(ho, frozen, 128)) begin failures++; $display("FAIL random t=%0d", t); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
