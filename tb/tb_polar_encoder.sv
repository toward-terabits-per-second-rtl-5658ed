// tb_polar_encoder: checks the butterfly transform against the matrix
// definition of G_n at NC = 128 (default) and NC = 8, and that applying it
// twice gives the input back.
module tb_polar_encoder;
  import tb_gn_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [127:0] u, x, xx;
  logic [7:0]   u8, x8;
  polar_encoder dut (.u(u), .x(x));
  polar_encoder dut2 (.u(x), .x(xx));
  polar_encoder #(.NC(8)) dut8 (.u(u8), .x(x8));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      bvec_t exp;
      u  = {$urandom, $urandom, $urandom, $urandom};
      if (t < 128) u = 128'(1) << t;   // every row of G
      u8 = 8'($urandom);
      #1;
      exp = ref_encode(u, 128);
      checks++;
      if (x !== exp) begin failures++; $display("FAIL enc128 t=%0d", t); end
      checks++;
      if (xx !== u) begin failures++; $display("FAIL involution t=%0d", t); end
      exp = ref_encode(bvec_t'(u8), 8);
      checks++;
      if (x8 !== exp[7:0]) begin failures++; $display("FAIL enc8 t=%0d", t); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
