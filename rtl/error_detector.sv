// error_detector: syndrome check of one component code's hard-output vector.
//
// The paper places an error detector before each component decoder and notes
// that it can reuse the encoding circuit. Here the hard-output vector ho is
// passed through polar_encoder (G_NC is its own inverse), giving the input
// vector u that would produce it; ho is a codeword exactly when u is zero on
// every frozen position. e = 1 means "not a codeword" (error detected).
// The frozen mask is an input because the component codes' frozen sets depend
// on the code construction, which the paper leaves to its reference work.
// Purely combinational.
module error_detector #(
  parameter int NC = gn_pkg::NC_DEFAULT
) (
  input  logic [NC-1:0] ho,      // hard output of the previous iteration
  input  logic [NC-1:0] frozen,  // 1 = frozen input position
  output logic          e        // 1 = ho is not a codeword
);
  logic [NC-1:0] u;

  polar_encoder #(.NC(NC)) u_reenc (.u(ho), .x(u));

  assign e = |(u & frozen);
endmodule
