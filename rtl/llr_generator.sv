// llr_generator: rebuilds soft input LLRs for one component decoder from hard
// decisions, following the paper's two rules for iteration t:
//   e_prev = 1 (the bit came from an SC decoder in iteration t-1):
//     L = Lch + A*(1-2x^{t-1}) - B*(1-2x^{t-2})
//   e_prev = 0 (the bit came straight through an error detector):
//     L = Lch + C*(1-2x^{t-1})
// A, B and C are 2*alpha_t/sigma^2, 2*beta_t/sigma^2 and 2*gamma_t/sigma^2
// from damping_factors. e_prev is per bit because each bit of this component
// was produced by a different component of the other graph. The result is
// saturated to the symmetric LLR range (word length is this design's choice).
// Purely combinational, NC bits in parallel.
module llr_generator
  import gn_pkg::*;
#(
  parameter int NC = NC_DEFAULT
) (
  input  llr_t          lch [NC],  // channel LLRs
  input  logic [NC-1:0] x1,        // hard output of iteration t-1
  input  logic [NC-1:0] x2,        // hard output of iteration t-2 (this graph)
  input  logic [NC-1:0] e_prev,    // error flag of the component that produced each bit
  input  llr_t          amp_alpha,
  input  llr_t          amp_beta,
  input  llr_t          amp_gamma,
  output llr_t          llr [NC]
);
  always_comb begin
    for (int j = 0; j < NC; j++) begin
      int acc;
      acc = int'(lch[j]);
      if (e_prev[j]) begin
        acc = x1[j] ? acc - int'(amp_alpha) : acc + int'(amp_alpha);
        acc = x2[j] ? acc + int'(amp_beta)  : acc - int'(amp_beta);
      end else begin
        acc = x1[j] ? acc - int'(amp_gamma) : acc + int'(amp_gamma);
      end
      llr[j] = sat_llr(acc);
    end
  end
endmodule
