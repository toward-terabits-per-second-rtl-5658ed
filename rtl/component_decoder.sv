// component_decoder: one of the sqrt(N) parallel component decoders, built as
// in the paper's component-decoder figure: an error detector, an LLR
// generator, a hard-output SC decoder and an output MUX.
//
// On start the error detector checks the hard output of the previous
// iteration (x1). Its result e is registered and both leaves the block (the
// next iteration's LLR generators use it) and drives the MUX. If e = 0, x1 is
// already a codeword: the SC decoder is not started and ho = x1 (bypass). If
// e = 1, the LLR generator turns channel LLRs, x1, x2 and the per-bit error
// flags of the previous iteration into soft inputs, the SC decoder is started
// on them, and ho is its decoded codeword.
//
// Timing: inputs must hold from start until busy is low. e is valid from the
// cycle after start. busy is low again after 1 cycle (bypass) or after
// 2*NC-1 cycles (SC run); ho is valid whenever busy is low after a start.
module component_decoder
  import gn_pkg::*;
#(
  parameter int NC = NC_DEFAULT
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  llr_t          lch [NC],
  input  logic [NC-1:0] x1,        // HO of iteration t-1 (from the other graph)
  input  logic [NC-1:0] x2,        // HO of iteration t-2 (this graph)
  input  logic [NC-1:0] e_prev,    // per-bit E of iteration t-1
  input  logic [NC-1:0] frozen,
  input  llr_t          amp_alpha,
  input  llr_t          amp_beta,
  input  llr_t          amp_gamma,
  output logic [NC-1:0] ho,
  output logic          e,
  output logic          busy
);
  logic          e_now;
  llr_t          llr [NC];
  logic [NC-1:0] sc_x;

  error_detector #(.NC(NC)) u_det (.ho(x1), .frozen(frozen), .e(e_now));

  llr_generator #(.NC(NC)) u_gen (
    .lch(lch), .x1(x1), .x2(x2), .e_prev(e_prev),
    .amp_alpha(amp_alpha), .amp_beta(amp_beta), .amp_gamma(amp_gamma),
    .llr(llr)
  );

  sc_decoder #(.NC(NC)) u_sc (
    .clk(clk), .rst_n(rst_n), .start(start && e_now),
    .llr_in(llr), .frozen(frozen), .busy(busy), .x_hat(sc_x)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     e <= 1'b0;
    else if (start) e <= e_now;
  end

  // Output MUX, selected by E.
  assign ho = e ? sc_x : x1;
endmodule
