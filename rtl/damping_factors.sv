// damping_factors: the damping-factor table of the LLR generator and its
// scaling by the channel noise.
//
// The table holds alpha_t, beta_t and gamma_t for t = 1..8 as learned offline
// by the paper's genetic algorithm (its Table 2), stored as unsigned Q2.8.
// Each LLR generator needs 2*alpha_t/sigma^2, 2*beta_t/sigma^2 and
// 2*gamma_t/sigma^2 in LLR units; since 2/sigma^2 depends on the channel, it
// is an input (noise_scale, Q4.4 in LLR LSBs) and the three products are
// formed here once per decoder and shared by all component decoders.
// Products are rounded to the nearest LSB and saturated to LLR_MAX; the
// fixed-point formats are this design's choice. Combinational; iter is 1-based
// and values outside 1..8 give zero amplitudes.
module damping_factors
  import gn_pkg::*;
(
  input  logic [ITER_W-1:0] iter,
  input  ns_t               noise_scale,
  output llr_t              amp_alpha,
  output llr_t              amp_beta,
  output llr_t              amp_gamma
);
  // Values as printed in the paper's table; index 0 is iteration 1.
  localparam df_t ALPHA [T_TABLE] = '{df_q(0.0), df_q(0.2680), df_q(0.4236), df_q(0.5051),
                                      df_q(0.6147), df_q(1.2661), df_q(0.4054), df_q(0.5360)};
  localparam df_t BETA  [T_TABLE] = '{df_q(0.0), df_q(0.0), df_q(0.2075), df_q(0.2542),
                                      df_q(0.3574), df_q(0.9922), df_q(0.2714), df_q(0.1566)};
  localparam df_t GAMMA [T_TABLE] = '{df_q(0.0), df_q(1.9997), df_q(0.6695), df_q(0.8296),
                                      df_q(0.7598), df_q(0.7647), df_q(0.7851), df_q(0.8723)};

  localparam int SHIFT = DF_FRAC + NS_FRAC;

  function automatic llr_t scale(input df_t f, input ns_t s);
    logic [DF_W+NS_W-1:0] p;
    logic [DF_W+NS_W-1:0] r;
    p = (DF_W + NS_W)'(f) * (DF_W + NS_W)'(s);
    r = (p + (DF_W + NS_W)'(1 << (SHIFT - 1))) >> SHIFT;
    return (r > (DF_W + NS_W)'(LLR_MAX)) ? llr_t'(LLR_MAX) : llr_t'(r);
  endfunction

  df_t fa, fb, fg;

  always_comb begin
    fa = '0;
    fb = '0;
    fg = '0;
    for (int t = 0; t < T_TABLE; t++) begin
      if (int'(iter) == t + 1) begin
        fa = ALPHA[t];
        fb = BETA[t];
        fg = GAMMA[t];
      end
    end
  end

  assign amp_alpha = scale(fa, noise_scale);
  assign amp_beta  = scale(fb, noise_scale);
  assign amp_gamma = scale(fg, noise_scale);
endmodule
