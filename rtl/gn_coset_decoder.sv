// gn_coset_decoder: top level of the low-complexity parallel decoder for an
// (N, K) G_N-coset code, N = NC * NC.
//
// The N code bits are arranged as an NC x NC matrix. Iterations alternate
// between the stage-permuted graph (each of the NC component decoders decodes
// one row as a length-NC polar code) and Arikan's graph (each decodes one
// column); only these inner codes are decoded, and the only values passed
// between iterations are hard bits and one error flag per component. Each
// component decoder skips its SC decoder when the incoming hard bits already
// form a codeword, and otherwise regenerates soft inputs from the channel
// LLRs, the last two hard outputs and the error flags with the learned
// damping factors. One bank of NC component decoders serves both graphs.
//
// Interface: frozen_row[i] / frozen_col[i] are the frozen-position masks of row
// code i and column code i (the code construction is an input, not fixed).
// noise_scale is 2/sigma^2 in LLR LSBs (Q4.4). Channel LLRs enter one matrix
// row per cycle (in_llr[c] = LLR of bit r*NC+c); the decoded codeword leaves
// one row per cycle. frame_iters, frame_early_stop and frame_sc_activations
// describe the last frame. Latency per iteration is 3 cycles plus, if any
// component needs SC decoding, 2*NC-2 cycles.
module gn_coset_decoder
  import gn_pkg::*;
#(
  parameter int N     = N_DEFAULT,
  parameter int T_MAX = T_MAX_DEFAULT
) (
  input  logic          clk,
  input  logic          rst_n,
  input  ns_t           noise_scale,
  input  logic [2**($clog2(N)/2)-1:0] frozen_row [2**($clog2(N)/2)],
  input  logic [2**($clog2(N)/2)-1:0] frozen_col [2**($clog2(N)/2)],
  input  logic          in_valid,
  output logic          in_ready,
  input  llr_t          in_llr [2**($clog2(N)/2)],
  output logic          out_valid,
  input  logic          out_ready,
  output logic          out_last,
  output logic [2**($clog2(N)/2)-1:0] out_row,
  output logic [ITER_W-1:0] frame_iters,
  output logic          frame_early_stop,
  output logic [15:0]   frame_sc_activations
);
  localparam int NC = 2 ** ($clog2(N) / 2);

  logic [$clog2(NC)-1:0] buf_row;
  logic                  buf_in_we, commit, dec_start;
  graph_e                graph;
  logic [ITER_W-1:0]     iter;
  llr_t                  amp_alpha, amp_beta, amp_gamma;

  llr_t          dec_lch [NC][NC];
  logic [NC-1:0] dec_x1 [NC];
  logic [NC-1:0] dec_x2 [NC];
  logic [NC-1:0] dec_e;
  logic [NC-1:0] ho [NC];
  logic [NC-1:0] e_now;
  logic [NC-1:0] busy;

  decoder_ctrl #(.NC(NC), .T_MAX(T_MAX)) u_ctrl (
    .clk, .rst_n,
    .in_valid, .in_ready, .out_valid, .out_ready, .out_last,
    .buf_in_we, .buf_row, .graph, .commit,
    .dec_start, .dec_busy_any(|busy), .dec_e(e_now),
    .iter, .sc_activations(frame_sc_activations), .frame_iters, .frame_early_stop
  );

  damping_factors u_df (
    .iter, .noise_scale, .amp_alpha, .amp_beta, .amp_gamma
  );

  exchange_buffer #(.NC(NC)) u_buf (
    .clk,
    .in_we(buf_in_we), .in_row(buf_row), .in_llr,
    .graph, .commit, .ho_in(ho), .e_in(e_now),
    .dec_lch, .dec_x1, .dec_x2, .dec_e,
    .rd_row(buf_row), .rd_data(out_row)
  );

  for (genvar i = 0; i < NC; i++) begin : g_dec
    component_decoder #(.NC(NC)) u_cd (
      .clk, .rst_n, .start(dec_start),
      .lch(dec_lch[i]), .x1(dec_x1[i]), .x2(dec_x2[i]), .e_prev(dec_e),
      .frozen((graph == GRAPH_PI) ? frozen_row[i] : frozen_col[i]),
      .amp_alpha, .amp_beta, .amp_gamma,
      .ho(ho[i]), .e(e_now[i]), .busy(busy[i])
    );
  end

  initial assert (NC * NC == N)
    else $error("gn_coset_decoder: N must be an even power of two");
endmodule
