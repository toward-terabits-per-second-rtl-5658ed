// exchange_buffer: the NC x NC bit matrix through which the component
// decoders of the two factor graphs exchange hard outputs.
//
// Code bit k (0-based) sits in row r = k / NC, column c = k % NC. In graph G
// component i owns column i (bits i, i+NC, i+2NC, ...), in the stage-permuted
// graph G_pi it owns row i (bits i*NC .. i*NC+NC-1), as the bit labels of the
// paper's encoding-graph figure show. The buffer holds the channel LLRs, the
// hard outputs of the last two iterations (x1 = t-1, x2 = t-2) and the NC
// error flags of the last iteration, and presents to each decoder its row or
// column according to graph. A commit stores the decoders' new hard outputs
// into that row or column (x2 takes the old x1) and stores their flags.
// Bit j of a decoder's view came from component j of the other graph, so the
// per-bit error flags of every decoder equal the flag vector itself.
//
// Loading a channel row also initialises x1 and x2 of that row with the hard
// decisions of the channel LLRs and clears the flags (this design's choice:
// the paper does not say what the hard outputs before iteration 1 are).
// Writes take effect at the clock edge; all reads are combinational.
module exchange_buffer
  import gn_pkg::*;
#(
  parameter int NC = NC_DEFAULT
) (
  input  logic                  clk,
  // channel LLR load, one row per cycle
  input  logic                  in_we,
  input  logic [$clog2(NC)-1:0] in_row,
  input  llr_t                  in_llr [NC],
  // iteration interface
  input  graph_e                graph,
  input  logic                  commit,
  input  logic [NC-1:0]         ho_in [NC],   // new hard output of decoder i
  input  logic [NC-1:0]         e_in,         // error flag of decoder i
  output llr_t                  dec_lch [NC][NC],
  output logic [NC-1:0]         dec_x1 [NC],
  output logic [NC-1:0]         dec_x2 [NC],
  output logic [NC-1:0]         dec_e,
  // result read port
  input  logic [$clog2(NC)-1:0] rd_row,
  output logic [NC-1:0]         rd_data
);
  llr_t          lch [NC][NC];
  logic [NC-1:0] x1  [NC];
  logic [NC-1:0] x2  [NC];
  logic [NC-1:0] ef;

  always_ff @(posedge clk) begin
    if (in_we) begin
      lch[in_row] <= in_llr;
      for (int c = 0; c < NC; c++) begin
        x1[in_row][c] <= in_llr[c] < 0;
        x2[in_row][c] <= in_llr[c] < 0;
      end
      ef <= '0;
    end else if (commit) begin
      x2 <= x1;
      ef <= e_in;
      for (int r = 0; r < NC; r++)
        for (int c = 0; c < NC; c++)
          x1[r][c] <= (graph == GRAPH_PI) ? ho_in[r][c] : ho_in[c][r];
    end
  end

  always_comb begin
    for (int i = 0; i < NC; i++) begin
      for (int j = 0; j < NC; j++) begin
        if (graph == GRAPH_PI) begin
          dec_lch[i][j] = lch[i][j];
          dec_x1[i][j]  = x1[i][j];
          dec_x2[i][j]  = x2[i][j];
        end else begin
          dec_lch[i][j] = lch[j][i];
          dec_x1[i][j]  = x1[j][i];
          dec_x2[i][j]  = x2[j][i];
        end
      end
    end
  end

  // A frame is never loaded while an iteration is being committed.
  a_we_commit: assert property (@(posedge clk) !(in_we && commit));

  assign dec_e   = ef;
  assign rd_data = x1[rd_row];
endmodule
