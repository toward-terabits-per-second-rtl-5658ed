// polar_encoder: combinational transform x = u * G_NC with G_NC = F^{(x)n},
// F = [1 0; 1 1], n = log2(NC), natural bit order (no bit reversal).
//
// The circuit is n stages of NC/2 XOR butterflies; the stage with span s maps
// the pair (a, b) at positions (k, k+s) to (a^b, b). Because F*F = I over
// GF(2) the same circuit also inverts the transform, which is how the error
// detector reuses it as a syndrome former, as the paper suggests. Bit k of a
// vector holds element k+1 of the paper's 1-based vectors. No clock.
// x[NC-1] equals u[NC-1] (the last column of G_NC has a single 1), so that
// output is a plain wire from its input by construction.
module polar_encoder #(
  parameter int NC = gn_pkg::NC_DEFAULT
) (
  input  logic [NC-1:0] u,
  output logic [NC-1:0] x
);
  localparam int N_ST = $clog2(NC);

  logic [NC-1:0] stage [N_ST+1];

  always_comb begin
    stage[0] = u;
    for (int st = 0; st < N_ST; st++) begin
      stage[st+1] = stage[st];
      for (int k = 0; k < NC; k++) begin
        if ((k & (1 << st)) == 0)
          stage[st+1][k] = stage[st][k] ^ stage[st][k + (1 << st)];
      end
    end
  end

  assign x = stage[N_ST];
endmodule
