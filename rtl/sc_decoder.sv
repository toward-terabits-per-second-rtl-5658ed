// sc_decoder: hard-output successive-cancellation (SC) decoder for one
// length-NC component polar code x = u * G_NC (natural order).
//
// The paper uses plain SC as component decoder and gives no architecture; this
// one is a tree decoder that evaluates one depth of the SC tree per clock. For
// every depth d = 1..n (n = log2 NC) it has NC>>d min-sum units that compute
// all LLRs of the active node at that depth in parallel, either f (left
// child) or g (right child, using the stored partial sum of its left
// sibling). When the leaf of bit i is reached its decision (0 if frozen, else
// the sign of the leaf LLR) is combined upward in the same cycle through the
// partial-sum XOR tree; the partial sum of each completed left node is kept in
// bl[d]. Bit i+1 restarts at depth n - tz(i+1) with a g step, where tz counts
// trailing zeros. After the last bit the root partial sum is the re-encoded
// codeword, which is what the iterative decoder exchanges.
//
// Timing: start (one cycle) latches llr_in and frozen; busy is high for
// exactly 2*NC-2 cycles after it; x_hat is valid and held once busy falls.
module sc_decoder
  import gn_pkg::*;
#(
  parameter int NC = NC_DEFAULT
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  llr_t          llr_in [NC],
  input  logic [NC-1:0] frozen,
  output logic          busy,
  output logic [NC-1:0] x_hat
);
  localparam int N_ST = $clog2(NC);
  localparam int IW   = (N_ST > 0) ? N_ST : 1;
  localparam int DW   = $clog2(N_ST + 1) + 1;

  llr_t          alpha [N_ST+1][NC];   // alpha[d][k], k < NC>>d is used
  logic [NC-1:0] bl    [N_ST+1];       // partial sum of the completed left child at depth d
  logic [NC-1:0] frz;
  logic [IW-1:0] bit_i;
  logic [DW-1:0] depth;
  logic          use_g;

  llr_t          nxt [N_ST+1][NC];     // candidate LLRs for each depth
  logic [NC-1:0] ps  [N_ST+1];         // partial sums walking up from the leaf
  logic          u_dec;

  function automatic int tz(input logic [IW-1:0] v);
    for (int b = 0; b < N_ST; b++)
      if (v[b]) return b;
    return N_ST;
  endfunction

  // Min-sum units of every depth; only the active depth is stored.
  always_comb begin
    for (int d = 0; d <= N_ST; d++)
      for (int k = 0; k < NC; k++)
        nxt[d][k] = '0;
    for (int d = 1; d <= N_ST; d++) begin
      for (int k = 0; k < (NC >> d); k++) begin
        if (use_g)
          nxt[d][k] = g_op(alpha[d-1][k], alpha[d-1][k + (NC >> d)], bl[d][k]);
        else
          nxt[d][k] = f_op(alpha[d-1][k], alpha[d-1][k + (NC >> d)]);
      end
    end
  end

  // Leaf decision and upward partial-sum combination.
  always_comb begin
    u_dec = !frz[bit_i] && (nxt[N_ST][0] < 0);
    for (int d = 0; d <= N_ST; d++)
      ps[d] = '0;
    ps[N_ST][0] = u_dec;
    for (int d = N_ST; d >= 1; d--) begin
      for (int k = 0; k < (NC >> d); k++) begin
        ps[d-1][k]             = bl[d][k] ^ ps[d][k];
        ps[d-1][k + (NC >> d)] = ps[d][k];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      x_hat <= '0;
      bit_i <= '0;
      depth <= '0;
      use_g <= 1'b0;
    end else if (start) begin
      busy  <= 1'b1;
      bit_i <= '0;
      depth <= DW'(1);
      use_g <= 1'b0;
    end else if (busy) begin
      if (int'(depth) == N_ST) begin
        if (int'(bit_i) == NC - 1) begin
          x_hat <= ps[0];
          busy  <= 1'b0;
        end else begin
          bit_i <= bit_i + 1'b1;
          depth <= DW'(N_ST - tz(bit_i + 1'b1));
          use_g <= 1'b1;
        end
      end else begin
        depth <= depth + 1'b1;
        use_g <= 1'b0;
      end
    end
  end

  // Datapath registers (no reset needed: loaded by start before use).
  always_ff @(posedge clk) begin
    if (start) begin
      alpha[0] <= llr_in;
      frz      <= frozen;
    end else if (busy) begin
      for (int d = 1; d <= N_ST; d++)
        if (int'(depth) == d)
          alpha[d] <= nxt[d];
      if (int'(depth) == N_ST) begin
        // Store the partial sum of the node that has just completed as a
        // left child: the first ancestor (from the leaf up) that is a left child.
        for (int d = 1; d <= N_ST; d++) begin
          logic [IW-1:0] mask;
          mask = IW'((1 << (N_ST - d)) - 1);
          if (!bit_i[N_ST-d] && ((bit_i & mask) == mask))
            bl[d] <= ps[d];
        end
      end
    end
  end

  initial assert (NC >= 2 && (1 << N_ST) == NC)
    else $error("sc_decoder: NC must be a power of two >= 2");
endmodule
