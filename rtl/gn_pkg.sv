// gn_pkg: types, constants and arithmetic shared by the parallel G_N-coset decoder.
//
// LLRs are LLR_W-bit two's-complement values kept in the symmetric range
// [-LLR_MAX, LLR_MAX], so |x| always fits and the min-sum f function never
// overflows. The f and g functions are the usual min-sum SC kernels for the
// kernel F = [1 0; 1 1]: the left half of a node sees f(a,b), the right half
// g(a,b,u) = b + (1-2u)a. Damping factors are unsigned fixed point with
// DF_FRAC fraction bits; the noise scale 2/sigma^2 is given in LLR LSBs with
// NS_FRAC fraction bits. None of these word lengths is given in the source
// paper; they are choices of this design. The default sizes (N = 16384,
// NC = sqrt(N) = 128 and at most 8 iterations) follow the paper.
package gn_pkg;

  localparam int N_DEFAULT     = 16384;  // code length
  localparam int NC_DEFAULT    = 128;    // component code length sqrt(N)
  localparam int T_MAX_DEFAULT = 8;      // maximum number of iterations
  localparam int T_TABLE       = 8;      // rows of the damping-factor table
  localparam int ITER_W        = 4;      // width of an iteration number

  localparam int LLR_W   = 6;
  localparam int LLR_MAX = 2 ** (LLR_W - 1) - 1;
  typedef logic signed [LLR_W-1:0] llr_t;

  localparam int DF_W    = 10;           // damping factor, unsigned Q2.8
  localparam int DF_FRAC = 8;
  typedef logic [DF_W-1:0] df_t;

  localparam int NS_W    = 8;            // 2/sigma^2 in LLR LSBs, Q4.4
  localparam int NS_FRAC = 4;
  typedef logic [NS_W-1:0] ns_t;

  // Which factor graph an iteration decodes on.
  typedef enum logic {
    GRAPH_G  = 1'b0,  // Arikan's graph: component i is column i of the bit matrix
    GRAPH_PI = 1'b1   // stage-permuted graph: component i is row i
  } graph_e;

  // Saturate an integer to the symmetric LLR range.
  function automatic llr_t sat_llr(input int v);
    if (v > LLR_MAX) return llr_t'(LLR_MAX);
    if (v < -LLR_MAX) return llr_t'(-LLR_MAX);
    return llr_t'(v);
  endfunction

  function automatic int abs_llr(input llr_t a);
    return (a < 0) ? -int'(a) : int'(a);
  endfunction

  // Min-sum check-node function.
  function automatic llr_t f_op(input llr_t a, input llr_t b);
    int m;
    m = (abs_llr(a) < abs_llr(b)) ? abs_llr(a) : abs_llr(b);
    return ((a < 0) ^ (b < 0)) ? sat_llr(-m) : sat_llr(m);
  endfunction

  // Variable-node function given the left partial sum u.
  function automatic llr_t g_op(input llr_t a, input llr_t b, input logic u);
    return u ? sat_llr(int'(b) - int'(a)) : sat_llr(int'(b) + int'(a));
  endfunction

  // Damping factor in fixed point, round(v * 2^DF_FRAC).
  function automatic df_t df_q(input real v);
    return df_t'($rtoi(v * real'(2 ** DF_FRAC) + 0.5));
  endfunction

endpackage
