// stepgrand_pkg: constants and helper functions shared by the step-GRAND decoder.
//
// The defaults describe the main configuration of the decoder: code length n = 128,
// 5-bit LLRs, code rates 0.75 <= R <= 1 (so at most n-k = 32 parity checks), maximum
// test-error-pattern (TEP) Hamming weight P = 6, alpha = 2 segments and step size
// beta = 6.  From (alpha, beta, P) the subset size gamma used for each Hamming weight
// follows Algorithm 1 of step-GRAND; with the defaults the (gamma, HW) pairs are
// (54,1) (42,2) (30,3) (18,4) (12,5) (6,6).  The largest weight-1 and weight-2 subsets
// (54 and 42) size the hardware: the weight-1 checker and the C(42,2) = 861-entry
// syndrome register of the evaluation unit.
//
// Choices of this design, not taken from the step-GRAND description: the maximum parity
// count NK = 32 is derived from the stated rate range; the priority-encoder width L = 64
// and the systematic information positions (u_hat = the first K bits of c_hat) are our own.
package stepgrand_pkg;

  localparam int unsigned N_DEF     = 128; // code length n
  localparam int unsigned Q_DEF     = 5;   // LLR width (1 sign, 1 integer, 3 fraction bits)
  localparam int unsigned NK_DEF    = 32;  // max parity checks n-k for R >= 0.75
  localparam int unsigned K_DEF     = 105; // information bits of the CA-polar (128,105+11) code
  localparam int unsigned PMAX_DEF  = 6;   // maximum TEP Hamming weight P
  localparam int unsigned ALPHA_DEF = 2;   // number of segments alpha
  localparam int unsigned BETA_DEF  = 6;   // step size beta
  localparam int unsigned L_DEF     = 64;  // priority-encoder width (assumed)

  // Subset size gamma for TEPs of Hamming weight hw (1-based), following Algorithm 1:
  // segment i (1..alpha) starts at gamma = (alpha-i+1)(alpha-i+2)/2 * P/alpha * beta and
  // each of its P/alpha subsets is (alpha-i+1)*beta smaller than the previous one.
  // Returns 0 for an illegal configuration.  Loop bounds are constant (pmax).
  function automatic int unsigned gamma_of(int unsigned hw, int unsigned alpha,
                                           int unsigned beta, int unsigned p,
                                           int unsigned pmax);
    int unsigned seg_len, g, h;
    int unsigned result;
    result = 0;
    if (alpha == 0 || p == 0 || p > pmax || (p % alpha) != 0) return 0;
    seg_len = p / alpha;
    h = 1;
    for (int unsigned i = 1; i <= pmax; i++) begin
      if (i <= alpha) begin
        g = ((alpha - i + 1) * (alpha - i + 2) / 2) * seg_len * beta;
        for (int unsigned j = 1; j <= pmax; j++) begin
          if (j <= seg_len) begin
            if (h == hw) result = g;
            h = h + 1;
            g = g - (alpha - i + 1) * beta;
          end
        end
      end
    end
    return result;
  endfunction

  // Number of unordered pairs drawn from a set of size g.
  function automatic int unsigned n_pairs(int unsigned g);
    return g * (g - 1) / 2;
  endfunction

  // Position, in the evaluation-unit register of a gmax-subset, of the pair (a,b), a<b,
  // 0-based.  Pairs are stored in lexicographic order: (0,1) (0,2) .. (0,gmax-1) (1,2) ..
  function automatic int unsigned pair_pos(int unsigned a, int unsigned b, int unsigned gmax);
    return a * gmax - (a * (a + 1)) / 2 + (b - a - 1);
  endfunction

  // First element a of the pair stored at position pos (inverse of pair_pos).
  function automatic int unsigned pair_a(int unsigned pos, int unsigned gmax);
    int unsigned a;
    a = 0;
    for (int unsigned i = 1; i < gmax; i++)
      if (pos >= pair_pos(i, i + 1, gmax)) a = i;
    return a;
  endfunction

  // Second element b of the pair stored at position pos.
  function automatic int unsigned pair_b(int unsigned pos, int unsigned gmax);
    int unsigned a;
    a = pair_a(pos, gmax);
    return pos - pair_pos(a, a + 1, gmax) + a + 1;
  endfunction

endpackage
