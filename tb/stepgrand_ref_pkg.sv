// stepgrand_ref_pkg: behavioural reference model of step-GRAND for the testbenches.
//
// Written independently of the RTL: gamma per Hamming weight is transcribed from
// Algorithm 1, the reliability order is an insertion sort, and the search enumerates
// every test error pattern one by one in the order the hardware tests them (weight 1 by
// rank; for weight HW >= 2 all (HW-2)-element prefixes in lexicographic order, and for
// each prefix the pairs (a,b) after it in lexicographic order).  It also predicts the
// decode latency of the hardware: 1 cycle for a codeword, 3 + log2(N) + steps otherwise,
// plus 1 + (register position of the hit pair)/L cycles of priority-encoder scan.
package stepgrand_ref_pkg;

  localparam int N    = 128;
  localparam int LOGN = 7;
  localparam int NK   = 32;
  localparam int PMAX = 6;
  localparam int L    = 64;
  localparam int GMAX = 42;   // pair register size of the hardware (gamma(2) of 2,6,6)

  typedef logic [NK-1:0] syn_t;

  typedef struct {
    bit found;
    int hw;
    int ranks [PMAX];   // sorted ranks of the flipped positions
    int latency;        // predicted cycles from frame accept to result
    int steps;          // time steps spent in weights >= 2
    int chunk;          // encoder chunk of the hit (weights >= 2), -1 otherwise
  } result_t;

  function automatic int ref_gamma(int hw, int alpha, int beta, int p);
    int h, g;
    h = 0;
    for (int i = 1; i <= alpha; i++) begin
      g = (alpha - i + 1) * (alpha - i + 2) / 2 * (p / alpha) * beta;   // line 7
      for (int j = 1; j <= p / alpha; j++) begin
        h++;
        if (h == hw) return g;
        g = g - (alpha - i + 1) * beta;                                   // line 15
      end
    end
    return 0;
  endfunction

  function automatic int layout_pos(int a, int b);
    int pos;
    pos = 0;
    for (int i = 0; i < a; i++) pos += GMAX - 1 - i;
    return pos + (b - a - 1);
  endfunction

  function automatic int sat_mag(logic [4:0] v);
    int x;
    x = $signed(v);
    if (x < 0) x = -x;
    return (x > 15) ? 15 : x;
  endfunction

  // Sort positions by (|LLR|, index) ascending: perm[rank] = channel index.
  function automatic void ref_sort(input logic [N-1:0][4:0] llr, output int perm [N]);
    int key [N];
    for (int i = 0; i < N; i++) begin
      perm[i] = i;
      key[i]  = sat_mag(llr[i]) * 256 + i;
    end
    for (int i = 1; i < N; i++) begin
      int t, j;
      t = perm[i];
      j = i - 1;
      while (j >= 0 && key[perm[j]] > key[t]) begin
        perm[j+1] = perm[j];
        j--;
      end
      perm[j+1] = t;
    end
  endfunction

  // Search on sorted weight-1 syndromes col[rank].
  function automatic result_t ref_search(syn_t col [N], syn_t s_c, int alpha, int beta, int p);
    result_t r;
    int cyc, g, m, last;
    int pf [PMAX];
    syn_t syn;
    bit more;
    r.found = 0; r.hw = 0; r.steps = 0; r.chunk = -1;
    for (int k = 0; k < PMAX; k++) r.ranks[k] = -1;
    if (s_c == '0) begin
      r.found = 1; r.latency = 1;
      return r;
    end
    cyc = 1 + LOGN + 1;               // weight-1 test cycle
    g = ref_gamma(1, alpha, beta, p);
    for (int i = 0; i < g; i++)
      if (col[i] == s_c) begin
        r.found = 1; r.hw = 1; r.ranks[0] = i; r.latency = cyc;
        return r;
      end
    for (int hw = 2; hw <= p; hw++) begin
      g = ref_gamma(hw, alpha, beta, p);
      m = hw - 2;
      for (int k = 0; k < PMAX; k++) pf[k] = k;
      more = 1;
      while (more) begin
        cyc++;
        r.steps++;
        syn = s_c;
        for (int k = 0; k < m; k++) syn ^= col[pf[k]];
        last = (m == 0) ? -1 : pf[m-1];
        for (int a = last + 1; a < g; a++)
          for (int b = a + 1; b < g; b++)
            if (!r.found && (syn ^ col[a] ^ col[b]) == '0) begin
              r.found = 1; r.hw = hw;
              for (int k = 0; k < m; k++) r.ranks[k] = pf[k];
              r.ranks[m] = a; r.ranks[m+1] = b;
              r.chunk = layout_pos(a, b) / L;
              r.latency = cyc + 1 + r.chunk;
            end
        if (r.found) return r;
        // next prefix, lexicographic, last element at most g-3
        more = 0;
        for (int k = m - 1; k >= 0 && !more; k--)
          if (pf[k] < (g - 3) - (m - 1 - k)) begin
            pf[k]++;
            for (int q = k + 1; q < m; q++) pf[q] = pf[q-1] + 1;
            more = 1;
          end
      end
    end
    r.latency = cyc;
    return r;
  endfunction

endpackage
