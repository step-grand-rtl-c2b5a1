// controller: schedules one step-GRAND decode and turns a hit into bit-flip positions.
//
// Step-GRAND guesses the channel noise as test error patterns (TEPs) e of growing Hamming
// weight drawn from the least reliable positions: for weight HW only the gamma(HW) least
// reliable positions are used, gamma shrinking with HW as Algorithm 1 sets it from the
// run-time parameters (alpha, beta, P).  A TEP e is accepted when s_c ^ H*e^T = 0.
//
// Schedule, one time step per clock cycle (worst case 3 + log2(N) + sum over HW=3..P of
// C(gamma(HW)-2, HW-2) cycles, 279 for N=128, alpha=2, beta=6, P=6):
//   CHECK  1 cycle   s_c = H*y_hat^T from the syndrome block; s_c = 0 ends the decode.
//   SORT   log2(N)   the pipelined sorter is started and its result awaited.
//   HW1    1 cycle   all gamma(1) weight-1 TEPs are tested at once (s_c == s_i); the
//                    evaluation-unit register is loaded with all pair syndromes s_a^s_b.
//   HW2    1 cycle   the evaluation unit tests all C(gamma(2),2) pairs against s_comp = s_c.
//   HWN    per step  for HW = 3..P the controller walks through the (HW-2)-element
//                    prefixes i1<..<im of positions below gamma(HW)-2 in lexicographic
//                    order, one per cycle, with s_comp = s_c ^ s_i1 ^ .. ^ s_im; the
//                    evaluation unit tests every pair (a,b) with im < a < b < gamma(HW).
//   SCAN   1+ cycles after a hit the captured match vector is read L entries per cycle by
//                    the priority encoder; the first hit gives the pair (a,b).
// The result cycle raises done; flip_pos/flip_en (channel positions, through the sort
// permutation) then drive the word generator and the top registers the decoded word.
// When every stage fails the decode is abandoned: done with success = 0 and no flips.
//
// Interface: in_valid/in_ready accept a frame (frame_load tells the top to register the
// LLRs; cfg_* are sampled with it).  Inside a decode the controller uses the syndrome
// s_c, the sorter outputs, and the evaluation-unit handshake (eu_*).  done is a one-cycle
// pulse; success, tep_hw and cfg_err qualify it.
//
// From the paper: the order of stages, the one-cycle weight-1 and weight-2 tests, the
// composite-syndrome sequence and the latency formula.  This design's own choices: the
// sorter starts in the cycle after the syndrome check (which matches the paper's
// 3 + log2(N) count), hits are resolved by scanning chunks in order, the lowest position
// wins, and a configuration whose subsets do not fit the hardware (gamma(1) > G1MAX,
// gamma(2) > GMAX, gamma(HW) < HW, or alpha not dividing P) is reported through cfg_err
// and abandoned after the syndrome check.
module controller #(
  parameter int unsigned N     = stepgrand_pkg::N_DEF,
  parameter int unsigned NK    = stepgrand_pkg::NK_DEF,
  parameter int unsigned PMAX  = stepgrand_pkg::PMAX_DEF,
  parameter int unsigned G1MAX = stepgrand_pkg::gamma_of(1, stepgrand_pkg::ALPHA_DEF,
                                   stepgrand_pkg::BETA_DEF, stepgrand_pkg::PMAX_DEF,
                                   stepgrand_pkg::PMAX_DEF),
  parameter int unsigned GMAX  = stepgrand_pkg::gamma_of(2, stepgrand_pkg::ALPHA_DEF,
                                   stepgrand_pkg::BETA_DEF, stepgrand_pkg::PMAX_DEF,
                                   stepgrand_pkg::PMAX_DEF),
  parameter int unsigned L     = stepgrand_pkg::L_DEF,
  localparam int unsigned LOGN  = $clog2(N),
  localparam int unsigned NPAIR = GMAX * (GMAX - 1) / 2,
  localparam int unsigned NCH   = (NPAIR + L - 1) / L,
  localparam int unsigned GW    = $clog2(GMAX + 1),
  localparam int unsigned G1W   = $clog2(G1MAX),
  localparam int unsigned NPF   = (PMAX > 2) ? PMAX - 2 : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // frame handshake and run-time parameters
  input  logic                          in_valid,
  output logic                          in_ready,
  output logic                          frame_load,
  input  logic [2:0]                    cfg_alpha,
  input  logic [3:0]                    cfg_beta,
  input  logic [2:0]                    cfg_p,
  // syndrome of y_hat
  input  logic [NK-1:0]                 s_c,
  // sorter
  output logic                          sort_start,
  input  logic                          sort_valid,
  input  logic [N-1:0][LOGN-1:0]        sort_idx,
  input  logic [N-1:0][NK-1:0]          sort_col,
  // evaluation unit
  output logic                          eu_load,
  output logic [NPAIR-1:0][NK-1:0]      eu_pair_syn,
  output logic [NK-1:0]                 eu_s_comp,
  output logic [GW-1:0]                 eu_a_min,
  output logic [GW-1:0]                 eu_b_lim,
  input  logic                          eu_hit,
  output logic                          eu_capture,
  output logic [$clog2(NCH+1)-1:0]      eu_chunk_sel,
  input  logic [$clog2(L)-1:0]          eu_enc_idx,
  input  logic                          eu_enc_valid,
  // result
  output logic                          done,
  output logic                          success,
  output logic [2:0]                    tep_hw,
  output logic                          cfg_err,
  output logic [PMAX-1:0][LOGN-1:0]     flip_pos,
  output logic [PMAX-1:0]               flip_en
);

  typedef enum logic [2:0] {
    S_IDLE, S_CHECK, S_SORT, S_HW1, S_HW2, S_HWN, S_SCAN
  } state_t;

  state_t                   state_q, state_d;
  logic [2:0]               alpha_q, p_q;
  logic [3:0]               beta_q;
  logic [$clog2(LOGN+1)-1:0] sc_q;                 // cycles spent in SORT
  logic [2:0]               hw_q, hw_d;             // current TEP weight (stages HW2/HWN/SCAN)
  logic [NPF-1:0][GW-1:0]   pf_q, pf_d;             // prefix positions i1..im (sorted order)
  logic [$clog2(NCH+1)-1:0] ch_q, ch_d;
  logic [PMAX:1][7:0]       gam;                    // gamma(HW) for the sampled config
  logic                     cfg_ok;

  // ------------------------------------------------------------------ configuration
  always_comb begin
    cfg_ok = (p_q >= 1) && (int'(p_q) <= int'(PMAX)) && (alpha_q >= 1);
    for (int h = 1; h <= int'(PMAX); h++) begin
      int unsigned g;
      g = stepgrand_pkg::gamma_of(h, int'(alpha_q), int'(beta_q), int'(p_q), PMAX);
      gam[h] = (g > 255) ? 8'd255 : 8'(g);
      if (h <= int'(p_q) && g < h) cfg_ok = 1'b0;
    end
    if (gam[1] > 8'(G1MAX) || gam[1] > 8'(N)) cfg_ok = 1'b0;
    if (p_q >= 2 && gam[2] > 8'(GMAX)) cfg_ok = 1'b0;
  end

  // ------------------------------------------------------------------ weight 1
  logic [G1MAX-1:0] hw1_match;
  logic [G1W-1:0]   hw1_idx;
  logic             hw1_hit;

  for (genvar i = 0; i < G1MAX; i++) begin : g_hw1
    assign hw1_match[i] = (s_c == sort_col[i]) && (8'(i) < gam[1]);
  end

  priority_encoder #(.L(G1MAX)) u_hw1_enc (
    .req   (hw1_match),
    .idx   (hw1_idx),
    .valid (hw1_hit)
  );

  // ------------------------------------------------------------------ pair syndromes
  for (genvar p = 0; p < NPAIR; p++) begin : g_pair
    localparam int unsigned PA = stepgrand_pkg::pair_a(p, GMAX);
    localparam int unsigned PB = stepgrand_pkg::pair_b(p, GMAX);
    assign eu_pair_syn[p] = sort_col[PA] ^ sort_col[PB];
  end

  // ------------------------------------------------------------------ composite syndrome
  int unsigned m;                 // prefix length HW-2
  always_comb begin
    m = (hw_q >= 3) ? int'(hw_q) - 2 : 0;
    eu_s_comp = s_c;
    for (int k = 0; k < int'(NPF); k++)
      if (k < int'(m)) eu_s_comp ^= sort_col[pf_q[k]];
    eu_a_min = (m == 0) ? '0 : GW'(pf_q[m-1] + 1'b1);
    eu_b_lim = GW'(gam[hw_q]);
  end

  // next prefix in lexicographic order; last element may reach gamma(HW)-3
  logic                   pf_more;
  logic [NPF-1:0][GW-1:0] pf_next;
  always_comb begin
    int kk;
    int vmax;
    pf_next = pf_q;
    pf_more = 1'b0;
    kk      = 0;
    vmax    = int'(gam[hw_q]) - 3;
    for (int k = 0; k < int'(NPF); k++)
      if (k < int'(m) && int'(pf_q[k]) < vmax - (int'(m) - 1 - k)) begin
        kk      = k;
        pf_more = 1'b1;
      end
    if (pf_more) begin
      pf_next[kk] = pf_q[kk] + 1'b1;
      for (int k = 0; k < int'(NPF); k++)
        if (k > kk && k < int'(m)) pf_next[k] = GW'(int'(pf_q[kk]) + 1 + (k - kk));
    end
  end

  // initial prefix (0,1,..,m-1) for weight h
  function automatic logic [NPF-1:0][GW-1:0] pf_init();
    logic [NPF-1:0][GW-1:0] r;
    for (int k = 0; k < int'(NPF); k++) r[k] = GW'(k);
    return r;
  endfunction

  // ------------------------------------------------------------------ hit resolution
  int unsigned hit_pos, hit_a, hit_b;
  always_comb begin
    hit_pos = int'(ch_q) * L + int'(eu_enc_idx);
    hit_a   = stepgrand_pkg::pair_a(hit_pos, GMAX);
    hit_b   = stepgrand_pkg::pair_b(hit_pos, GMAX);
  end

  // ------------------------------------------------------------------ state machine
  always_comb begin
    state_d     = state_q;
    hw_d        = hw_q;
    pf_d        = pf_q;
    ch_d        = ch_q;
    in_ready    = (state_q == S_IDLE);
    frame_load  = in_valid && (state_q == S_IDLE);
    sort_start  = 1'b0;
    eu_load     = 1'b0;
    eu_capture  = 1'b0;
    eu_chunk_sel = ch_q;
    done        = 1'b0;
    success     = 1'b0;
    tep_hw      = '0;
    cfg_err     = 1'b0;
    flip_pos    = '0;
    flip_en     = '0;

    unique case (state_q)
      S_IDLE: if (in_valid) state_d = S_CHECK;

      S_CHECK: begin
        if (s_c == '0) begin
          done    = 1'b1;
          success = 1'b1;
          state_d = S_IDLE;
        end else if (!cfg_ok) begin
          done    = 1'b1;
          cfg_err = 1'b1;
          state_d = S_IDLE;
        end else begin
          state_d = S_SORT;
        end
      end

      S_SORT: begin
        sort_start = (sc_q == '0);
        if (int'(sc_q) == int'(LOGN) - 1) state_d = S_HW1;
      end

      S_HW1: begin
        eu_load = 1'b1;
        if (hw1_hit) begin
          done        = 1'b1;
          success     = 1'b1;
          tep_hw      = 3'd1;
          flip_pos[0] = sort_idx[hw1_idx];
          flip_en[0]  = 1'b1;
          state_d     = S_IDLE;
        end else if (p_q >= 2) begin
          hw_d    = 3'd2;
          state_d = S_HW2;
        end else begin
          done    = 1'b1;
          state_d = S_IDLE;
        end
      end

      S_HW2, S_HWN: begin
        if (eu_hit) begin
          eu_capture = 1'b1;
          ch_d       = '0;
          state_d    = S_SCAN;
        end else if (state_q == S_HWN && pf_more) begin
          pf_d = pf_next;
        end else if (hw_q < p_q) begin
          hw_d    = hw_q + 3'd1;
          pf_d    = pf_init();
          state_d = S_HWN;
        end else begin
          done    = 1'b1;
          state_d = S_IDLE;
        end
      end

      S_SCAN: begin
        eu_chunk_sel = ch_q;
        if (eu_enc_valid) begin
          done    = 1'b1;
          success = 1'b1;
          tep_hw  = hw_q;
          for (int k = 0; k < int'(NPF); k++)
            if (k < int'(m)) begin
              flip_pos[k] = sort_idx[pf_q[k]];
              flip_en[k]  = 1'b1;
            end
          flip_pos[m]   = sort_idx[hit_a];
          flip_en[m]    = 1'b1;
          flip_pos[m+1] = sort_idx[hit_b];
          flip_en[m+1]  = 1'b1;
          state_d       = S_IDLE;
        end else begin
          ch_d = ch_q + 1'b1;
        end
      end

      default: state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q        <= S_IDLE;
      alpha_q        <= 3'(stepgrand_pkg::ALPHA_DEF);
      beta_q         <= 4'(stepgrand_pkg::BETA_DEF);
      p_q            <= 3'(stepgrand_pkg::PMAX_DEF);
      sc_q           <= '0;
      hw_q           <= '0;
      pf_q           <= '0;
      ch_q           <= '0;
    end else begin
      state_q        <= state_d;
      hw_q           <= hw_d;
      pf_q           <= pf_d;
      ch_q           <= ch_d;
      sc_q           <= (state_q == S_SORT) ? sc_q + 1'b1 : '0;
      if (frame_load) begin
        alpha_q <= cfg_alpha;
        beta_q  <= cfg_beta;
        p_q     <= cfg_p;
      end
    end
  end

  // A captured hit must be found within the stored chunks, and the sorted data must be
  // present when the weight-1 test reads it.
  always_ff @(posedge clk) begin
    if (state_q == S_SCAN)
      assert (int'(ch_q) < int'(NCH)) else $error("controller: hit scan ran past the last chunk");
    if (state_q == S_HW1)
      assert (sort_valid) else $error("controller: sorter result not ready in HW1");
  end

endmodule
