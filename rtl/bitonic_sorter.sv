// bitonic_sorter: pipelined Batcher bitonic sorter of the step-GRAND decoder.
//
// Sorts the N received LLRs in ascending order of magnitude, the least reliable position
// first, and carries along with each one its channel index (the permutation "Ind") and its
// column of H (the weight-1 syndrome s_i = H * 1_i; the sorted columns form "S-bar").
// The network has log2(N) merge phases; phase p holds p layers of compare-exchange units
// working on blocks of 2^p elements, ascending or descending by block so that phase p
// leaves sorted runs of length 2^p.  A pipeline register follows every phase, so the sort
// takes log2(N) cycles, as the step-GRAND architecture states, and a new set can enter
// every cycle.
//
// Interface and timing: in_valid with llr (two's complement, Q bits per position) and
// h_cols enter phase 1; log2(N) cycles later out_valid rises with out_idx[j], out_col[j]
// for sorted rank j (rank 0 = smallest |LLR|).  The outputs hold until the next set
// arrives.  |LLR| is taken as Q-1 bits, the most negative value saturating.  Equal
// magnitudes are ordered by channel index so the order is total; this tie rule and the
// magnitude saturation are this design's choices, the network and its pipelining into
// log2(N) stages follow the paper.
module bitonic_sorter #(
  parameter int unsigned N  = stepgrand_pkg::N_DEF,
  parameter int unsigned Q  = stepgrand_pkg::Q_DEF,
  parameter int unsigned NK = stepgrand_pkg::NK_DEF
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic [N-1:0][Q-1:0]          llr,
  input  logic [N-1:0][NK-1:0]         h_cols,
  output logic                         out_valid,
  output logic [N-1:0][$clog2(N)-1:0]  out_idx,
  output logic [N-1:0][NK-1:0]         out_col
);

  localparam int unsigned LOGN = $clog2(N);

  typedef struct packed {
    logic [Q-2:0]    mag;
    logic [LOGN-1:0] idx;
    logic [NK-1:0]   col;
  } elem_t;

  typedef elem_t [N-1:0] vec_t;

  // One merge phase (p = 1..LOGN) of the bitonic network, combinational.
  function automatic vec_t phase_net(vec_t x, int p);
    vec_t  v;
    elem_t t;
    logic  up, gt;
    v = x;
    for (int d = p - 1; d >= 0; d--) begin
      for (int i = 0; i < int'(N); i++) begin
        int j;
        j = i ^ (1 << d);
        if (j > i) begin
          up = (((i >> p) & 1) == 0);
          gt = {v[i].mag, v[i].idx} > {v[j].mag, v[j].idx};
          if (gt == up) begin
            t    = v[i];
            v[i] = v[j];
            v[j] = t;
          end
        end
      end
    end
    return v;
  endfunction

  vec_t stage_in;
  vec_t stage_q [LOGN];
  logic [LOGN-1:0] valid_q;

  // Magnitude of each LLR, saturated to Q-1 bits.
  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      logic [Q-1:0] a;
      a = llr[i][Q-1] ? (~llr[i] + 1'b1) : llr[i];
      stage_in[i].mag = a[Q-1] ? '1 : a[Q-2:0];
      stage_in[i].idx = LOGN'(i);
      stage_in[i].col = h_cols[i];
    end
  end

  always_ff @(posedge clk) begin
    stage_q[0] <= phase_net(stage_in, 1);
    for (int p = 1; p < int'(LOGN); p++)
      stage_q[p] <= phase_net(stage_q[p-1], p + 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_q <= '0;
    else        valid_q <= {valid_q[LOGN-2:0], in_valid};
  end

  assign out_valid = valid_q[LOGN-1];

  always_comb begin
    for (int j = 0; j < int'(N); j++) begin
      out_idx[j] = stage_q[LOGN-1][j].idx;
      out_col[j] = stage_q[LOGN-1][j].col;
    end
  end

endmodule
