// tb_controller: checks the step-GRAND controller together with the evaluation unit.
// The sorter is replaced by a model that presents a random permutation and random sorted
// H columns log2(n) = 7 cycles after sort_start; s_c is made the XOR of the columns of a
// random set of ranks so that hits of every weight occur, or random so that the search
// usually runs out.  The flip positions, success flag, pattern weight and the cycle of
// done are compared with the behavioural reference (one cycle for s_c = 0, 279 cycles for
// a full search of the default parameter set).
module tb_controller;
  import stepgrand_ref_pkg::*;
  localparam int NPAIR = 861, NCH = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, frame_load;
  logic [2:0] cfg_alpha = 2, cfg_p = 6;
  logic [3:0] cfg_beta = 6;
  logic [NK-1:0] s_c = '0;
  logic sort_start, sort_valid;
  logic [N-1:0][6:0] sort_idx;
  logic [N-1:0][NK-1:0] sort_col;
  logic eu_load, eu_hit, eu_capture, eu_enc_valid;
  logic [NPAIR-1:0][NK-1:0] eu_pair_syn;
  logic [NK-1:0] eu_s_comp;
  logic [5:0] eu_a_min, eu_b_lim, eu_enc_idx;
  logic [3:0] eu_chunk_sel;
  logic done, success, cfg_err;
  logic [2:0] tep_hw;
  logic [PMAX-1:0][6:0] flip_pos;
  logic [PMAX-1:0] flip_en;

  controller dut (.*);

  eval_unit u_eu (
    .clk, .rst_n, .load(eu_load), .pair_syn(eu_pair_syn), .s_comp(eu_s_comp),
    .a_min(eu_a_min), .b_lim(eu_b_lim), .hit(eu_hit), .capture(eu_capture),
    .chunk_sel(eu_chunk_sel), .enc_idx(eu_enc_idx), .enc_valid(eu_enc_valid));

  // sorter timing model
  logic [6:0] sv_q = '0;
  always_ff @(posedge clk) sv_q <= {sv_q[5:0], sort_start};
  assign sort_valid = sv_q[6];

  int checks = 0, failures = 0;
  int cnt_hw [PMAX+1];
  int cnt_fail = 0;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic frame(int nerr, int hi, int alpha, int beta, int p);
    syn_t col [N];
    int perm [N];
    result_t r;
    int lat;
    bit exp_flip [N], got_flip [N];
    for (int i = 0; i < N; i++) perm[i] = i;
    perm.shuffle();
    for (int j = 0; j < N; j++) begin
      col[j] = syn_t'($urandom()) & 32'h007F_FFFF;
      sort_idx[j] = 7'(perm[j]);
      sort_col[j] = col[j];
    end
    s_c = '0;
    if (nerr < 0) s_c = syn_t'($urandom()) & 32'h007F_FFFF;
    else begin
      int used [$];
      while (used.size() < nerr) begin
        int rk, dup;
        rk = $urandom_range(0, hi);
        dup = 0;
        foreach (used[u]) if (used[u] == rk) dup = 1;
        if (!dup) begin used.push_back(rk); s_c ^= col[rk]; end
      end
    end
    r = ref_search(col, s_c, alpha, beta, p);
    @(negedge clk);
    cfg_alpha = 3'(alpha); cfg_beta = 4'(beta); cfg_p = 3'(p);
    in_valid = 1;
    @(posedge clk);
    #1 in_valid = 0;
    lat = 0;
    forever begin
      lat++;
      #1;
      if (done || lat > 2000) break;
      @(posedge clk);
      #1;
    end
    foreach (exp_flip[i]) begin exp_flip[i] = 0; got_flip[i] = 0; end
    if (r.found) for (int k = 0; k < PMAX; k++) if (r.ranks[k] >= 0) exp_flip[perm[r.ranks[k]]] = 1;
    for (int k = 0; k < PMAX; k++) if (flip_en[k]) got_flip[flip_pos[k]] = 1;
    checks++; if (lat != r.latency) begin failures++; $display("FAIL latency %0d expected %0d hw %0d", lat, r.latency, r.hw); end
    checks++; if (success != r.found) failures++;
    checks++; if (got_flip != exp_flip) begin failures++; $display("FAIL flip positions (hw %0d)", r.hw); end
    if (r.found) begin
      checks++; if (int'(tep_hw) != r.hw) failures++;
      cnt_hw[r.hw]++;
    end else begin
      cnt_fail++;
      if (alpha == 2 && beta == 6 && p == 6) begin checks++; if (lat != 279) failures++; end
    end
    @(posedge clk);
    #1;
  endtask

  initial begin
    foreach (cnt_hw[i]) cnt_hw[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    frame(0, 0, 2, 6, 6);
    for (int rep = 0; rep < 4; rep++) begin
      frame(1, 53, 2, 6, 6);
      frame(2, 41, 2, 6, 6);
      frame(3, 29, 2, 6, 6);
      frame(4, 17, 2, 6, 6);
      frame(5, 11, 2, 6, 6);
      frame(6, 5, 2, 6, 6);
      frame(-1, 0, 2, 6, 6);
      frame(3, 23, 1, 6, 6);
      frame(4, 15, 2, 4, 4);
    end
    checks++; if (cnt_hw[0] == 0 || cnt_fail == 0) failures++;
    for (int h = 1; h <= PMAX; h++) begin checks++; if (cnt_hw[h] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
