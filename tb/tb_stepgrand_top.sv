// tb_stepgrand_top: end-to-end test of the step-GRAND decoder at its default size.
//
// Builds a random systematic code (n = 128, n-k = 23 parity checks, like the CA-polar
// (128,105+11) code's 23 checks), loads its parity-check matrix, and decodes frames made
// of random codewords with random reliabilities and errors placed at chosen reliability
// ranks.  Each result is compared with the behavioural reference model: decoded word,
// message, success flag, error-pattern weight and exact latency in cycles.  Frames cover
// every mechanism of the decoder and each is counted: codeword at once (1 cycle),
// weight-1 .. weight-6 hits, abandonment after the whole search (279 cycles; 273 for
// alpha = 1), a hit
// that needs more than one priority-encoder chunk, the alpha = 1 parameter set, and a
// parameter set the hardware cannot hold.  A mechanism that never occurs is a failure.
module tb_stepgrand_top;
  import stepgrand_ref_pkg::*;

  localparam int K   = 105;
  localparam int NKU = 23;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                h_wr_en = 0;
  logic [6:0]          h_wr_col = '0;
  logic [NK-1:0]       h_wr_data = '0;
  logic                in_valid = 0, in_ready;
  logic [N-1:0][4:0]   llr = '0;
  logic [2:0]          cfg_alpha = 3'd2;
  logic [3:0]          cfg_beta = 4'd6;
  logic [2:0]          cfg_p = 3'd6;
  logic                out_valid, out_success, out_cfg_err;
  logic [N-1:0]        c_hat;
  logic [K-1:0]        u_hat;
  logic [2:0]          out_hw;

  stepgrand_top dut (.*);

  int checks = 0, failures = 0;
  syn_t hcol [N];
  int   cnt_cw = 0, cnt_fail = 0, cnt_chunk = 0, cnt_alpha1 = 0, cnt_cfgerr = 0, cnt_wc = 0;
  int   cnt_hw [PMAX+1];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #20_000_000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random codeword of the systematic code
  function automatic logic [N-1:0] make_codeword();
    logic [N-1:0] c;
    syn_t par;
    c = '0; par = '0;
    for (int i = 0; i < K; i++) begin
      c[i] = 1'($urandom_range(0, 1));
      if (c[i]) par ^= hcol[i];
    end
    for (int r = 0; r < NKU; r++) c[K + r] = par[r];
    return c;
  endfunction

  // Decode one frame with errors at the given sorted ranks; compare with the model.
  task automatic run_frame(int nerr, int rank_lo, int rank_hi, int alpha, int beta, int p,
                           bit expect_cfg_err, output result_t r);
    logic [N-1:0] cw, yh, exp_c;
    int perm [N];
    int ranks [$];
    syn_t scol [N], s_c;
    int lat;
    cw = make_codeword();
    for (int i = 0; i < N; i++) begin
      int mag;
      mag = $urandom_range(1, 15);
      if ($urandom_range(0, 40) == 0) mag = 16;
      llr[i] = cw[i] ? 5'(-mag) : 5'(mag > 15 ? 15 : mag);
    end
    ref_sort(llr, perm);
    while (ranks.size() < nerr) begin
      int rk, dup;
      rk = $urandom_range(rank_lo, rank_hi);
      dup = 0;
      foreach (ranks[j]) if (ranks[j] == rk) dup = 1;
      if (!dup) ranks.push_back(rk);
    end
    foreach (ranks[j]) llr[perm[ranks[j]]] = 5'(-$signed(llr[perm[ranks[j]]]));
    // flipping a sign leaves |LLR| unchanged except for -16, which never sits at an error
    ref_sort(llr, perm);
    for (int i = 0; i < N; i++) yh[i] = llr[i][4];
    s_c = '0;
    for (int i = 0; i < N; i++) if (yh[i]) s_c ^= hcol[i];
    for (int j = 0; j < N; j++) scol[j] = hcol[perm[j]];
    r = ref_search(scol, s_c, alpha, beta, p);
    exp_c = yh;
    if (r.found) for (int k = 0; k < PMAX; k++) if (r.ranks[k] >= 0) exp_c[perm[r.ranks[k]]] ^= 1'b1;

    @(negedge clk);
    cfg_alpha = 3'(alpha); cfg_beta = 4'(beta); cfg_p = 3'(p);
    in_valid = 1;
    @(posedge clk);
    check(in_ready, "decoder not ready for a new frame");
    #1 in_valid = 0;
    lat = 0;
    do begin
      @(posedge clk); #1; lat++;
    end while (!out_valid && lat < 2000);
    if (expect_cfg_err) begin
      check(out_cfg_err && !out_success, "unsupported parameters not reported");
      cnt_cfgerr += out_cfg_err;
      return;
    end
    check(!out_cfg_err, "unexpected configuration error");
    check(out_success == r.found, $sformatf("success %0d expected %0d", out_success, r.found));
    check(c_hat == exp_c, "decoded word differs from the model");
    check(u_hat == exp_c[K-1:0], "message differs from the model");
    if (r.found) check(out_hw == 3'(r.hw), $sformatf("TEP weight %0d expected %0d", out_hw, r.hw));
    check(lat == r.latency, $sformatf("latency %0d expected %0d (hw %0d)", lat, r.latency, r.hw));
    if (r.found) begin
      // a found word must be a codeword
      syn_t s;
      s = '0;
      for (int i = 0; i < N; i++) if (c_hat[i]) s ^= hcol[i];
      check(s == '0, "decoded word is not a codeword");
      if (r.hw == 0) cnt_cw++; else cnt_hw[r.hw]++;
      if (r.chunk > 0) cnt_chunk++;
    end else cnt_fail++;
    if (alpha == 1) cnt_alpha1++;
  endtask

  initial begin
    result_t r;
    foreach (cnt_hw[i]) cnt_hw[i] = 0;
    // gamma per weight for the main parameter set, as listed in the step-GRAND footnotes
    check(ref_gamma(1,2,6,6) == 54 && ref_gamma(2,2,6,6) == 42 && ref_gamma(3,2,6,6) == 30 &&
          ref_gamma(4,2,6,6) == 18 && ref_gamma(5,2,6,6) == 12 && ref_gamma(6,2,6,6) == 6,
          "reference gamma table");
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random systematic H = [P | I]: info columns random non-zero, parity columns unit
    for (int i = 0; i < N; i++) begin
      if (i < K) begin
        do hcol[i] = syn_t'($urandom()) & ((syn_t'(1) << NKU) - 1); while (hcol[i] == '0);
      end else hcol[i] = syn_t'(1) << (i - K);
      @(negedge clk);
      h_wr_en = 1; h_wr_col = 7'(i); h_wr_data = hcol[i];
    end
    @(negedge clk) h_wr_en = 0;

    // codeword: 1 cycle
    run_frame(0, 0, 0, 2, 6, 6, 0, r);
    check(r.latency == 1, "best-case latency is 1 cycle");
    // weight 1..6 errors inside the subsets of the main set
    for (int rep = 0; rep < 6; rep++) begin
      run_frame(1, 0, 53, 2, 6, 6, 0, r);
      run_frame(2, 0, 41, 2, 6, 6, 0, r);
      run_frame(3, 0, 29, 2, 6, 6, 0, r);
      run_frame(4, 0, 17, 2, 6, 6, 0, r);
      run_frame(5, 0, 11, 2, 6, 6, 0, r);
      run_frame(6, 0, 5, 2, 6, 6, 0, r);
    end
    // errors outside the subsets: search runs out
    for (int rep = 0; rep < 4; rep++) begin
      run_frame(2, 60, 127, 2, 6, 6, 0, r);
      if (!r.found) begin
        check(r.latency == 279 && r.steps == 270, "worst-case latency 279 cycles");
        cnt_wc++;
      end
    end
    // alpha = 1, beta = 6, P = 6
    for (int rep = 0; rep < 3; rep++) begin
      run_frame(1, 0, 35, 1, 6, 6, 0, r);
      run_frame(2, 0, 29, 1, 6, 6, 0, r);
      run_frame(3, 0, 23, 1, 6, 6, 0, r);
    end
    for (int rep = 0; rep < 2; rep++) begin
      run_frame(2, 60, 127, 1, 6, 6, 0, r);
      if (!r.found) begin
        check(r.latency == 273, "worst-case latency 273 cycles for alpha = 1");
        cnt_wc++;
      end
    end
    // alpha = 2, beta = 7 needs gamma(1) = 63 > 54: not supported
    run_frame(2, 0, 10, 2, 7, 6, 1, r);

    check(cnt_cw > 0, "mechanism: codeword accepted at once");
    for (int h = 1; h <= PMAX; h++) check(cnt_hw[h] > 0, $sformatf("mechanism: weight-%0d hit", h));
    check(cnt_fail > 0 && cnt_wc > 0, "mechanism: abandonment after full search");
    check(cnt_chunk > 0, "mechanism: multi-chunk priority-encoder scan");
    check(cnt_alpha1 > 0, "mechanism: alpha = 1 parameter set");
    check(cnt_cfgerr > 0, "mechanism: unsupported parameter set reported");
    $display("mechanisms: codeword=%0d hw1=%0d hw2=%0d hw3=%0d hw4=%0d hw5=%0d hw6=%0d abandon=%0d worst_case=%0d multi_chunk=%0d alpha1=%0d cfg_err=%0d",
             cnt_cw, cnt_hw[1], cnt_hw[2], cnt_hw[3], cnt_hw[4], cnt_hw[5], cnt_hw[6],
             cnt_fail, cnt_wc, cnt_chunk, cnt_alpha1, cnt_cfgerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
