// tb_workload_bch: decodes the BCH (127,106) code with step-GRAND (alpha = 1, beta = 7,
// P = 6) on the n = 128 decoder.
//
// The parity-check matrix is computed here: GF(2^7) is built from the primitive
// polynomial x^7 + x^3 + 1, the generator g(x) = m1(x) m3(x) m5(x) (degree 21) is the
// product of the minimal polynomials of alpha, alpha^3 and alpha^5, and column i of H is
// x^(21+i) mod g(x) for the 106 information positions and x^(i-106) for the 21 parity
// positions, so the code is systematic with the message in positions 0..105.  Position
// 127 is padding: a zero column and LLR +15, so it sorts last and is never flipped.
// Random codewords with errors at chosen reliability ranks are decoded and compared with
// the reference model, including the exact latency (432 cycles for an exhausted search
// with these parameters).  The paper's main setting for this code, alpha = 2, beta = 7,
// needs a 63-position weight-1 subset, more than the 54 the decoder holds; the decoder
// must report it as unsupported.
module tb_workload_bch;
  import stepgrand_ref_pkg::*;

  localparam int K   = 106;
  localparam int NKU = 21;
  localparam int NB  = 127;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                h_wr_en = 0;
  logic [6:0]          h_wr_col = '0;
  logic [NK-1:0]       h_wr_data = '0;
  logic                in_valid = 0, in_ready;
  logic [N-1:0][4:0]   llr = '0;
  logic [2:0]          cfg_alpha = 3'd1;
  logic [3:0]          cfg_beta = 4'd7;
  logic [2:0]          cfg_p = 3'd6;
  logic                out_valid, out_success, out_cfg_err;
  logic [N-1:0]        c_hat;
  logic [K-1:0]        u_hat;
  logic [2:0]          out_hw;

  stepgrand_top #(.K(K)) dut (.*);

  int checks = 0, failures = 0;
  syn_t hcol [N];
  int cnt_found = 0, cnt_fail = 0, cnt_wc = 0;

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

  // ---------------------------------------------------------------- GF(2^7)
  int gexp [254];
  int glog [128];

  function automatic int gmul(int a, int b);
    if (a == 0 || b == 0) return 0;
    return gexp[glog[a] + glog[b]];
  endfunction

  // minimal polynomial of alpha^j, returned as bit vector of binary coefficients
  function automatic logic [7:0] minpoly(int j);
    int coef [8];
    int e, deg;
    bit seen [127];
    foreach (seen[i]) seen[i] = 0;
    foreach (coef[i]) coef[i] = 0;
    coef[0] = 1;
    deg = 0;
    e = j % 127;
    while (!seen[e]) begin
      int nc [8];
      seen[e] = 1;
      // multiply by (x + alpha^e)
      foreach (nc[i]) nc[i] = 0;
      for (int i = 0; i <= deg; i++) begin
        nc[i+1] ^= coef[i];
        nc[i]   ^= gmul(coef[i], gexp[e]);
      end
      coef = nc;
      deg++;
      e = (e * 2) % 127;
    end
    minpoly = '0;
    for (int i = 0; i <= deg; i++) minpoly[i] = coef[i][0];
    for (int i = 0; i <= deg; i++) if (coef[i] > 1) minpoly = '0;   // must be binary
  endfunction

  function automatic logic [63:0] pmul(logic [63:0] a, logic [63:0] b);
    pmul = '0;
    for (int i = 0; i < 32; i++) if (b[i]) pmul ^= a << i;
  endfunction

  function automatic syn_t xpow_mod(int p, logic [63:0] g);
    logic [63:0] r;
    r = 64'd1;
    for (int i = 0; i < p; i++) begin
      r = r << 1;
      if (r[NKU]) r ^= g;
    end
    return syn_t'(r[NKU-1:0]);
  endfunction

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

  task automatic run_frame(int nerr, int rank_lo, int rank_hi, int alpha, int beta, int p,
                           bit expect_cfg_err, output result_t r);
    logic [N-1:0] cw, yh, exp_c;
    int perm [N];
    int ranks [$];
    syn_t scol [N], s_c;
    int lat;
    cw = make_codeword();
    for (int i = 0; i < NB; i++) begin
      int mag;
      mag = $urandom_range(1, 14);
      llr[i] = cw[i] ? 5'(-mag) : 5'(mag);
    end
    llr[NB] = 5'd15;
    ref_sort(llr, perm);
    while (ranks.size() < nerr) begin
      int rk, dup;
      rk = $urandom_range(rank_lo, rank_hi);
      dup = 0;
      foreach (ranks[j]) if (ranks[j] == rk) dup = 1;
      if (!dup) ranks.push_back(rk);
    end
    foreach (ranks[j]) llr[perm[ranks[j]]] = 5'(-$signed(llr[perm[ranks[j]]]));
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
    #1 in_valid = 0;
    lat = 0;
    do begin
      @(posedge clk); #1; lat++;
    end while (!out_valid && lat < 2000);
    if (expect_cfg_err) begin
      check(out_cfg_err && !out_success, "unsupported parameters not reported");
      return;
    end
    check(out_success == r.found, "success flag");
    check(c_hat == exp_c, "decoded word differs from the model");
    check(u_hat == exp_c[K-1:0], "message differs from the model");
    check(lat == r.latency, $sformatf("latency %0d expected %0d (hw %0d)", lat, r.latency, r.hw));
    if (r.found) begin
      check(c_hat[NB] == 1'b0, "padding position flipped");
      if (nerr <= 6 && rank_hi < 20) check(c_hat == cw, "codeword not recovered");
      cnt_found++;
    end else cnt_fail++;
  endtask

  initial begin
    result_t r;
    logic [63:0] g;
    int x;
    x = 1;
    for (int i = 0; i < 254; i++) begin
      gexp[i] = x;
      if (i < 127) glog[x] = i;
      x = x << 1;
      if (x & 128) x ^= 'h89;   // x^7 + x^3 + 1
    end
    g = pmul(pmul(64'(minpoly(1)), 64'(minpoly(3))), 64'(minpoly(5)));
    check(g[NKU] == 1'b1 && g[63:NKU+1] == '0 && g[0] == 1'b1, "generator polynomial has degree 21");
    for (int i = 0; i < N; i++) begin
      if (i < K)       hcol[i] = xpow_mod(NKU + i, g);
      else if (i < NB) hcol[i] = syn_t'(1) << (i - K);
      else             hcol[i] = '0;
    end
    // x^127 = 1 mod g(x): g divides x^127 + 1, so this is a cyclic code of length 127
    check(xpow_mod(127, g) == syn_t'(1), "g(x) divides x^127 + 1");
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      h_wr_en = 1; h_wr_col = 7'(i); h_wr_data = hcol[i];
    end
    @(negedge clk) h_wr_en = 0;

    for (int rep = 0; rep < 3; rep++) begin
      run_frame(1, 0, 41, 1, 7, 6, 0, r);
      run_frame(2, 0, 34, 1, 7, 6, 0, r);
      run_frame(3, 0, 27, 1, 7, 6, 0, r);
      run_frame(4, 0, 20, 1, 7, 6, 0, r);
      run_frame(5, 0, 13, 1, 7, 6, 0, r);
      run_frame(6, 0, 6, 1, 7, 6, 0, r);
    end
    for (int rep = 0; rep < 3; rep++) begin
      run_frame(3, 50, 120, 1, 7, 6, 0, r);
      if (!r.found) begin
        check(r.latency == 432, "worst-case latency 432 cycles for alpha=1, beta=7, P=6");
        cnt_wc++;
      end
    end
    run_frame(2, 0, 10, 2, 7, 6, 1, r);
    check(cnt_found > 0, "frames decoded");
    check(cnt_wc > 0, "exhausted search seen");
    $display("BCH(127,106): decoded=%0d exhausted=%0d", cnt_found, cnt_fail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
