// tb_eval_unit: checks the evaluation unit with GMAX = 42 (861 stored pair syndromes).
// The register is loaded with random syndromes, a few of them duplicated so that several
// entries can match.  For random composite syndromes (usually copied from a live entry)
// and random bounds (a_min, b_lim) the one-cycle hit flag must equal the reference's, and
// after capture the chunk-by-chunk encoder scan must find the lowest matching position.
// The pair (a,b) of each position comes from the testbench's own enumeration.
module tb_eval_unit;
  localparam int NK = 32, GMAX = 42, L = 64, NPAIR = 861, NCH = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load = 0, capture = 0, hit, enc_valid;
  logic [NPAIR-1:0][NK-1:0] pair_syn;
  logic [NK-1:0] s_comp = '0;
  logic [5:0] a_min = '0, b_lim = '0;
  logic [3:0] chunk_sel = '0;
  logic [5:0] enc_idx;
  int checks = 0, failures = 0;
  int pa [NPAIR], pb [NPAIR];

  eval_unit dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int q;
    q = 0;
    for (int a = 0; a < GMAX; a++)
      for (int b = a + 1; b < GMAX; b++) begin
        pa[q] = a; pb[q] = b; q++;
      end
    for (int p = 0; p < NPAIR; p++) pair_syn[p] = $urandom();
    for (int d = 0; d < 60; d++) pair_syn[$urandom_range(0, NPAIR - 1)] = pair_syn[$urandom_range(0, NPAIR - 1)];
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk) load = 1;
    @(negedge clk) load = 0;
    pair_syn = '0;   // the register must hold what it loaded
    for (int t = 0; t < 400; t++) begin
      int first;
      logic [NK-1:0] syn;
      @(negedge clk);
      a_min = 6'($urandom_range(0, 30));
      b_lim = 6'($urandom_range(0, 42));
      if (t % 7 == 0) begin a_min = 0; b_lim = 42; end
      q = $urandom_range(0, NPAIR - 1);
      s_comp = (t % 5 == 4) ? NK'($urandom()) : dut.syn_q[q];
      first = -1;
      for (int p = 0; p < NPAIR; p++)
        if (first < 0 && dut.syn_q[p] == s_comp && pa[p] >= a_min && pb[p] < b_lim) first = p;
      #1;
      checks++;
      if (hit != (first >= 0)) begin
        failures++;
        $display("FAIL t=%0d hit=%0d expected %0d", t, hit, first >= 0);
      end
      if (hit) begin
        int found;
        capture = 1;
        @(negedge clk) capture = 0;
        s_comp = ~s_comp;   // captured vector must not follow later inputs
        found = -1;
        for (int c = 0; c < NCH && found < 0; c++) begin
          chunk_sel = 4'(c);
          #1;
          if (enc_valid) found = c * L + int'(enc_idx);
          @(negedge clk);
        end
        checks++;
        if (found != first) begin
          failures++;
          $display("FAIL t=%0d position %0d expected %0d", t, found, first);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
