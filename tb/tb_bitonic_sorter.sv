// tb_bitonic_sorter: checks the pipelined bitonic sorter at n = 128.
// Sets of random LLRs (many equal magnitudes, some -16) enter on consecutive cycles; each
// result must appear exactly log2(n) = 7 cycles after its input, ordered by (|LLR|, index)
// as an independent insertion sort orders it, with every H column following its index.
module tb_bitonic_sorter;
  import stepgrand_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic [N-1:0][4:0] llr = '0;
  logic [N-1:0][NK-1:0] h_cols = '0;
  logic out_valid;
  logic [N-1:0][6:0] out_idx;
  logic [N-1:0][NK-1:0] out_col;
  int checks = 0, failures = 0;

  bitonic_sorter dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N-1:0][4:0] llr_hist [$];
  logic [N-1:0][NK-1:0] col_hist [$];
  int cyc = 0, in_cyc [$];

  always @(posedge clk) cyc++;

  // compare every result with the reference of the matching input
  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      int perm [N];
      logic [N-1:0][4:0] l;
      logic [N-1:0][NK-1:0] c;
      int c0;
      l = llr_hist.pop_front();
      c = col_hist.pop_front();
      c0 = in_cyc.pop_front();
      ref_sort(l, perm);
      checks++;
      if (cyc - c0 != LOGN) begin
        failures++;
        $display("FAIL latency %0d", cyc - c0);
      end
      for (int j = 0; j < N; j++) begin
        checks++;
        if (int'(out_idx[j]) != perm[j] || out_col[j] != c[perm[j]]) failures++;
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      in_valid = 1'($urandom_range(0, 2) != 0);
      for (int i = 0; i < N; i++) begin
        llr[i] = 5'($urandom_range(0, 31));
        if (t % 4 == 0) llr[i] = 5'($urandom_range(0, 3)) ^ {5{llr[i][4]}};
        h_cols[i] = $urandom();
      end
      if (in_valid) begin
        llr_hist.push_back(llr);
        col_hist.push_back(h_cols);
        in_cyc.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (12) @(posedge clk);
    checks++;
    if (llr_hist.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
