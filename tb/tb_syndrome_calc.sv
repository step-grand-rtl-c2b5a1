// tb_syndrome_calc: checks s_c = H * y_hat^T.
// The reference works row by row (parity of the AND of row r of H with y_hat), unlike the
// block's column-wise XOR.  Random matrices and words, plus all-zero and single-bit words.
module tb_syndrome_calc;
  localparam int N = 128, NK = 32;
  logic [N-1:0][NK-1:0] h_cols;
  logic [N-1:0] y_hat;
  logic [NK-1:0] s_c;
  int checks = 0, failures = 0;

  syndrome_calc dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      logic [NK-1:0] ref_s;
      for (int i = 0; i < N; i++) h_cols[i] = $urandom();
      for (int i = 0; i < N; i++) y_hat[i] = 1'($urandom_range(0, 1));
      if (t == 0) y_hat = '0;
      if (t >= 1 && t < 9) y_hat = N'(1) << (t * 13);
      #1;
      for (int r = 0; r < NK; r++) begin
        logic par;
        par = 0;
        for (int i = 0; i < N; i++) par ^= h_cols[i][r] & y_hat[i];
        ref_s[r] = par;
      end
      checks++;
      if (s_c != ref_s) begin
        failures++;
        $display("FAIL t=%0d s_c=%h ref=%h", t, s_c, ref_s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
