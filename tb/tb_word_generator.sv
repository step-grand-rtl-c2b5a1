// tb_word_generator: checks c_hat = y_hat with the enabled positions flipped and
// u_hat = c_hat[K-1:0].  Random words, random positions (some repeated, some disabled).
module tb_word_generator;
  localparam int N = 128, K = 105, PMAX = 6;
  logic [N-1:0] y_hat;
  logic [PMAX-1:0][6:0] flip_pos;
  logic [PMAX-1:0] flip_en;
  logic [N-1:0] c_hat;
  logic [K-1:0] u_hat;
  int checks = 0, failures = 0;

  word_generator dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      logic [N-1:0] exp_c;
      bit used [N];
      y_hat = {$urandom(), $urandom(), $urandom(), $urandom()};
      for (int j = 0; j < PMAX; j++) begin
        flip_pos[j] = 7'($urandom_range(0, N - 1));
        flip_en[j]  = 1'($urandom_range(0, 3) != 0);
      end
      exp_c = y_hat;
      foreach (used[i]) used[i] = 0;
      for (int j = 0; j < PMAX; j++)
        if (flip_en[j]) used[flip_pos[j]] = 1;
      for (int i = 0; i < N; i++) if (used[i]) exp_c[i] = ~exp_c[i];
      #1;
      checks++;
      if (c_hat != exp_c || u_hat != exp_c[K-1:0]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
