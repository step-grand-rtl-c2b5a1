// tb_priority_encoder: checks the L:log2(L) priority encoder (L = 64).
// Random request vectors of varying density, all single-bit vectors and the empty vector;
// the reference scans for the lowest set bit.
module tb_priority_encoder;
  localparam int L = 64;
  logic [L-1:0] req;
  logic [5:0] idx;
  logic valid;
  int checks = 0, failures = 0;

  priority_encoder dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one();
    int exp_idx;
    exp_idx = -1;
    for (int i = 0; i < L; i++) if (req[i] && exp_idx < 0) exp_idx = i;
    #1;
    checks++;
    if (valid != (exp_idx >= 0) || (exp_idx >= 0 && int'(idx) != exp_idx)) begin
      failures++;
      $display("FAIL req=%h idx=%0d valid=%0d exp=%0d", req, idx, valid, exp_idx);
    end
  endtask

  initial begin
    req = '0; check_one();
    for (int i = 0; i < L; i++) begin req = L'(1) << i; check_one(); end
    for (int t = 0; t < 1000; t++) begin
      req = {$urandom(), $urandom()};
      for (int s = 0; s < t % 5; s++) req &= {$urandom(), $urandom()};
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
