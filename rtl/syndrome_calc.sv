// syndrome_calc: the H * y_hat^T block of the step-GRAND decoder.
//
// Computes the syndrome s_c = H * y_hat^T over GF(2) of the hard-decided received word:
// the XOR of the H columns at every position where y_hat is 1.  s_c = 0 means y_hat is
// already a codeword and decoding ends at once; otherwise s_c is the starting point of
// every composite syndrome tested later.
//
// Interface: h_cols (column i of H, bit r = row r), y_hat (bit i = position i); the
// output is purely combinational.  This is the paper's function written as the
// obvious XOR tree.
module syndrome_calc #(
  parameter int unsigned N  = stepgrand_pkg::N_DEF,
  parameter int unsigned NK = stepgrand_pkg::NK_DEF
) (
  input  logic [N-1:0][NK-1:0] h_cols,
  input  logic [N-1:0]         y_hat,
  output logic [NK-1:0]        s_c
);

  always_comb begin
    s_c = '0;
    for (int i = 0; i < int'(N); i++)
      if (y_hat[i]) s_c ^= h_cols[i];
  end

endmodule
