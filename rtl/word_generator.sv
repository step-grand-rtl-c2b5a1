// word_generator: forms the decoded codeword and message of the step-GRAND decoder.
//
// Flips, in the hard-decided word y_hat, the bit positions of the test error pattern that
// satisfied the parity checks, giving c_hat = y_hat XOR e, and extracts the message
// u_hat from c_hat.  The controller hands over up to PMAX positions, already mapped from
// sorted order back to channel order; flip_en[j] says whether position j is used.
//
// Interface and timing: purely combinational; the top registers the outputs.
// The step-GRAND paper gives this block's function (map indices, flip bits, output k-bit
// u_hat and n-bit c_hat).  It does not give the inverse generator matrix; this design
// assumes a systematic code whose information bits are the first K positions, so
// u_hat = c_hat[K-1:0].
module word_generator #(
  parameter int unsigned N    = stepgrand_pkg::N_DEF,
  parameter int unsigned K    = stepgrand_pkg::K_DEF,
  parameter int unsigned PMAX = stepgrand_pkg::PMAX_DEF
) (
  input  logic [N-1:0]                         y_hat,
  input  logic [PMAX-1:0][$clog2(N)-1:0]       flip_pos,
  input  logic [PMAX-1:0]                      flip_en,
  output logic [N-1:0]                         c_hat,
  output logic [K-1:0]                         u_hat
);

  logic [N-1:0] err;

  always_comb begin
    err = '0;
    for (int j = 0; j < int'(PMAX); j++)
      if (flip_en[j]) err[flip_pos[j]] = 1'b1;
  end

  assign c_hat = y_hat ^ err;
  assign u_hat = c_hat[K-1:0];

endmodule
