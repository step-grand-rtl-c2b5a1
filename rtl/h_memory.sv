// h_memory: the parity-check matrix store of the step-GRAND decoder.
//
// Holds an (n-k) x n parity-check matrix H so that any linear block code of length N with
// at most NK parity checks can be decoded; a code with fewer checks leaves its unused
// rows at zero.  The step-GRAND architecture reads every column at once (they feed the
// syndrome computation and the sorter), so the store is a register array rather than a
// RAM macro.
//
// Interface: one column is written per cycle (wr_en, wr_col = column index 0..N-1,
// wr_data = column bits, bit r = row r).  h_cols presents all columns in parallel, the
// new value of a column one cycle after its write.  Reset clears the matrix.
//
// The decoder names this block and gives its size; the column-wise write port and the
// clearing reset are choices of this design.
module h_memory #(
  parameter int unsigned N  = stepgrand_pkg::N_DEF,
  parameter int unsigned NK = stepgrand_pkg::NK_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          wr_en,
  input  logic [$clog2(N)-1:0]          wr_col,
  input  logic [NK-1:0]                 wr_data,
  output logic [N-1:0][NK-1:0]          h_cols
);

  logic [N-1:0][NK-1:0] mem_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_q <= '0;
    end else if (wr_en) begin
      mem_q[wr_col] <= wr_data;
    end
  end

  assign h_cols = mem_q;

endmodule
