// stepgrand_top: step-GRAND soft-input universal decoder for (n,k) linear block codes.
//
// A frame of N soft channel values (LLRs, Q-bit two's complement, negative = bit 1) is
// hard-decided into y_hat and checked against the parity-check matrix held in h_memory.
// If y_hat is not a codeword, the bitonic sorter orders the positions by reliability and
// the controller, with the evaluation unit, tests test error patterns of Hamming weight
// 1..P drawn from shrinking sets of the least reliable positions (step-GRAND).  The first
// pattern that zeroes the syndrome is flipped into y_hat by the word generator.
//
// Interface:
//   h_wr_en/h_wr_col/h_wr_data  load H one column per cycle (bit r of a column = row r;
//                               unused rows of a code with fewer than NK checks stay 0).
//                               Load only while the decoder is idle.
//   in_valid/in_ready, llr      offer a frame; it is taken when both are high, together
//                               with the run-time parameters cfg_alpha, cfg_beta, cfg_p.
//   out_valid                   one-cycle pulse with c_hat (N bits), u_hat (first K bits
//                               of c_hat), out_success (a codeword was found), out_hw (the
//                               weight of the applied error pattern) and out_cfg_err (the
//                               parameters do not fit this hardware; no search was made).
// Timing: out_valid follows the accepting clock edge by the decode latency, 1 cycle when
// y_hat is a codeword and at most 3 + log2(N) + sum_{HW=3..P} C(gamma(HW)-2, HW-2) cycles
// (279 for the defaults) when the search runs out, plus the priority-encoder scan after a
// weight-2..P hit.  One frame is decoded at a time.
//
// The block structure and the widths between blocks follow the step-GRAND architecture
// diagram; the frame input register, the handshake and the H load port are this design's.
module stepgrand_top #(
  parameter int unsigned N    = stepgrand_pkg::N_DEF,
  parameter int unsigned Q    = stepgrand_pkg::Q_DEF,
  parameter int unsigned NK   = stepgrand_pkg::NK_DEF,
  parameter int unsigned K    = stepgrand_pkg::K_DEF,
  parameter int unsigned PMAX = stepgrand_pkg::PMAX_DEF,
  parameter int unsigned L    = stepgrand_pkg::L_DEF,
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // parity-check matrix load
  input  logic                    h_wr_en,
  input  logic [LOGN-1:0]         h_wr_col,
  input  logic [NK-1:0]           h_wr_data,
  // frame input
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [N-1:0][Q-1:0]     llr,
  input  logic [2:0]              cfg_alpha,
  input  logic [3:0]              cfg_beta,
  input  logic [2:0]              cfg_p,
  // result
  output logic                    out_valid,
  output logic [N-1:0]            c_hat,
  output logic [K-1:0]            u_hat,
  output logic                    out_success,
  output logic [2:0]              out_hw,
  output logic                    out_cfg_err
);

  localparam int unsigned G1MAX = stepgrand_pkg::gamma_of(1, stepgrand_pkg::ALPHA_DEF,
                                    stepgrand_pkg::BETA_DEF, PMAX, PMAX);
  localparam int unsigned GMAX  = stepgrand_pkg::gamma_of(2, stepgrand_pkg::ALPHA_DEF,
                                    stepgrand_pkg::BETA_DEF, PMAX, PMAX);
  localparam int unsigned NPAIR = GMAX * (GMAX - 1) / 2;
  localparam int unsigned NCH   = (NPAIR + L - 1) / L;
  localparam int unsigned GW    = $clog2(GMAX + 1);

  // ---------------------------------------------------------------- frame register
  logic [N-1:0][Q-1:0] llr_q;
  logic [N-1:0]        y_hat;
  logic                frame_load;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          llr_q <= '0;
    else if (frame_load) llr_q <= llr;
  end

  always_comb
    for (int i = 0; i < int'(N); i++) y_hat[i] = llr_q[i][Q-1];

  // ---------------------------------------------------------------- H memory, syndrome
  logic [N-1:0][NK-1:0] h_cols;
  logic [NK-1:0]        s_c;

  h_memory #(.N(N), .NK(NK)) u_hmem (
    .clk, .rst_n,
    .wr_en   (h_wr_en),
    .wr_col  (h_wr_col),
    .wr_data (h_wr_data),
    .h_cols  (h_cols)
  );

  syndrome_calc #(.N(N), .NK(NK)) u_syn (
    .h_cols (h_cols),
    .y_hat  (y_hat),
    .s_c    (s_c)
  );

  // ---------------------------------------------------------------- sorter
  logic                 sort_start, sort_valid;
  logic [N-1:0][LOGN-1:0] sort_idx;
  logic [N-1:0][NK-1:0] sort_col;

  bitonic_sorter #(.N(N), .Q(Q), .NK(NK)) u_sort (
    .clk, .rst_n,
    .in_valid  (sort_start),
    .llr       (llr_q),
    .h_cols    (h_cols),
    .out_valid (sort_valid),
    .out_idx   (sort_idx),
    .out_col   (sort_col)
  );

  // ---------------------------------------------------------------- controller + EU
  logic                       eu_load, eu_hit, eu_capture, eu_enc_valid;
  logic [NPAIR-1:0][NK-1:0]   eu_pair_syn;
  logic [NK-1:0]              eu_s_comp;
  logic [GW-1:0]              eu_a_min, eu_b_lim;
  logic [$clog2(NCH+1)-1:0]   eu_chunk_sel;
  logic [$clog2(L)-1:0]       eu_enc_idx;
  logic                       done, success, cfg_err;
  logic [2:0]                 tep_hw;
  logic [PMAX-1:0][LOGN-1:0]  flip_pos;
  logic [PMAX-1:0]            flip_en;

  controller #(.N(N), .NK(NK), .PMAX(PMAX), .G1MAX(G1MAX), .GMAX(GMAX), .L(L)) u_ctrl (
    .clk, .rst_n,
    .in_valid, .in_ready, .frame_load,
    .cfg_alpha, .cfg_beta, .cfg_p,
    .s_c,
    .sort_start, .sort_valid, .sort_idx, .sort_col,
    .eu_load, .eu_pair_syn, .eu_s_comp, .eu_a_min, .eu_b_lim, .eu_hit,
    .eu_capture, .eu_chunk_sel, .eu_enc_idx, .eu_enc_valid,
    .done, .success, .tep_hw, .cfg_err, .flip_pos, .flip_en
  );

  eval_unit #(.NK(NK), .GMAX(GMAX), .L(L)) u_eu (
    .clk, .rst_n,
    .load      (eu_load),
    .pair_syn  (eu_pair_syn),
    .s_comp    (eu_s_comp),
    .a_min     (eu_a_min),
    .b_lim     (eu_b_lim),
    .hit       (eu_hit),
    .capture   (eu_capture),
    .chunk_sel (eu_chunk_sel),
    .enc_idx   (eu_enc_idx),
    .enc_valid (eu_enc_valid)
  );

  // ---------------------------------------------------------------- word generator
  logic [N-1:0] c_hat_d;
  logic [K-1:0] u_hat_d;

  word_generator #(.N(N), .K(K), .PMAX(PMAX)) u_wg (
    .y_hat    (y_hat),
    .flip_pos (flip_pos),
    .flip_en  (flip_en),
    .c_hat    (c_hat_d),
    .u_hat    (u_hat_d)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      c_hat       <= '0;
      u_hat       <= '0;
      out_success <= 1'b0;
      out_hw      <= '0;
      out_cfg_err <= 1'b0;
    end else begin
      out_valid <= done;
      if (done) begin
        c_hat       <= c_hat_d;
        u_hat       <= u_hat_d;
        out_success <= success;
        out_hw      <= tep_hw;
        out_cfg_err <= cfg_err;
      end
    end
  end

endmodule
