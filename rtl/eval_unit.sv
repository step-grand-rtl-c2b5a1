// eval_unit: the evaluation unit of the step-GRAND decoder.
//
// Tests up to C(GMAX,2) test error patterns (TEPs) for codebook membership in one cycle.
// A register holds the weight-2 syndromes s_a ^ s_b of every pair a<b of the GMAX least
// reliable positions (sorted order), stored in lexicographic order (0,1) (0,2) ..
// (1,2) ..  Every entry is XORed with the composite syndrome s_comp supplied by the
// controller and NOR-reduced: a 1 means s_comp ^ s_a ^ s_b = 0, i.e. the TEP made of the
// controller's prefix positions plus a and b turns y_hat into a codeword.  The OR of all
// NOR outputs is the one-bit hit flag.  On a hit the NOR outputs are captured in a
// register and an L:log2(L) priority encoder reads them L entries at a time.
//
// Deviation from the paper's figures: the paper shifts the register up by gamma-i-1
// entries per time step and reloads it when the prefix changes, so that only pairs after
// the prefix's last position are present.  Here the register keeps a fixed layout and
// two bounds select the live entries instead (a >= a_min, b < b_lim).  The set of TEPs
// tested in each time step is the same, the pair behind a hit follows directly from its
// register position, and no wide barrel shifter is needed.  b_lim also lets one register
// serve every subset size gamma <= GMAX.
//
// Interface and timing: load (1 cycle) writes pair_syn into the register.  hit is
// combinational from the register, s_comp, a_min and b_lim.  capture stores the NOR
// outputs at the clock edge; in later cycles chunk_sel picks L stored entries and
// enc_idx/enc_valid give the first set one among them (combinational).
module eval_unit #(
  parameter int unsigned NK   = stepgrand_pkg::NK_DEF,
  parameter int unsigned GMAX = stepgrand_pkg::gamma_of(2, stepgrand_pkg::ALPHA_DEF,
                                  stepgrand_pkg::BETA_DEF, stepgrand_pkg::PMAX_DEF,
                                  stepgrand_pkg::PMAX_DEF),
  parameter int unsigned L    = stepgrand_pkg::L_DEF,
  localparam int unsigned NPAIR = GMAX * (GMAX - 1) / 2,
  localparam int unsigned NCH   = (NPAIR + L - 1) / L,
  localparam int unsigned GW    = $clog2(GMAX + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          load,
  input  logic [NPAIR-1:0][NK-1:0]      pair_syn,
  input  logic [NK-1:0]                 s_comp,
  input  logic [GW-1:0]                 a_min,
  input  logic [GW-1:0]                 b_lim,
  output logic                          hit,
  input  logic                          capture,
  input  logic [$clog2(NCH+1)-1:0]      chunk_sel,
  output logic [$clog2(L)-1:0]          enc_idx,
  output logic                          enc_valid
);

  logic [NPAIR-1:0][NK-1:0] syn_q;
  logic [NPAIR-1:0]         match;
  logic [NCH*L-1:0]         match_q;
  logic [L-1:0]             chunk;

  always_ff @(posedge clk) begin
    if (load) syn_q <= pair_syn;
  end

  // XOR with the composite syndrome, NOR-reduce, keep only the live pairs.
  for (genvar p = 0; p < NPAIR; p++) begin : g_test
    localparam int unsigned PA = stepgrand_pkg::pair_a(p, GMAX);
    localparam int unsigned PB = stepgrand_pkg::pair_b(p, GMAX);
    assign match[p] = ~|(syn_q[p] ^ s_comp) && (GW'(PA) >= a_min) && (GW'(PB) < b_lim);
  end

  assign hit = |match;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       match_q <= '0;
    else if (capture) match_q <= (NCH*L)'(match);
  end

  assign chunk = match_q[chunk_sel*L +: L];

  priority_encoder #(.L(L)) u_enc (
    .req   (chunk),
    .idx   (enc_idx),
    .valid (enc_valid)
  );

endmodule
