// ac_automaton: bit-split Aho-Corasick automaton for up to N_PEPTIDES peptides.
//
// The residue code (CODE_W bits) is cut into N_TILES slices of BITS_PER_FSM
// bits; slice t drives tile t (a bitsplit_fsm). The AND of the tiles' partial
// match vectors is the set of peptides that end at the residue, which leaves
// on match_o with match_valid_o. Several automata run side by side on the same
// residue stream, one per group of up to 32 peptides, as in the paper; this
// module is one of them and answers table writes addressed to AUTOMATON_ID.
//
// Interface:
//   sym_i    residue strobe (valid, is_residue, code). A separator restarts
//            all tiles at the root; it produces no match output.
//   clear_i  restarts all tiles and drops residues still in flight.
//   ld_i     table write; taken when ld_i.automaton == AUTOMATON_ID and the
//            kind is TBL_NEXT or TBL_PMV; ld_i.tile picks the tile.
// Timing: one residue per clock; the match vector of a residue presented in
// cycle T is on match_o in cycle T+2, qualified by match_valid_o.
//
// The paper gives the algorithm (bit-split A-C) and the 32-peptide size; the
// tile width, code width and the latency are this design's choices.
module ac_automaton
  import pi_pkg::*;
#(
  parameter int unsigned N_PEPTIDES   = DEF_N_PEPTIDES,
  parameter int unsigned BITS_PER_FSM = DEF_BITS_PER_FSM,
  parameter int unsigned MAX_STATES   = DEF_MAX_STATES,
  parameter int unsigned AUTOMATON_ID = 0
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  sym_t                  sym_i,
  input  logic                  clear_i,
  input  tbl_load_t             ld_i,
  output logic                  match_valid_o,
  output logic [N_PEPTIDES-1:0] match_o
);

  localparam int unsigned N_TILES = (CODE_W + BITS_PER_FSM - 1) / BITS_PER_FSM;
  localparam int unsigned PAD_W   = N_TILES * BITS_PER_FSM;

  logic [PAD_W-1:0]      code_pad;
  logic                  restart, step;
  logic                  for_me;
  logic [N_PEPTIDES-1:0] pmv [N_TILES];
  logic                  v1_q, v2_q;

  assign code_pad = PAD_W'(sym_i.code);
  assign restart  = clear_i | (sym_i.valid & ~sym_i.is_residue);
  assign step     = sym_i.valid & sym_i.is_residue;
  assign for_me   = ld_i.we && (ld_i.automaton == 8'(AUTOMATON_ID));

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    bitsplit_fsm #(
      .N_PEPTIDES  (N_PEPTIDES),
      .BITS_PER_FSM(BITS_PER_FSM),
      .MAX_STATES  (MAX_STATES)
    ) u_tile (
      .clk_i       (clk_i),
      .rst_ni      (rst_ni),
      .restart_i   (restart),
      .step_i      (step),
      .bits_i      (code_pad[t*BITS_PER_FSM +: BITS_PER_FSM]),
      .ld_next_we_i(for_me && ld_i.kind == TBL_NEXT && ld_i.tile == 8'(t)),
      .ld_pmv_we_i (for_me && ld_i.kind == TBL_PMV  && ld_i.tile == 8'(t)),
      .ld_addr_i   (ld_i.addr),
      .ld_data_i   (ld_i.data),
      .pmv_o       (pmv[t])
    );
  end

  // Residue-valid pipeline matching the two-cycle tile latency.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      v1_q <= 1'b0;
      v2_q <= 1'b0;
    end else begin
      v1_q <= step & ~restart;
      v2_q <= v1_q & ~clear_i;
    end
  end

  always_comb begin
    match_o = '1;
    for (int t = 0; t < N_TILES; t++) match_o &= pmv[t];
    if (!v2_q) match_o = '0;
  end
  assign match_valid_o = v2_q;

endmodule
