// peptide_protein_map: peptide-to-protein mapping and per-protein counts.
//
// Peptides are spread over the automata in an order chosen offline (grouped
// for area), so the slot a peptide occupies says nothing about its protein of
// origin. This block keeps that relation as a table: for each global peptide
// slot g = automaton * N_PEPTIDES + bit, the id of the protein cluster it
// came from. An id of N_PROTEINS or above marks an unused slot.
//
// Every match vector that arrives sets sticky found bits, so a peptide that
// occurs many times in the sample counts once. From the found bits the block
// derives alpha_j, the number of distinct peptides of protein j identified so
// far, and the total over all proteins. Software divides alpha_j by beta_j
// (the number of peptides protein j has) to get the identification
// probability pi_j = alpha_j / beta_j; that division is not done here.
//
// Interface:
//   match_valid_i/match_i  match vectors of all automata for one residue
//   clear_i                clears the found bits (start of a new sample)
//   ld_i                   table write, taken for kind TBL_MAP, addr = slot
//   found_o                sticky found bits, one per slot
//   alpha_o, total_o       counts, registered
//   hit_o                  1 when the last residue completed any peptide
// Timing: found bits change the cycle after a valid match vector; alpha_o and
// total_o follow one cycle later.
//
// The mapping itself and the counting of identified peptides per protein are
// the paper's; table layout, unused-slot id and count widths are this
// design's.
module peptide_protein_map
  import pi_pkg::*;
#(
  parameter int unsigned N_PEPTIDES = DEF_N_PEPTIDES,
  parameter int unsigned N_AUTOMATA = DEF_N_AUTOMATA,
  parameter int unsigned N_PROTEINS = DEF_N_PROTEINS
) (
  input  logic                             clk_i,
  input  logic                             rst_ni,
  input  logic                             clear_i,
  input  tbl_load_t                        ld_i,
  input  logic                             match_valid_i,
  input  logic [N_AUTOMATA*N_PEPTIDES-1:0] match_i,
  output logic [N_AUTOMATA*N_PEPTIDES-1:0] found_o,
  output logic [ALPHA_W-1:0]               alpha_o [N_PROTEINS],
  output logic [ALPHA_W-1:0]               total_o,
  output logic                             hit_o
);

  localparam int unsigned N_SLOTS = N_AUTOMATA * N_PEPTIDES;
  localparam int unsigned PROT_W  = $clog2(N_PROTEINS + 1);

  logic [PROT_W-1:0]  map_q [N_SLOTS];
  logic [N_SLOTS-1:0] found_q;
  logic [ALPHA_W-1:0] alpha_d [N_PROTEINS];
  logic [ALPHA_W-1:0] total_d;

  // Map table. Reset marks every slot unused.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int g = 0; g < N_SLOTS; g++) map_q[g] <= '1;
    end else if (ld_i.we && ld_i.kind == TBL_MAP && ld_i.addr < 16'(N_SLOTS)) begin
      map_q[ld_i.addr[$clog2(N_SLOTS)-1:0]] <= ld_i.data[PROT_W-1:0];
    end
  end

  // Sticky found bits.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      found_q <= '0;
      hit_o   <= 1'b0;
    end else if (clear_i) begin
      found_q <= '0;
      hit_o   <= 1'b0;
    end else if (match_valid_i) begin
      found_q <= found_q | match_i;
      hit_o   <= |match_i;
    end
  end

  // Distinct identified peptides per protein.
  always_comb begin
    total_d = '0;
    for (int j = 0; j < N_PROTEINS; j++) alpha_d[j] = '0;
    for (int g = 0; g < N_SLOTS; g++) begin
      for (int j = 0; j < N_PROTEINS; j++) begin
        if (found_q[g] && map_q[g] == PROT_W'(j)) alpha_d[j] = alpha_d[j] + 1'b1;
      end
      if (found_q[g] && map_q[g] < PROT_W'(N_PROTEINS)) total_d = total_d + 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int j = 0; j < N_PROTEINS; j++) alpha_o[j] <= '0;
      total_o <= '0;
    end else begin
      for (int j = 0; j < N_PROTEINS; j++) alpha_o[j] <= alpha_d[j];
      total_o <= total_d;
    end
  end

  assign found_o = found_q;

endmodule
