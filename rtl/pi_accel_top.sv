// pi_accel_top: protein-inference accelerator, an Avalon-MM peripheral.
//
// Protein inference asks which proteins are present in a sample, given the
// peptides identified in it. Offline, reference proteins of each cluster are
// digested in silico, the resulting peptides are grouped into automata of up
// to 32 peptides, and the automata and a peptide-to-protein table are built.
// Online, software streams the sample's peptides through this peripheral,
// which finds every known peptide in the stream and counts, per protein, how
// many distinct peptides of it were identified (alpha). Software then forms
// the identification probability pi = alpha / beta per protein.
//
// Structure:
//   avmm_slave          register file; register1 takes one character per write
//   aa_encoder          character -> 5-bit residue code or separator
//   ac_automaton x N    bit-split Aho-Corasick automata, all fed the same
//                       residue in the same cycle, each matching its own group
//                       of up to N_PEPTIDES peptides
//   peptide_protein_map sticky found bits and per-protein counts
//
// Timing: one residue per bus write, one write per clock at most. Counts
// reflect a residue 4 cycles after its write; the slave holds reads off with
// waitrequest until then. Clock and reset are those of the processor system
// (50 MHz in the paper's system); reset is active low, asynchronous.
//
// Matching and mapping in hardware, with the processor keeping the rest, is
// the paper's partition; the number of automata (8, enough for the roughly
// 200 usable tryptic peptides of twelve mitochondrial proteins) and all
// encodings are this design's choices.
module pi_accel_top
  import pi_pkg::*;
#(
  parameter int unsigned N_AUTOMATA   = DEF_N_AUTOMATA,
  parameter int unsigned N_PEPTIDES   = DEF_N_PEPTIDES,
  parameter int unsigned N_PROTEINS   = DEF_N_PROTEINS,
  parameter int unsigned BITS_PER_FSM = DEF_BITS_PER_FSM,
  parameter int unsigned MAX_STATES   = DEF_MAX_STATES
) (
  input  logic        clk,
  input  logic        reset_n,
  input  logic [7:0]  avs_address,
  input  logic        avs_read,
  input  logic        avs_write,
  input  logic [31:0] avs_writedata,
  output logic [31:0] avs_readdata,
  output logic        avs_readdatavalid,
  output logic        avs_waitrequest
);

  localparam int unsigned N_SLOTS = N_AUTOMATA * N_PEPTIDES;

  logic               char_we, clear;
  logic [7:0]         char_c;
  tbl_load_t          ld;
  sym_t               sym;
  logic [CODE_W-1:0]  code;
  logic               is_residue;
  logic [N_AUTOMATA-1:0] mvalid;
  logic [N_SLOTS-1:0] match;
  logic [N_SLOTS-1:0] found;
  logic [ALPHA_W-1:0] alpha [N_PROTEINS];
  logic [ALPHA_W-1:0] total;
  logic               hit;

  avmm_slave #(
    .N_PEPTIDES(N_PEPTIDES),
    .N_AUTOMATA(N_AUTOMATA),
    .N_PROTEINS(N_PROTEINS),
    .PIPE_LAT  (3)
  ) u_slave (
    .clk_i            (clk),
    .rst_ni           (reset_n),
    .avs_address      (avs_address),
    .avs_read         (avs_read),
    .avs_write        (avs_write),
    .avs_writedata    (avs_writedata),
    .avs_readdata     (avs_readdata),
    .avs_readdatavalid(avs_readdatavalid),
    .avs_waitrequest  (avs_waitrequest),
    .char_we_o        (char_we),
    .char_o           (char_c),
    .clear_o          (clear),
    .ld_o             (ld),
    .found_i          (found),
    .alpha_i          (alpha),
    .total_i          (total),
    .hit_i            (hit)
  );

  aa_encoder u_enc (
    .ascii_i     (char_c),
    .code_o      (code),
    .is_residue_o(is_residue)
  );

  assign sym.valid      = char_we;
  assign sym.is_residue = is_residue;
  assign sym.code       = code;

  for (genvar k = 0; k < N_AUTOMATA; k++) begin : g_ac
    ac_automaton #(
      .N_PEPTIDES  (N_PEPTIDES),
      .BITS_PER_FSM(BITS_PER_FSM),
      .MAX_STATES  (MAX_STATES),
      .AUTOMATON_ID(k)
    ) u_ac (
      .clk_i        (clk),
      .rst_ni       (reset_n),
      .sym_i        (sym),
      .clear_i      (clear),
      .ld_i         (ld),
      .match_valid_o(mvalid[k]),
      .match_o      (match[k*N_PEPTIDES +: N_PEPTIDES])
    );
  end

  peptide_protein_map #(
    .N_PEPTIDES(N_PEPTIDES),
    .N_AUTOMATA(N_AUTOMATA),
    .N_PROTEINS(N_PROTEINS)
  ) u_map (
    .clk_i        (clk),
    .rst_ni       (reset_n),
    .clear_i      (clear),
    .ld_i         (ld),
    .match_valid_i(mvalid[0]),
    .match_i      (match),
    .found_o      (found),
    .alpha_o      (alpha),
    .total_o      (total),
    .hit_o        (hit)
  );

  // All automata run in lock step.
  assert property (@(posedge clk) disable iff (!reset_n) mvalid == '0 || mvalid == '1)
    else $error("pi_accel_top: automata out of step");

endmodule
