// pi_pkg: shared constants and types of the protein-inference accelerator.
//
// The accelerator finds known peptides (short amino-acid strings produced by
// trypsin digestion of reference proteins) in a stream of peptides identified
// in a sample, and counts for every reference protein how many of its peptides
// were seen. Matching uses bit-split Aho-Corasick automata of at most 32
// peptides each; twelve protein clusters are tracked. Those two numbers come
// from the application the accelerator was built for; the symbol code width,
// the tile width and the state-table depth are this design's own choices.
//
// Types declared here:
//   sym_t       one residue (or separator) strobe broadcast to all automata
//   tbl_kind_e  which table a processor write lands in
//   tbl_load_t  one table write, broadcast to all automata and the map
package pi_pkg;

  // Application sizes.
  localparam int unsigned DEF_N_PEPTIDES   = 32;  // peptides per automaton
  localparam int unsigned DEF_N_PROTEINS   = 12;  // protein clusters tracked
  localparam int unsigned DEF_N_AUTOMATA   = 8;   // automata working in parallel

  // Encoding and automaton shape.
  localparam int unsigned CODE_W       = 5;   // residue code: letter - 'A'
  localparam int unsigned DEF_BITS_PER_FSM = 1;   // code bits followed per tile
  localparam int unsigned DEF_MAX_STATES   = 512; // states per tile table

  localparam int unsigned ALPHA_W      = 16;  // width of a per-protein count

  // Residue strobe. A separator (is_residue = 0) ends the current peptide and
  // sends every automaton back to its root state.
  typedef struct packed {
    logic              valid;
    logic              is_residue;
    logic [CODE_W-1:0] code;
  } sym_t;

  // Table selection for processor writes.
  typedef enum logic [1:0] {
    TBL_NEXT = 2'd0,  // tile next-state table, entry = {state, input bits}
    TBL_PMV  = 2'd1,  // tile partial match vector table, entry = state
    TBL_MAP  = 2'd2   // peptide -> protein id table, entry = global peptide
  } tbl_kind_e;

  // One table write. automaton/tile select the target tile; the map table
  // ignores them. data is right-aligned.
  typedef struct packed {
    logic       we;
    tbl_kind_e  kind;
    logic [7:0] automaton;
    logic [7:0] tile;
    logic [15:0] addr;
    logic [31:0] data;
  } tbl_load_t;

  // Avalon word addresses of the accelerator's registers.
  localparam logic [7:0] REG_CTRL      = 8'h00; // W: bit0 clear. R: residues seen
  localparam logic [7:0] REG_REGISTER1 = 8'h01; // W: residue character. R: result
  localparam logic [7:0] REG_LOAD_SEL  = 8'h02; // W: {kind[17:16], automaton[15:8], tile[7:0]}
  localparam logic [7:0] REG_LOAD_ADDR = 8'h03; // W: table entry index
  localparam logic [7:0] REG_LOAD_DATA = 8'h04; // W: table entry, then index + 1
  localparam logic [7:0] REG_ALPHA0    = 8'h10; // R: alpha of protein j at 0x10 + j
  localparam logic [7:0] REG_FOUND0    = 8'h40; // R: found bits of automaton k at 0x40 + k

endpackage
