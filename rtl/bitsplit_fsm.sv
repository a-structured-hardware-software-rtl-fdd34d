// bitsplit_fsm: one tile of a bit-split Aho-Corasick automaton.
//
// A bit-split automaton replaces one Aho-Corasick machine over the whole
// residue alphabet by several small machines, each of which sees only a slice
// of BITS_PER_FSM bits of every residue code. Every state of a tile carries a
// partial match vector (PMV) with one bit per peptide: bit p is set when the
// bit slices seen so far are consistent with peptide p ending at the current
// residue. The AND of the PMVs of all tiles is exactly the set of peptides
// that end at the current residue (done in ac_automaton).
//
// Insides: two RAMs filled by software before matching.
//   next table: MAX_STATES * 2**BITS_PER_FSM entries of STATE_W bits,
//               entry index = {state, input bits}, entry = next state.
//   PMV table:  MAX_STATES entries of N_PEPTIDES bits, entry index = state.
// State 0 is the root. The state register is the read register of the next
// table (a synchronous read), so one residue is consumed every clock. The PMV
// table is read synchronously from the state register.
//
// Timing: a residue presented with step_i in cycle T moves the state at the
// end of T; its PMV is on pmv_o during cycle T+2. restart_i (separator or
// clear) puts the state back to the root and wins over step_i. Writes to the
// tables take effect at the clock edge; loading while matching is not
// supported.
//
// The bit-split idea is the one the paper names and cites; tile width, table
// depth and loadable RAM tables are this design's choices.
module bitsplit_fsm #(
  parameter int unsigned N_PEPTIDES   = 32,
  parameter int unsigned BITS_PER_FSM = 1,
  parameter int unsigned MAX_STATES   = 512
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic                    restart_i,
  input  logic                    step_i,
  input  logic [BITS_PER_FSM-1:0] bits_i,
  // table load port
  input  logic                    ld_next_we_i,
  input  logic                    ld_pmv_we_i,
  input  logic [15:0]             ld_addr_i,
  input  logic [31:0]             ld_data_i,
  // partial match vector of the state reached two cycles earlier
  output logic [N_PEPTIDES-1:0]   pmv_o
);

  localparam int unsigned STATE_W = $clog2(MAX_STATES);
  localparam int unsigned NEXT_AW = STATE_W + BITS_PER_FSM;

  logic [STATE_W-1:0]    next_mem [2**NEXT_AW];
  logic [N_PEPTIDES-1:0] pmv_mem  [MAX_STATES];

  logic [STATE_W-1:0]    state_q;
  logic [N_PEPTIDES-1:0] pmv_q;

  // Table writes.
  always_ff @(posedge clk_i) begin
    if (ld_next_we_i) next_mem[ld_addr_i[NEXT_AW-1:0]] <= ld_data_i[STATE_W-1:0];
    if (ld_pmv_we_i)  pmv_mem[ld_addr_i[STATE_W-1:0]]  <= ld_data_i[N_PEPTIDES-1:0];
  end

  // State register = synchronous read of the next-state table.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)        state_q <= '0;
    else if (restart_i) state_q <= '0;
    else if (step_i)    state_q <= next_mem[{state_q, bits_i}];
  end

  // PMV of the current state, read one cycle later.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) pmv_q <= '0;
    else         pmv_q <= pmv_mem[state_q];
  end

  assign pmv_o = pmv_q;

endmodule
