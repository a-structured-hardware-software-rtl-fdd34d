# Peptide matching and protein mapping accelerator (bit-split Aho-Corasick)

Shotgun proteomics digests the proteins of a sample, identifies the resulting
peptides by mass spectrometry, and must then work out which proteins the
peptides came from. The design here speeds up that last step for a small,
fixed panel of reference proteins: the twelve mitochondrial protein clusters
of the raccoon roundworm *Baylisascaris procyonis*, used to diagnose the
infection. Profiling the all-software flow on a soft processor showed that
peptide search together with the peptide-to-protein lookup takes about 96–97 %
of the online time. Those two steps are therefore moved into a memory-mapped
peripheral. The processor keeps input handling and the final probability
arithmetic.

The peripheral takes the sample's peptides one amino-acid letter at a time.
It finds every reference peptide that occurs in them, using several bit-split
Aho-Corasick automata in parallel, each holding up to 32 peptides. It also
counts, for each of the twelve proteins, how many *distinct* reference
peptides of that protein were seen (α). Software then computes the
identification probability π = α / β, where β is the number of reference
peptides the protein has.

## What is where

```
            Avalon-MM slave (word addresses, 32-bit data)
  host ───► avmm_slave ──char──► aa_encoder ──sym──┬─► ac_automaton #0 ──match[31:0]──┐
             │   ▲                                 ├─► ac_automaton #1 ──match[63:32]─┤
             │   │                                 │        ...                       │
             │   │          table writes (ld) ─────┴─► ac_automaton #7 ───────────────┤
             │   │                                                                    ▼
             │   └──────── found, α[0..11], total, hit ◄────────────── peptide_protein_map
             └── clear, table writes ─────────────────────────────────────────────────┘

  ac_automaton = 5 × bitsplit_fsm (one per bit of the 5-bit residue code) + AND
```

| file | role |
|---|---|
| `rtl/pi_pkg.sv` | sizes, `sym_t` residue strobe, `tbl_load_t` table write, register addresses |
| `rtl/pi_accel_top.sv` | the peripheral; plain Avalon-MM slave ports |
| `rtl/avmm_slave.sv` | register file, table-load sequencing, read stalls |
| `rtl/aa_encoder.sv` | letter → 5-bit code; non-letters are peptide separators |
| `rtl/ac_automaton.sv` | one bit-split Aho-Corasick automaton (32 peptides) |
| `rtl/bitsplit_fsm.sv` | one binary tile: next-state RAM + partial-match RAM |
| `rtl/peptide_protein_map.sv` | slot → protein table, sticky found bits, α counters |
| `tb/ac_tables_pkg.sv` | table compiler used by the testbenches (host-side algorithm) |
| `tb/tb_*.sv` | self-checking testbench per module |

## Bit-split matching

A classic Aho-Corasick machine over the amino-acid alphabet needs one
next-state entry per state and symbol. Storing that for hundreds of states
and a 32-way alphabet is costly. The bit-split form splits the machine by bit
instead. Each residue is coded on 5 bits (`code = letter − 'A'`), and each of
five small *tiles* sees only one bit of each code. Tile *t* is a binary
automaton, so each state has two next-state entries. Each state also has a
32-bit *partial match vector* (PMV). Bit *p* of the PMV is set when the bits
tile *t* has seen so far fit peptide *p* ending at the current residue. A
peptide ends at a residue exactly when all five tiles agree. The match vector
is therefore the AND of the five PMVs.

The tiles' tables are computed off-chip. `tb/ac_tables_pkg.sv` contains the
compiler, which a host would run:

1. Build the Aho-Corasick trie of the 32 peptides over codes 0..31. Add
   failure links, and give each state the full transition function δ and an
   output set (peptides ending there, failure outputs included).
2. For each tile *t*, run a subset construction. A tile state is a set *S* of
   Aho-Corasick states, and the root is {0}. Reading bit value *b* leads to
   { δ(s, c) : s ∈ S, bit *t* of c = b }. The PMV of *S* is the OR of the
   output sets of its members.

The result is exact. Take a tile state reached on some input: some state in
it outputs *p* exactly when bit *t* of the last |p| residues equals bit *t* of
*p*. If that holds for all five bits, the residues are *p*. The number of tile
states stays close to the number of trie nodes. Random tryptic peptides need
200–330 states per tile for 32 peptides, against 512 provided
(`MAX_STATES`).

Hardware per tile (`bitsplit_fsm`):

* next table: `MAX_STATES × 2` words of 9 bits, indexed `{state, bit}`. The
  state register is the read register of this RAM, so the state advances by
  one residue per clock with a synchronous read.
* PMV table: `MAX_STATES` words of 32 bits, read synchronously from the state
  register one cycle later.

A separator, or a clear, puts every tile back to the root state 0. Matches
therefore never span two input peptides. A peptide that occurs inside a
longer input peptide is still found, as Aho-Corasick substring search does.
The PMV of the root must be zero.

## Mapping to proteins

The off-line grouping spreads peptides over the automata in an order chosen
for area, not by protein. `peptide_protein_map` therefore holds a table
giving, for each global slot `g = automaton·32 + bit`, the protein id 0..11.
Id 15 marks an empty slot. Each valid match vector ORs into a sticky
`found` vector, so a peptide seen many times counts once. Next come α_j, the
number of found slots whose id is *j*, and their total. These are computed
combinationally from `found` and the table, then registered.

## Programming model

Word addresses on the Avalon-MM slave (`pi_pkg.sv`):

| addr | write | read |
|---|---|---|
| 0x00 CTRL | bit 0 = 1: clear found bits, restart automata, zero char count | characters written since the clear |
| 0x01 register1 | bits 7:0: one character; a letter is a residue, anything else separates peptides | bit 31: last residue completed a peptide; bits 15:0: distinct peptides found |
| 0x02 LOAD_SEL | bits 17:16 table kind (0 next, 1 PMV, 2 map), 15:8 automaton, 7:0 tile | same |
| 0x03 LOAD_ADDR | table entry index | same |
| 0x04 LOAD_DATA | entry at LOAD_ADDR, then LOAD_ADDR + 1 | – |
| 0x10 + j | – | α of protein j |
| 0x40 + k | – | found bits of automaton k |

The processor writes and reads the same register, register1: residues in,
results out. A run goes as follows:

1. For each automaton *k* and tile *t*: write LOAD_SEL = {0, k, t} and
   LOAD_ADDR = 0, then 1024 next-state words. Write LOAD_SEL = {1, k, t} and
   LOAD_ADDR = 0, then 512 PMV words. Unused entries may be left at any
   value, provided no used state points to them.
2. Write LOAD_SEL = {2, 0, 0} and LOAD_ADDR = 0, then 256 protein ids.
3. Per sample: write CTRL = 1, then write each peptide's letters to register1,
   followed by a newline.
4. Read α (0x10..0x1B). In software, π_j = α_j / β_j.

## Timing

* One residue per bus write. Writes never wait.
* A residue written in cycle T sets the tile states at the end of T. The PMVs
  are valid in T+2, the found bits and the hit flag in T+3, and α and the
  total in T+4.
* The slave counts down `PIPE_LAT = 3` cycles after every write that starts
  datapath work (residue, clear, table word). A read issued during that time
  is held with `waitrequest`. A read right after a residue write therefore
  takes 3 wait cycles, and always returns counts that include that residue.
* `readdata` is registered. It is valid, with `readdatavalid`, in the cycle
  after the read is accepted (read latency 1).
* Loading tables while a sample streams is not supported.
* Reset is active low and asynchronous. It clears states, found bits and the
  map table (all slots empty), but not the tile RAMs.

## Sizes

| parameter | default | where it comes from |
|---|---|---|
| `N_PEPTIDES` | 32 | peptides per automaton, as in the published design |
| `N_PROTEINS` | 12 | the twelve protein-coding mitochondrial genes / clusters |
| `N_AUTOMATA` | 8 | own choice: 256 slots for about 200–250 usable tryptic peptides of ~3,400 residues of reference protein (own estimate) |
| `CODE_W` | 5 | own choice (letter − 'A') |
| `BITS_PER_FSM` | 1 | own choice; 2 would give 3 tiles with 4-way tables |
| `MAX_STATES` | 512 | own choice; room for 32 peptides totalling up to ~500 residues |
| `PIPE_LAT` | 3 | follows from the pipeline above |

At the defaults the design holds 40 tiles with 1,024,000 bits of table RAM.
It has about 1,950 flip-flops. Most of its logic is the α counting: 256 slots
× 12 comparators and adders.
On a Cyclone II FPGA, each tile maps to six 4-kbit block RAMs (next table
1024×9: two blocks; PMV table 512×32: four blocks). The 40 tiles therefore
take 240 blocks. Only the largest device of that family has that many (250);
smaller parts need fewer automata (`N_AUTOMATA`) or a smaller `MAX_STATES`.
This is an estimate from the device family's block sizes, not a synthesis
result.

## Where this departs from, or adds to, the published description

The published work names the algorithm (bit-split Aho-Corasick), the
32-peptide automaton size, the Avalon memory-mapped connection, the single
register used for both input and output, and the split between hardware and
software. The rest is this design's own:

* The automata are **loadable RAM tables**, not logic synthesized per peptide
  set. The original appears to have compiled each automaton into logic
  elements. Tables let one bitstream serve any panel of peptides.
* The residue code, the one-bit tiles, the table depths, the register map,
  the separator convention, the read-stall mechanism and all latencies.
* The number of automata (8).
* π = α/β is left to software, as in the original partition. No divider is
  built.
* Not covered: the processor, its SDRAM and cache, the performance counter,
  and the distributed front end that clusters proteins and builds automata on
  several nodes. The tolerance-based matching (peptides with alternative
  residues at non-conserved positions) is only outlined in the source as
  future work, so it is not built here either.

## Verification

Every module has a self-checking testbench. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_aa_encoder`: all 256 characters.
* `tb_bitsplit_fsm`: random tables, with a model walking the same tables. It
  checks the PMV exactly two cycles after each step, including restarts and
  idle cycles.
* `tb_ac_automaton`: tables compiled from 32 peptides, including suffix pairs
  so that two peptides can end on the same residue. The expected match vector
  for every residue of a 120-peptide stream comes from naive suffix
  comparison, checked at the exact cycle.
* `tb_peptide_protein_map`: random map, sparse random matches, repeats and
  clears, against a counting model.
* `tb_avmm_slave`: register map, table-write sequencing, read-back values and
  exact stall counts.
* `tb_pi_accel_top`: the whole peripheral at its default size, through the
  bus only. It makes twelve random proteins with the lengths of the real
  mitochondrial ones. It digests them with trypsin rules: cut after K or R,
  not before P, and not after K in CKY, DKD, CKH, CKD, KKR nor after R in RRH,
  RRR, CRK, DRD, RRF, KRR. Then it compiles and loads eight automata and runs
  samples of 2, 4, 6, 8, 10 and 12 proteins with mutated, repeated and noise
  peptides. It checks α per protein, the total, the found bits and the
  character count against a naive substring model, and the hit flag and
  3-cycle stall after every residue of the first sample. It also requires
  that stalls, separators, clears, repeated peptides and hits in several
  automata all occurred. Each sample takes well under a second of simulation.

* `tb_table1_workload`: the evaluation workload. It uses the same setup as
  `tb_pi_accel_top` and runs 30 random samples each of 2, 4, 6, 8, 10 and 12
  proteins, checking every sample. It also reports the bus cycles per sample
  from the clear to the last α read, assuming a master that issues one access
  per clock:

  | proteins per sample | 2 | 4 | 6 | 8 | 10 | 12 |
  |---|---|---|---|---|---|---|
  | average bus cycles | 774 | 1583 | 2267 | 2966 | 3668 | 4455 |
  | at 50 MHz (µs) | 15.5 | 31.7 | 45.3 | 59.3 | 73.4 | 89.1 |

  The cost is one cycle per residue or separator, plus about 30 cycles of
  clear and result reads. The accelerator itself therefore adds little time;
  in a processor-driven system, the time the processor takes to issue each
  bus write dominates.

To run one, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/pi_pkg.sv tb/ac_tables_pkg.sv rtl/aa_encoder.sv rtl/bitsplit_fsm.sv \
  rtl/ac_automaton.sv rtl/peptide_protein_map.sv rtl/avmm_slave.sv \
  rtl/pi_accel_top.sv tb/tb_pi_accel_top.sv --top-module tb_pi_accel_top
./obj_dir/Vtb_pi_accel_top
```

The other testbenches need only `pi_pkg.sv`, their module and its
submodules. `tb_ac_automaton` also needs `ac_tables_pkg.sv`. The simulator is
two-state, so the testbenches load every table entry they use. To change the
panel of peptides, change the strings passed to `ac_tables::build()`; it
returns −1 if a tile would need more than `MAX_STATES` states.

What simulation does not show: the design has not been run on an FPGA, and
its timing at 50 MHz has not been checked. The α adder tree over 256 slots is
the likeliest long path; it can be pipelined further if needed.
