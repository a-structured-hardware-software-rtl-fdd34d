// tb_ac_automaton: one bit-split automaton against a naive string matcher.
//
// Test peptides come from trypsin digestion of random proteins; 32 distinct
// ones are kept, plus suffixes of some of them so that two peptides can end at
// the same residue. Tables are built by ac_tables_pkg and loaded through the
// load port. A stream of peptides (known ones, mutated ones and random ones,
// with separators, idle cycles and one clear) is fed one residue per cycle.
// For every residue the expected vector is the set of peptides that are a
// suffix of the current input peptide read so far; it must appear on match_o
// with match_valid_o exactly two cycles after the residue.
module tb_ac_automaton;
  import pi_pkg::*;
  import ac_tables_pkg::*;

  localparam int NP = 32, B = 1, MS = 512;

  logic clk = 0, rst_n = 0;
  sym_t sym;
  logic clear = 0;
  tbl_load_t ld;
  logic mvalid;
  logic [NP-1:0] match;
  int checks = 0, failures = 0;
  int n_multi = 0, n_hits = 0, n_restart = 0;

  ac_automaton #(.N_PEPTIDES(NP), .BITS_PER_FSM(B), .MAX_STATES(MS), .AUTOMATON_ID(2)) dut (
    .clk_i(clk), .rst_ni(rst_n), .sym_i(sym), .clear_i(clear), .ld_i(ld),
    .match_valid_o(mvalid), .match_o(match));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  string pats[$];
  ac_tables tabs;
  // expected output per cycle: -1 = not valid, else index into exp_vec
  logic [32:0] pipe [$];

  task automatic load(tbl_kind_e kind, int automaton, int tile, int addr, logic [31:0] data);
    tbl_load_t l;
    l.we = 1'b1; l.kind = kind; l.automaton = 8'(automaton); l.tile = 8'(tile);
    l.addr = 16'(addr); l.data = data;
    ld <= l;
    @(posedge clk);
  endtask

  // Present one symbol for one cycle and check the output of that cycle.
  task automatic cycle(logic v, logic isr, byte ch, logic [32:0] expv);
    logic [32:0] e;
    sym.valid <= v; sym.is_residue <= isr;
    sym.code <= (v && isr) ? CODE_W'(ch - 65) : '0;
    pipe.push_back(expv);
    @(posedge clk);
    #1;
    e = pipe.pop_front();
    checks++;
    if (mvalid !== e[32] || (e[32] && match !== e[31:0])) begin
      failures++;
      if (failures < 10) $display("FAIL: valid %0b match %h, expected %0b %h", mvalid, match, e[32], e[31:0]);
    end
    if (e[32] && $countones(e[31:0]) > 1) n_multi++;
    if (e[32] && e[31:0] != 0) n_hits++;
  endtask

  initial begin
    string raw[$];
    string stream[$];
    int rc;
    sym = '0; ld = '0;
    // Peptides.
    while (pats.size() < 28) begin
      raw = {};
      digest(random_protein(120), raw);
      foreach (raw[i]) if (pats.size() < 28 && raw[i].len() >= 2 && raw[i].len() <= 14) begin
        bit dup;
        dup = 0;
        foreach (pats[j]) if (pats[j] == raw[i]) dup = 1;
        if (!dup) pats.push_back(raw[i]);
      end
    end
    for (int i = 0; i < 4; i++) pats.push_back(pats[i].substr(pats[i].len() - 2, pats[i].len() - 1));
    tabs = new(B);
    rc = tabs.build(pats, MS);
    if (rc != 0) begin
      $display("table build failed");
      failures++;
    end
    $display("AC states %0d, tile states %0d %0d %0d %0d %0d", tabs.n_ac,
             tabs.nts[0], tabs.nts[1], tabs.nts[2], tabs.nts[3], tabs.nts[4]);
    // Stream: peptides to feed.
    for (int i = 0; i < 120; i++) begin
      int r;
      string s;
      r = $urandom_range(9);
      if (r < 5) s = pats[$urandom_range(pats.size() - 1)];
      else if (r < 7) begin
        s = pats[$urandom_range(pats.size() - 1)];
        s[$urandom_range(s.len() - 1)] = AMINO[$urandom_range(19)];
      end else if (r < 8) s = {pats[$urandom_range(31)], pats[$urandom_range(31)]};
      else s = random_protein($urandom_range(3, 15));
      stream.push_back(s);
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // Wrong automaton id: must be ignored. Fill tile 0 next table with junk.
    for (int a = 0; a < 2 * MS; a++) load(TBL_NEXT, 1, 0, a, 32'($urandom_range(MS - 1)));
    for (int t = 0; t < tabs.ntiles; t++) begin
      for (int a = 0; a < 2 * MS; a++) load(TBL_NEXT, 2, t, a, (a / 2 < tabs.nts[t]) ? 32'(tabs.next[t][a]) : 32'd0);
      for (int a = 0; a < MS; a++) load(TBL_PMV, 2, t, a, (a < tabs.nts[t]) ? tabs.pmv[t][a] : 32'd0);
    end
    ld <= '0;
    repeat (2) @(posedge clk);
    pipe = {33'd0};
    foreach (stream[i]) begin
      string cur;
      cur = "";
      for (int k = 0; k < stream[i].len(); k++) begin
        string ch;
        logic [31:0] ev;
        ch = " ";
        ev = '0;
        ch[0] = stream[i][k];
        cur = {cur, ch};
        foreach (pats[p]) if (pats[p].len() <= cur.len() &&
                              cur.substr(cur.len() - pats[p].len(), cur.len() - 1) == pats[p]) ev[p] = 1'b1;
        cycle(1, 1, stream[i][k], {1'b1, ev});
        if ($urandom_range(9) == 0) cycle(0, 0, 0, 33'd0);
      end
      cycle(1, 0, ".", 33'd0);
      n_restart++;
      if (i == 60) begin
        // Clear half way through a peptide, after the pipeline drained.
        cycle(1, 1, "K", {1'b1, 32'd0});
        cycle(0, 0, 0, 33'd0);
        cycle(0, 0, 0, 33'd0);
        clear <= 1;
        cycle(0, 0, 0, 33'd0);
        clear <= 0;
      end
    end
    repeat (3) cycle(0, 0, 0, 33'd0);
    $display("residues with a hit %0d, with several peptides %0d, separators %0d", n_hits, n_multi, n_restart);
    checks++;
    if (n_multi == 0 || n_hits == 0) begin failures++; $display("FAIL: mechanism not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
