// ac_tables_pkg: builds bit-split Aho-Corasick tables for the testbenches.
//
// Given up to 32 peptides, build() makes
//   1. the Aho-Corasick trie over 5-bit residue codes (code = letter - 'A'),
//      its failure links and the full transition function delta, with the
//      output set of every state (peptides that end there, failure outputs
//      included);
//   2. for each tile t, a binary automaton by subset construction: a tile
//      state is a set of Aho-Corasick states, the root tile state is {root},
//      and reading slice value b from set S gives the set of delta(s, c) for
//      all s in S and all codes c whose slice t equals b. The partial match
//      vector of a tile state is the OR of the output sets of its members.
// The AND over tiles of the partial match vectors is then the exact set of
// peptides ending at the current residue. Tables come out in the layout the
// tiles expect: next[t][state * 2**BITS + slice], pmv[t][state].
//
// Also provided: digest(), the trypsin cleavage rules used to make test
// peptides, and helpers to make random protein sequences.
package ac_tables_pkg;

  localparam int MAXAC  = 1024;  // Aho-Corasick states the builder handles
  localparam int NCODE  = 32;    // 5-bit residue codes
  localparam int MAXT   = 8;     // tiles
  localparam int MAXTS  = 1024;  // tile states the builder handles
  localparam string AMINO = "ACDEFGHIKLMNPQRSTVWY";

  typedef logic [MAXAC-1:0] set_t;

  class ac_tables;
    int bits;
    int ntiles;
    int n_ac;
    int delta [MAXAC][NCODE];
    int fail  [MAXAC];
    logic [31:0] out [MAXAC];
    int nts [MAXT];                       // tile states used
    int next [MAXT][MAXTS*4];
    logic [31:0] pmv [MAXT][MAXTS];

    function new(int bits_per_fsm);
      bits   = bits_per_fsm;
      ntiles = (5 + bits - 1) / bits;
    endfunction

    static function int code_of(byte ch);
      return int'(ch) - 65;
    endfunction

    // Returns 0 on success, -1 if a size bound is exceeded.
    function int build(string peps[$], int max_states);
      int q[$];
      int s, c, r, u, nb;
      n_ac = 1;
      for (c = 0; c < NCODE; c++) delta[0][c] = -1;
      out[0] = '0;
      foreach (peps[p]) begin
        s = 0;
        for (int i = 0; i < peps[p].len(); i++) begin
          c = code_of(peps[p][i]);
          if (delta[s][c] < 0) begin
            if (n_ac >= MAXAC) return -1;
            for (int d = 0; d < NCODE; d++) delta[n_ac][d] = -1;
            out[n_ac] = '0;
            delta[s][c] = n_ac;
            n_ac++;
          end
          s = delta[s][c];
        end
        out[s][p] = 1'b1;
      end
      // Failure links and full transition function, breadth first.
      fail[0] = 0;
      for (c = 0; c < NCODE; c++) begin
        if (delta[0][c] < 0) delta[0][c] = 0;
        else begin
          fail[delta[0][c]] = 0;
          q.push_back(delta[0][c]);
        end
      end
      while (q.size() > 0) begin
        r = q.pop_front();
        out[r] |= out[fail[r]];
        for (c = 0; c < NCODE; c++) begin
          u = delta[r][c];
          if (u >= 0) begin
            fail[u] = delta[fail[r]][c];
            q.push_back(u);
          end else begin
            delta[r][c] = delta[fail[r]][c];
          end
        end
      end
      // Subset construction per tile.
      nb = 1 << bits;
      for (int t = 0; t < ntiles; t++) begin
        set_t sets[$];
        set_t root, nxt;
        int j;
        root = '0;
        root[0] = 1'b1;
        sets.push_back(root);
        for (int i = 0; i < sets.size(); i++) begin
          if (i >= max_states || i >= MAXTS) return -1;
          pmv[t][i] = '0;
          for (s = 0; s < n_ac; s++) if (sets[i][s]) pmv[t][i] |= out[s];
          for (int b = 0; b < nb; b++) begin
            nxt = '0;
            for (s = 0; s < n_ac; s++) begin
              if (sets[i][s]) begin
                for (c = 0; c < NCODE; c++)
                  if (((c >> (t * bits)) & (nb - 1)) == b) nxt[delta[s][c]] = 1'b1;
              end
            end
            j = -1;
            foreach (sets[k]) if (sets[k] == nxt) begin j = k; break; end
            if (j < 0) begin
              sets.push_back(nxt);
              j = sets.size() - 1;
            end
            next[t][i * nb + b] = j;
          end
        end
        nts[t] = sets.size();
      end
      return 0;
    endfunction
  endclass

  // Trypsin digestion: cleave after K or R, not before P, and not after K in
  // CKY, DKD, CKH, CKD, KKR nor after R in RRH, RRR, CRK, DRD, RRF, KRR.
  function automatic void digest(string prot, ref string peps[$]);
    int start = 0;
    int n = prot.len();
    for (int i = 0; i < n; i++) begin
      bit cut;
      string trio;
      cut = (prot[i] == "K" || prot[i] == "R") && i + 1 < n;
      if (cut && prot[i+1] == "P") cut = 0;
      if (cut && i >= 1) begin
        trio = prot.substr(i - 1, i + 1);
        if (trio inside {"CKY", "DKD", "CKH", "CKD", "KKR",
                        "RRH", "RRR", "CRK", "DRD", "RRF", "KRR"}) cut = 0;
      end
      if (cut) begin
        peps.push_back(prot.substr(start, i));
        start = i + 1;
      end
    end
    if (start < n) peps.push_back(prot.substr(start, n - 1));
  endfunction

  function automatic string random_protein(int len);
    string s = "";
    for (int i = 0; i < len; i++) begin
      string ch;
      ch = " ";
      ch[0] = AMINO[$urandom_range(19)];
      s = {s, ch};
    end
    return s;
  endfunction

  // Reference: set of peptides of pats that occur inside text (a peptide
  // never spans a separator). Returns one bit per pattern.
  function automatic logic [31:0] naive_match_set(string text, string pats[$]);
    logic [31:0] m = '0;
    foreach (pats[p]) begin
      int L = pats[p].len();
      for (int i = 0; i + L <= text.len(); i++)
        if (text.substr(i, i + L - 1) == pats[p]) begin m[p] = 1'b1; break; end
    end
    return m;
  endfunction

endpackage
