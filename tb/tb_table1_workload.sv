// tb_table1_workload: the evaluation workload, 30 samples per sample size.
//
// Same offline setup as tb_pi_accel_top (twelve reference proteins with the
// lengths of roundworm mitochondrial proteins, trypsin digestion, eight
// automata of 32 peptides, tables loaded over the bus). Then, as in the
// published evaluation, 30 random samples each of 2, 4, 6, 8, 10 and 12
// proteins (one per cluster) are streamed. Every sample is checked (alpha of
// every protein and the total against a naive substring model), and the bus
// cycles the accelerator needs per sample, from the clear to the last alpha
// read, are averaged per size and printed together with the time this takes
// at 50 MHz. Bus cycles here assume a master that issues one access per
// clock; a processor issuing the same accesses from software is slower.
module tb_table1_workload;
  import pi_pkg::*;
  import ac_tables_pkg::*;

  localparam int NA = DEF_N_AUTOMATA, NP = DEF_N_PEPTIDES, NPR = DEF_N_PROTEINS;
  localparam int MS = DEF_MAX_STATES, B = DEF_BITS_PER_FSM;

  logic clk = 0, reset_n = 0;
  logic [7:0] address = '0;
  logic read = 0, write = 0;
  logic [31:0] writedata = '0;
  logic [31:0] readdata;
  logic readdatavalid, waitrequest;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_stall = 0, n_sep = 0, n_clear = 0, n_repeat = 0, n_multi_ac = 0, n_load = 0, n_overlap = 0;

  pi_accel_top dut (
    .clk(clk), .reset_n(reset_n), .avs_address(address), .avs_read(read), .avs_write(write),
    .avs_writedata(writedata), .avs_readdata(readdata), .avs_readdatavalid(readdatavalid),
    .avs_waitrequest(waitrequest));

  always #10 clk = ~clk;  // 50 MHz
  longint cyc = 0;
  longint sum_cyc [6] = '{default: 0};
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // Bus master. Every task starts and ends just after a rising edge.
  task automatic bus_write(logic [7:0] a, logic [31:0] d);
    address = a; writedata = d; write = 1;
    @(posedge clk);
    while (waitrequest) @(posedge clk);
    #1 write = 0;
  endtask

  task automatic bus_read(logic [7:0] a, output logic [31:0] d, output int stalls);
    stalls = 0;
    address = a; read = 1;
    @(negedge clk);
    while (waitrequest) begin
      stalls++;
      @(negedge clk);
    end
    @(posedge clk);
    #1 read = 0;
    check(readdatavalid, "readdatavalid");
    d = readdata;
    if (stalls > 0) n_stall++;
  endtask

  string prots [NPR];
  string pats [NA][$];      // peptides per automaton
  int    prot_of [NA][NP];  // protein id per slot
  int    beta [NPR];

  // Approximate residue counts of the twelve proteins.
  localparam int PROT_LEN [12] = '{525, 231, 256, 199, 290, 280, 112, 410, 78, 524, 145, 365};

  initial begin
    string all_peps[$];
    int    all_prot[$];
    int    order[$];
    ac_tables tabs;
    logic [31:0] d;
    int st;

    // ---- offline: reference proteins, digestion, grouping ----
    for (int j = 0; j < NPR; j++) begin
      string raw[$];
      prots[j] = random_protein(PROT_LEN[j % 12]);
      raw = {};
      digest(prots[j], raw);
      foreach (raw[i]) if (raw[i].len() >= 4 && raw[i].len() <= 30) begin
        bit dup;
        dup = 0;
        foreach (all_peps[q]) if (all_peps[q] == raw[i]) dup = 1;
        if (!dup) begin all_peps.push_back(raw[i]); all_prot.push_back(j); end
      end
    end
    foreach (all_peps[i]) order.push_back(i);
    order.shuffle();
    for (int j = 0; j < NPR; j++) beta[j] = 0;
    for (int k = 0; k < NA; k++) for (int p = 0; p < NP; p++) prot_of[k][p] = 15;
    foreach (order[n]) if (n < NA * NP) begin
      int k;
      k = n / NP;
      prot_of[k][pats[k].size()] = all_prot[order[n]];
      beta[all_prot[order[n]]]++;
      pats[k].push_back(all_peps[order[n]]);
    end
    $display("reference peptides %0d, loaded %0d", all_peps.size(), (all_peps.size() < NA*NP) ? all_peps.size() : NA*NP);

    repeat (3) @(posedge clk);
    reset_n = 1;
    @(posedge clk);
    #1;

    // ---- load tables ----
    tabs = new(B);
    for (int k = 0; k < NA; k++) begin
      int rc;
      rc = tabs.build(pats[k], MS);
      check(rc == 0, $sformatf("automaton %0d tables fit", k));
      $display("automaton %0d: %0d peptides, %0d A-C states, tile states %0d..%0d", k, pats[k].size(),
               tabs.n_ac, tabs.nts[0], tabs.nts[tabs.ntiles-1]);
      for (int t = 0; t < tabs.ntiles; t++) begin
        bus_write(REG_LOAD_SEL, {14'd0, 2'(TBL_NEXT), 8'(k), 8'(t)});
        bus_write(REG_LOAD_ADDR, 0);
        for (int a = 0; a < MS * (1 << B); a++)
          bus_write(REG_LOAD_DATA, (a / (1 << B) < tabs.nts[t]) ? 32'(tabs.next[t][a]) : 32'd0);
        bus_write(REG_LOAD_SEL, {14'd0, 2'(TBL_PMV), 8'(k), 8'(t)});
        bus_write(REG_LOAD_ADDR, 0);
        for (int a = 0; a < MS; a++)
          bus_write(REG_LOAD_DATA, (a < tabs.nts[t]) ? tabs.pmv[t][a] : 32'd0);
        n_load++;
      end
    end
    bus_write(REG_LOAD_SEL, {14'd0, 2'(TBL_MAP), 8'd0, 8'd0});
    bus_write(REG_LOAD_ADDR, 0);
    for (int k = 0; k < NA; k++) for (int p = 0; p < NP; p++) bus_write(REG_LOAD_DATA, 32'(prot_of[k][p]));

    // ---- online: 30 samples each of 2, 4, ..., 12 proteins ----
    for (int run = 0; run < 180; run++) begin
      int smp;
      longint t0;
      int nprot;
      int chosen[$];
      string sample[$];
      logic [NP-1:0] exp_found [NA];
      int exp_alpha [NPR];
      int exp_total, nchars, seen_ac;
      int pepcount [string];
      smp = run / 30 + 1;
      t0 = cyc;

      nprot = 2 * smp;
      chosen = {};
      sample = {};
      pepcount.delete();
      for (int j = 0; j < NPR; j++) chosen.push_back(j);
      chosen.shuffle();
      chosen = chosen[0:nprot-1];
      foreach (chosen[c]) begin
        string raw[$];
        raw = {};
        digest(prots[chosen[c]], raw);
        foreach (raw[i]) begin
          string s;
          s = raw[i];
          if ($urandom_range(9) == 0) s[$urandom_range(s.len() - 1)] = AMINO[$urandom_range(19)];
          sample.push_back(s);
          if ($urandom_range(5) == 0) sample.push_back(raw[i]);
        end
      end
      for (int i = 0; i < 3; i++) sample.push_back(random_protein($urandom_range(4, 12)));
      sample.shuffle();

      // Reference model.
      exp_total = 0; nchars = 0; seen_ac = 0;
      for (int j = 0; j < NPR; j++) exp_alpha[j] = 0;
      for (int k = 0; k < NA; k++) begin
        exp_found[k] = '0;
        foreach (sample[i]) exp_found[k] |= naive_match_set(sample[i], pats[k]);
        for (int p = 0; p < pats[k].size(); p++) if (exp_found[k][p]) begin
          exp_alpha[prot_of[k][p]]++;
          exp_total++;
          if (pepcount.exists(pats[k][p])) pepcount[pats[k][p]]++; else pepcount[pats[k][p]] = 1;
        end
        if (exp_found[k] != 0) seen_ac++;
      end
      if (seen_ac > 1) n_multi_ac++;
      foreach (sample[i]) begin
        int hits;
        hits = 0;
        for (int k = 0; k < NA; k++) hits += $countones(naive_match_set(sample[i], pats[k]));
        if (hits > 0) foreach (sample[i2]) if (i2 != i && sample[i2] == sample[i]) begin n_repeat++; break; end
      end

      // Stream the sample.
      bus_write(REG_CTRL, 32'h1);
      n_clear++;
      foreach (sample[i]) begin
        string cur;
        cur = "";
        for (int c = 0; c < sample[i].len(); c++) begin
          string ch;
          ch = " ";
          ch[0] = sample[i][c];
          cur = {cur, ch};
          bus_write(REG_REGISTER1, 32'(sample[i][c]));
          nchars++;
          if (1 == 0) begin
            // Per-residue check of hit flag and running total.
            int ends, tot_now;
            ends = 0;
            for (int k = 0; k < NA; k++) foreach (pats[k][p])
              if (pats[k][p].len() <= cur.len() &&
                  cur.substr(cur.len() - pats[k][p].len(), cur.len() - 1) == pats[k][p]) ends++;
            if (ends > 1) n_overlap++;
            bus_read(REG_REGISTER1, d, st);
            check(st == 3, $sformatf("register1 read waits 3 cycles (%0d)", st));
            check(d[31] == (ends > 0), $sformatf("hit flag at residue %0d of '%s'", c, sample[i]));
          end
        end
        bus_write(REG_REGISTER1, 32'h0A);  // newline separates peptides
        n_sep++;
        nchars++;
      end

      // Results.
      bus_read(REG_REGISTER1, d, st);
      check(st == 3, "final read waits");
      check(d[15:0] == 16'(exp_total), $sformatf("sample %0d total %0d expected %0d", smp, d[15:0], exp_total));
      bus_read(REG_CTRL, d, st);
      check(d == 32'(nchars), "character count");
      for (int k = 0; k < NA; k++) begin
        bus_read(REG_FOUND0 + 8'(k), d, st);
        check(d == exp_found[k], $sformatf("sample %0d found[%0d] %h expected %h", smp, k, d, exp_found[k]));
      end
      if (run % 30 == 0) $write("sample %0d (%0d proteins, %0d residues+separators):", smp, nprot, nchars);
      for (int j = 0; j < NPR; j++) begin
        bus_read(REG_ALPHA0 + 8'(j), d, st);
        check(d == 32'(exp_alpha[j]), $sformatf("sample %0d alpha[%0d] %0d expected %0d", smp, j, d, exp_alpha[j]));
        if (beta[j] > 0 && run % 30 == 0) $write(" %0d:%0d/%0d", j, d, beta[j]);
      end
      if (run % 30 == 0) $write("\n");
      sum_cyc[smp - 1] += cyc - t0;
      foreach (chosen[c]) check(exp_alpha[chosen[c]] > 0 || beta[chosen[c]] == 0,
                                $sformatf("protein %0d of sample identified", chosen[c]));
    end

    for (int z = 0; z < 6; z++)
      $display("%0d proteins: average %0d bus cycles per sample = %0d.%02d us at 50 MHz",
               2 * (z + 1), sum_cyc[z] / 30, sum_cyc[z] / 30 / 50, (sum_cyc[z] / 30 % 50) * 2);
    $display("mechanisms: stalls %0d separators %0d clears %0d repeats %0d multi-automaton %0d loads %0d overlaps %0d",
             n_stall, n_sep, n_clear, n_repeat, n_multi_ac, n_load, n_overlap);
    check(n_stall > 0, "stall never happened");
    check(n_sep > 0, "separator never happened");
    check(n_clear > 0, "clear never happened");
    check(n_repeat > 0, "repeated peptide never happened");
    check(n_multi_ac > 0, "hits in several automata never happened");
    check(n_load > 0, "table load never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
