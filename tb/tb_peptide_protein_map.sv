// tb_peptide_protein_map: mapping table and per-protein counts.
//
// A random protein id (some slots left unused) is loaded for each of the
// N_AUTOMATA * 32 peptide slots. Sparse random match vectors are then applied,
// with repeats of peptides already found and two clears. A model keeps the
// found bits and counts distinct peptides per protein; found_o must follow one
// cycle after a match, alpha_o and total_o one cycle after that.
module tb_peptide_protein_map;
  import pi_pkg::*;

  localparam int NP = 32, NA = 4, NPR = 12, NS = NP * NA;

  logic clk = 0, rst_n = 0;
  logic clear = 0;
  tbl_load_t ld;
  logic mvalid = 0;
  logic [NS-1:0] match = '0;
  logic [NS-1:0] found;
  logic [ALPHA_W-1:0] alpha [NPR];
  logic [ALPHA_W-1:0] total;
  logic hit;
  int checks = 0, failures = 0;
  int map_m [NS];
  logic [NS-1:0] found_m;
  int n_repeat = 0;

  peptide_protein_map #(.N_PEPTIDES(NP), .N_AUTOMATA(NA), .N_PROTEINS(NPR)) dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .ld_i(ld), .match_valid_i(mvalid),
    .match_i(match), .found_o(found), .alpha_o(alpha), .total_o(total), .hit_o(hit));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_counts();
    int a [NPR];
    int tot;
    tot = 0;
    for (int j = 0; j < NPR; j++) a[j] = 0;
    for (int g = 0; g < NS; g++) if (found_m[g] && map_m[g] < NPR) begin a[map_m[g]]++; tot++; end
    checks++;
    if (found !== found_m) begin failures++; $display("FAIL found %h exp %h", found, found_m); end
    for (int j = 0; j < NPR; j++) begin
      checks++;
      if (int'(alpha[j]) != a[j]) begin failures++; $display("FAIL alpha[%0d] %0d exp %0d", j, alpha[j], a[j]); end
    end
    checks++;
    if (int'(total) != tot) begin failures++; $display("FAIL total %0d exp %0d", total, tot); end
  endtask

  initial begin
    tbl_load_t l;
    ld = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int g = 0; g < NS; g++) begin
      map_m[g] = ($urandom_range(9) == 0) ? 15 : $urandom_range(NPR - 1);
      l = '0; l.we = 1; l.kind = TBL_MAP; l.addr = 16'(g); l.data = 32'(map_m[g]);
      ld <= l;
      @(posedge clk);
    end
    // A write of another table kind must not touch the map.
    l = '0; l.we = 1; l.kind = TBL_PMV; l.addr = 16'(0); l.data = 32'(map_m[0] ^ 1);
    ld <= l;
    @(posedge clk);
    ld <= '0;
    found_m = '0;
    for (int it = 0; it < 400; it++) begin
      logic [NS-1:0] m;
      m = '0;
      for (int k = 0; k < $urandom_range(3); k++) m[$urandom_range(NS - 1)] = 1'b1;
      if ((m & found_m) != 0) n_repeat++;
      if (it == 150 || it == 300) begin
        clear <= 1; mvalid <= 1; match <= m;  // clear wins
        @(posedge clk);
        clear <= 0; mvalid <= 0;
        found_m = '0;
      end else begin
        mvalid <= ($urandom_range(3) != 0);
        match  <= m;
        @(posedge clk);
        if (mvalid) found_m |= m;
        #1;
        checks++;
        if (hit !== (mvalid && m != 0) && mvalid) begin failures++; $display("FAIL hit"); end
        mvalid <= 0;
      end
      @(posedge clk);
      #1;
      check_counts();
    end
    checks++;
    if (n_repeat == 0) begin failures++; $display("FAIL: no repeated peptide"); end
    $display("repeated peptides %0d", n_repeat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
