// tb_bitsplit_fsm: checks one bit-split tile against a table-walking model.
//
// Random next-state and PMV tables over 40 states are loaded through the load
// port. Then random input bits are stepped in, with occasional idle cycles and
// restarts. The model walks the same tables; the PMV of the state reached by
// a step must appear on pmv_o exactly two cycles after the step.
module tb_bitsplit_fsm;
  localparam int NP = 32, B = 1, MS = 64, NS = 40;

  logic clk = 0, rst_n = 0;
  logic restart = 0, step = 0;
  logic [B-1:0] bits = '0;
  logic nwe = 0, pwe = 0;
  logic [15:0] laddr = '0;
  logic [31:0] ldata = '0;
  logic [NP-1:0] pmv;
  int checks = 0, failures = 0;

  int nxt_tab [MS*2];
  logic [31:0] pmv_tab [MS];
  int model_state;
  int exp_q [$];

  bitsplit_fsm #(.N_PEPTIDES(NP), .BITS_PER_FSM(B), .MAX_STATES(MS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .restart_i(restart), .step_i(step), .bits_i(bits),
    .ld_next_we_i(nwe), .ld_pmv_we_i(pwe), .ld_addr_i(laddr), .ld_data_i(ldata), .pmv_o(pmv));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < MS; s++) begin
      pmv_tab[s] = (s == 0) ? 32'h0 : $urandom;
      for (int b = 0; b < 2; b++) nxt_tab[s*2+b] = $urandom_range(NS - 1);
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // Load tables.
    for (int a = 0; a < MS*2; a++) begin
      nwe <= 1; laddr <= 16'(a); ldata <= 32'(nxt_tab[a]);
      @(posedge clk);
    end
    nwe <= 0;
    for (int a = 0; a < MS; a++) begin
      pwe <= 1; laddr <= 16'(a); ldata <= pmv_tab[a];
      @(posedge clk);
    end
    pwe <= 0;
    @(posedge clk);
    // Run. exp_q holds the expected pmv_o one iteration ahead.
    model_state = 0;
    exp_q = {-1};
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int r;
      r = $urandom_range(99);
      restart <= (r < 4);
      step    <= (r >= 4 && r < 85);
      bits    <= B'($urandom);
      @(negedge clk);
      // Inputs are stable now; compute the state after this edge.
      if (restart) model_state = 0;
      else if (step) model_state = nxt_tab[model_state*2 + int'(bits)];
      exp_q.push_back(model_state);
      @(posedge clk);
      #1;
      begin
        int es;
        es = exp_q.pop_front();
        if (es >= 0) begin
          checks++;
          if (pmv !== pmv_tab[es][NP-1:0]) begin
            failures++;
            if (failures < 10) $display("FAIL cyc %0d: pmv %h expected %h (state %0d)", cyc, pmv, pmv_tab[es], es);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
