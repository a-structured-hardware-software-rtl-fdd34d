// tb_avmm_slave: register map, table-load sequencing and read stalls.
//
// The testbench acts as the bus master and stands in for the datapath: it
// drives found/alpha/total/hit with random values and watches the strobes the
// slave produces. Checked: a register1 write gives a one-cycle character
// strobe; a CTRL write with bit 0 gives a clear; LOAD_SEL/LOAD_ADDR/LOAD_DATA
// give table writes with the selected kind, automaton, tile and an address
// that counts up; reads of every register return the expected value one cycle
// after they are accepted; a read right after a datapath write waits exactly
// PIPE_LAT cycles, a read after an idle bus does not wait.
module tb_avmm_slave;
  import pi_pkg::*;

  localparam int NP = 32, NA = 4, NPR = 12, LAT = 3;

  logic clk = 0, rst_n = 0;
  logic [7:0] address = '0;
  logic read = 0, write = 0;
  logic [31:0] writedata = '0;
  logic [31:0] readdata;
  logic readdatavalid, waitrequest;
  logic char_we, clear;
  logic [7:0] char_c;
  tbl_load_t ld;
  logic [NA*NP-1:0] found;
  logic [ALPHA_W-1:0] alpha [NPR];
  logic [ALPHA_W-1:0] total;
  logic hit;
  int checks = 0, failures = 0;
  int n_stall = 0;

  avmm_slave #(.N_PEPTIDES(NP), .N_AUTOMATA(NA), .N_PROTEINS(NPR), .PIPE_LAT(LAT)) dut (
    .clk_i(clk), .rst_ni(rst_n), .avs_address(address), .avs_read(read), .avs_write(write),
    .avs_writedata(writedata), .avs_readdata(readdata), .avs_readdatavalid(readdatavalid),
    .avs_waitrequest(waitrequest), .char_we_o(char_we), .char_o(char_c), .clear_o(clear),
    .ld_o(ld), .found_i(found), .alpha_i(alpha), .total_i(total), .hit_i(hit));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // One write; strobes are checked in the cycle the write is on the bus.
  task automatic bus_write(logic [7:0] a, logic [31:0] d);
    address = a; writedata = d; write = 1;
    @(negedge clk);
    check(!waitrequest, "write waited");
    if (a == REG_REGISTER1) check(char_we && char_c == d[7:0] && !clear && !ld.we, "char strobe");
    else check(!char_we, "spurious char strobe");
    if (a == REG_CTRL) check(clear == d[0], "clear strobe");
    @(posedge clk);
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
    @(negedge clk);
    check(readdatavalid, "readdatavalid");
    d = readdata;
    @(posedge clk);
    #1;
  endtask

  initial begin
    logic [31:0] d;
    int st;
    for (int g = 0; g < NA*NP; g++) found[g] = 1'($urandom);
    for (int j = 0; j < NPR; j++) alpha[j] = ALPHA_W'($urandom);
    total = ALPHA_W'($urandom); hit = 1;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    #1;
    // Idle bus: no stall.
    bus_read(REG_CTRL, d, st);
    check(st == 0 && d == 0, "idle read");
    // Characters.
    bus_write(REG_REGISTER1, 32'h41);
    bus_read(REG_REGISTER1, d, st);
    check(st == LAT, $sformatf("stall after char write %0d", st));
    if (st > 0) n_stall++;
    check(d == {hit, 15'd0, total}, "register1 read");
    for (int i = 0; i < 5; i++) bus_write(REG_REGISTER1, 32'h4B);
    bus_read(REG_CTRL, d, st);
    check(d == 6, $sformatf("char count %0d", d));
    // Clear.
    bus_write(REG_CTRL, 32'h0);
    bus_write(REG_CTRL, 32'h1);
    bus_read(REG_CTRL, d, st);
    check(d == 0 && st == LAT, "clear resets count, stalls");
    // Table loading.
    bus_write(REG_LOAD_SEL, {14'd0, 2'(TBL_PMV), 8'd3, 8'd4});
    bus_write(REG_LOAD_ADDR, 32'd100);
    for (int i = 0; i < 4; i++) begin
      address = REG_LOAD_DATA; writedata = 32'hC0DE0000 + i; write = 1;
      @(negedge clk);
      check(ld.we && ld.kind == TBL_PMV && ld.automaton == 3 && ld.tile == 4 &&
            ld.addr == 16'(100 + i) && ld.data == 32'hC0DE0000 + i, "table write");
      @(posedge clk);
      #1 write = 0;
    end
    @(negedge clk);
    check(!ld.we, "no table write when idle");
    @(posedge clk);
    #1;
    bus_read(REG_LOAD_ADDR, d, st);
    check(d == 104, "load address counted up");
    bus_read(REG_LOAD_SEL, d, st);
    check(d == {14'd0, 2'(TBL_PMV), 8'd3, 8'd4}, "load select read back");
    // Result registers.
    for (int j = 0; j < NPR; j++) begin
      bus_read(REG_ALPHA0 + 8'(j), d, st);
      check(d == 32'(alpha[j]), $sformatf("alpha %0d", j));
    end
    for (int k = 0; k < NA; k++) begin
      bus_read(REG_FOUND0 + 8'(k), d, st);
      check(d == found[k*NP +: NP], $sformatf("found %0d", k));
    end
    bus_read(8'h3F, d, st);
    check(d == 0, "unmapped address");
    check(n_stall > 0, "stall seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
