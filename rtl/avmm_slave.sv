// avmm_slave: Avalon memory-mapped slave of the protein-inference accelerator.
//
// The processor drives the accelerator through this slave alone. It writes
// the peptides of a sample one amino-acid character at a time to register1,
// loads the automaton and map tables before a run, and reads back the count
// of identified peptides per protein. Word addresses (see pi_pkg):
//   0x00 CTRL       W bit0 = 1: clear found bits, restart automata, zero the
//                   character count.  R: characters written since the clear.
//   0x01 register1  W bits 7:0: one character (letter = residue, anything
//                   else = peptide separator).
//                   R: bit 31 = last residue completed a peptide,
//                      bits 15:0 = distinct peptides identified.
//   0x02 LOAD_SEL   W/R: bits 17:16 table kind, 15:8 automaton, 7:0 tile.
//   0x03 LOAD_ADDR  W/R: table entry index.
//   0x04 LOAD_DATA  W: writes the entry at LOAD_ADDR, then LOAD_ADDR + 1.
//   0x10 + j        R: alpha of protein j (j < N_PROTEINS).
//   0x40 + k        R: found bits of automaton k (k < N_AUTOMATA).
// Reads of other addresses return 0.
//
// Timing: writes complete in one cycle and never wait. A residue needs
// PIPE_LAT cycles after its write before the counts it changes are final, so
// a read waits (waitrequest high) until that many cycles have passed since
// the last write that starts datapath work. readdata is registered: it is
// valid, with readdatavalid, in the cycle after the read is accepted (read
// latency 1). char_o and the data field of ld_o are the write data passed
// straight through; the strobes beside them say when they count.
//
// The paper names the Avalon interface and register1, which is both written
// with input and read for output, and notes that the slave's cycle count
// varies while it is busy; the rest of the register map is this design's.
module avmm_slave
  import pi_pkg::*;
#(
  parameter int unsigned N_PEPTIDES = DEF_N_PEPTIDES,
  parameter int unsigned N_AUTOMATA = DEF_N_AUTOMATA,
  parameter int unsigned N_PROTEINS = DEF_N_PROTEINS,
  parameter int unsigned PIPE_LAT   = 3
) (
  input  logic                             clk_i,
  input  logic                             rst_ni,
  // Avalon-MM slave
  input  logic [7:0]                       avs_address,
  input  logic                             avs_read,
  input  logic                             avs_write,
  input  logic [31:0]                      avs_writedata,
  output logic [31:0]                      avs_readdata,
  output logic                             avs_readdatavalid,
  output logic                             avs_waitrequest,
  // to the datapath
  output logic                             char_we_o,
  output logic [7:0]                       char_o,
  output logic                             clear_o,
  output tbl_load_t                        ld_o,
  // from the datapath
  input  logic [N_AUTOMATA*N_PEPTIDES-1:0] found_i,
  input  logic [ALPHA_W-1:0]               alpha_i [N_PROTEINS],
  input  logic [ALPHA_W-1:0]               total_i,
  input  logic                             hit_i
);

  localparam int unsigned CNT_W = $clog2(PIPE_LAT + 1);

  logic [17:0]      load_sel_q;
  logic [15:0]      load_addr_q;
  logic [31:0]      nchar_q;
  logic [CNT_W-1:0] pend_q;
  logic             rd_ok, start_work;
  logic [31:0]      rdata_d;

  assign char_we_o  = avs_write && avs_address == REG_REGISTER1;
  assign char_o     = avs_writedata[7:0];
  assign clear_o    = avs_write && avs_address == REG_CTRL && avs_writedata[0];
  assign start_work = char_we_o | clear_o | (avs_write && avs_address == REG_LOAD_DATA);

  always_comb begin
    ld_o           = '0;
    ld_o.we        = avs_write && avs_address == REG_LOAD_DATA;
    ld_o.kind      = tbl_kind_e'(load_sel_q[17:16]);
    ld_o.automaton = load_sel_q[15:8];
    ld_o.tile      = load_sel_q[7:0];
    ld_o.addr      = load_addr_q;
    ld_o.data      = avs_writedata;
  end

  // Reads wait while datapath work is in flight.
  assign avs_waitrequest = avs_read && pend_q != '0;
  assign rd_ok           = avs_read && pend_q == '0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      load_sel_q  <= '0;
      load_addr_q <= '0;
      nchar_q     <= '0;
      pend_q      <= '0;
    end else begin
      if (start_work)        pend_q <= CNT_W'(PIPE_LAT);
      else if (pend_q != '0) pend_q <= pend_q - 1'b1;

      if (clear_o)        nchar_q <= '0;
      else if (char_we_o) nchar_q <= nchar_q + 1'b1;

      if (avs_write && avs_address == REG_LOAD_SEL)  load_sel_q  <= avs_writedata[17:0];
      if (avs_write && avs_address == REG_LOAD_ADDR) load_addr_q <= avs_writedata[15:0];
      else if (ld_o.we)                              load_addr_q <= load_addr_q + 1'b1;
    end
  end

  // Read multiplexer.
  always_comb begin
    rdata_d = '0;
    unique case (avs_address)
      REG_CTRL:      rdata_d = nchar_q;
      REG_REGISTER1: rdata_d = {hit_i, 15'd0, total_i};
      REG_LOAD_SEL:  rdata_d = 32'(load_sel_q);
      REG_LOAD_ADDR: rdata_d = 32'(load_addr_q);
      default: begin
        for (int j = 0; j < N_PROTEINS; j++)
          if (avs_address == REG_ALPHA0 + 8'(j)) rdata_d = 32'(alpha_i[j]);
        for (int k = 0; k < N_AUTOMATA; k++)
          if (avs_address == REG_FOUND0 + 8'(k)) rdata_d = 32'(found_i[k*N_PEPTIDES +: N_PEPTIDES]);
      end
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      avs_readdata      <= '0;
      avs_readdatavalid <= 1'b0;
    end else begin
      avs_readdatavalid <= rd_ok;
      if (rd_ok) avs_readdata <= rdata_d;
    end
  end

  // A master never reads and writes in the same cycle.
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(avs_read && avs_write))
    else $error("avmm_slave: read and write asserted together");

endmodule
