// aa_encoder: turns a character written by the processor into a residue code.
//
// Software hands the accelerator one amino-acid letter per bus write. Letters
// A..Z (either case) become code = letter - 'A', a 5-bit number 0..25 that the
// bit-split automata consume bit by bit. The twenty standard amino acids use
// 20 of these codes; the rest (B, J, O, U, X, Z) are passed on unchanged.
// Any other character is a separator: is_residue_o is 0 and the code is 0.
// Separators end the current peptide; the automata return to their root.
//
// The paper states that peptides are encoded in hardware; the letter-minus-'A'
// code and the separator convention are this design's own.
//
// Purely combinational; no clock.
module aa_encoder
  import pi_pkg::*;
(
  input  logic [7:0]        ascii_i,
  output logic [CODE_W-1:0] code_o,
  output logic              is_residue_o
);

  logic [7:0] upper;

  always_comb begin
    // Fold lower case onto upper case.
    upper = (ascii_i >= 8'h61 && ascii_i <= 8'h7A) ? ascii_i - 8'h20 : ascii_i;
    is_residue_o = (upper >= 8'h41 && upper <= 8'h5A);
    code_o       = is_residue_o ? CODE_W'(upper - 8'h41) : '0;
  end

endmodule
