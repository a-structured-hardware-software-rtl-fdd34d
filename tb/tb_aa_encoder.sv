// tb_aa_encoder: exhaustive check of the residue encoder.
//
// All 256 character values are applied. Expected: upper and lower case
// letters give their position in the alphabet (A = 0) and is_residue = 1;
// every other character gives is_residue = 0 and code 0.
module tb_aa_encoder;
  import pi_pkg::*;

  logic [7:0]        ascii;
  logic [CODE_W-1:0] code;
  logic              is_res;
  int checks = 0, failures = 0;

  aa_encoder dut (.ascii_i(ascii), .code_o(code), .is_residue_o(is_res));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      int exp_code;
      bit exp_res;
      ascii = 8'(i);
      #1;
      if (i >= 65 && i <= 90)       begin exp_res = 1; exp_code = i - 65; end
      else if (i >= 97 && i <= 122) begin exp_res = 1; exp_code = i - 97; end
      else                          begin exp_res = 0; exp_code = 0; end
      checks++;
      if (is_res !== exp_res || int'(code) != exp_code) begin
        failures++;
        $display("FAIL char %0d: code %0d res %0b, expected %0d %0b", i, code, is_res, exp_code, exp_res);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
