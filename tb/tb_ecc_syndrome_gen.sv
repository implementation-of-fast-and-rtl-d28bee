// tb_ecc_syndrome_gen -- self-checking testbench of ecc_syndrome_gen.
//
// 1. The published worked example: codeword 01100011011110111010111 (errors on
//    i_b2..i_b4) gives syndrome 1011101.
// 2. Each single-bit vector e_c gives column c of H.
// 3. 5000 random 23-bit words compared with the reference H * r^T.
module tb_ecc_syndrome_gen;
  import tb_ecc_ref_pkg::*;

  logic [1:23] cw;
  logic [1:7]  syn;
  int checks = 0, failures = 0;

  ecc_syndrome_gen dut (.codeword_i(cw), .syndrome_o(syn));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s cw=%b syn=%b", what, cw, syn);
    end
  endtask

  initial begin
    cw = 23'b01100011011110111010111;
    #1;
    check(syn == 7'b1011101, "worked example syndrome");

    cw = 23'b01111111011110111010111;
    #1;
    check(syn == 7'b0000000, "worked example clean codeword");

    for (int c = 1; c <= 23; c++) begin
      cw = '0;
      cw[c] = 1'b1;
      #1;
      check(syn == {REF_H[1][c], REF_H[2][c], REF_H[3][c], REF_H[4][c],
                    REF_H[5][c], REF_H[6][c], REF_H[7][c]}, "H column");
    end

    for (int n = 0; n < 5000; n++) begin
      cw = $urandom();
      #1;
      check(syn == ref_syndrome(cw), "random word");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
