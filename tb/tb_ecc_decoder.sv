// tb_ecc_decoder -- self-checking testbench of ecc_decoder (TAEC=1 and TAEC=0).
//
// 1. The published worked example: codeword 01100011011110111010111 decodes to
//    the all-ones information word with syndrome 1011101.
// 2. For random data words encoded by the reference, every single, double
//    adjacent and triple adjacent error is injected; the syndrome output must
//    equal H * e^T and the data output must be the original word (TAEC=1), or
//    for triples with TAEC=0 the received information bits.
module tb_ecc_decoder;
  import tb_ecc_ref_pkg::*;

  logic [1:23] cw;
  logic [1:16] d_taec, d_daec;
  logic [1:7]  s_taec, s_daec;
  int checks = 0, failures = 0;

  ecc_decoder #(.TAEC(1'b1)) dut_taec (.codeword_i(cw), .data_o(d_taec), .syndrome_o(s_taec));
  ecc_decoder #(.TAEC(1'b0)) dut_daec (.codeword_i(cw), .data_o(d_daec), .syndrome_o(s_daec));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s cw=%b s=%b taec=%b daec=%b", what, cw, s_taec, d_taec, d_daec);
    end
  endtask

  initial begin
    logic [1:16] d;
    logic [1:23] good, e;
    cw = 23'b01100011011110111010111;
    #1;
    check(s_taec == 7'b1011101, "worked example syndrome");
    check(d_taec == 16'hFFFF, "worked example corrected data");

    for (int n = 0; n < 60; n++) begin
      d    = 16'($urandom());
      good = ref_encode(d);
      cw = good;
      #1;
      check(s_taec == '0 && d_taec == d && d_daec == d, "clean codeword");
      for (int len = 1; len <= 3; len++)
        for (int first = 1; first + len - 1 <= 23; first++) begin
          e  = burst(first, len);
          cw = good ^ e;
          #1;
          check(s_taec == ref_syndrome(e) && s_daec == s_taec, "syndrome of burst");
          check(d_taec == d, "TAEC decoder corrects");
          if (len < 3) check(d_daec == d, "DAEC decoder corrects");
          else         check(d_daec == ref_extract(cw), "DAEC decoder leaves triple");
        end
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
