// tb_ecc_corrector -- self-checking testbench of ecc_corrector.
//
// Two instances: TAEC=1 (SEC-DAEC-TAEC) and TAEC=0 (SEC-DAEC). For random valid
// codewords from the reference encoder every correctable burst is injected:
// 23 single, 22 double adjacent and 21 triple adjacent errors. The syndrome fed
// to the corrector comes from the reference model. Expected results:
//   - TAEC=1 returns the original data for all 66 bursts and for no error;
//   - TAEC=0 returns the original data for singles and doubles, and for a
//     triple burst returns the received (still erroneous) information bits,
//     i.e. it neither corrects nor miscorrects.
module tb_ecc_corrector;
  import tb_ecc_ref_pkg::*;

  logic [1:23] cw;
  logic [1:7]  syn;
  logic [1:16] d_taec, d_daec;
  int checks = 0, failures = 0;

  ecc_corrector #(.TAEC(1'b1)) dut_taec (.codeword_i(cw), .syndrome_i(syn), .data_o(d_taec));
  ecc_corrector #(.TAEC(1'b0)) dut_daec (.codeword_i(cw), .syndrome_i(syn), .data_o(d_daec));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s cw=%b syn=%b taec=%b daec=%b", what, cw, syn, d_taec, d_daec);
    end
  endtask

  initial begin
    logic [1:16] d;
    logic [1:23] good;
    for (int n = 0; n < 60; n++) begin
      d    = (n == 0) ? 16'hFFFF : 16'($urandom());
      good = ref_encode(d);
      cw = good;
      syn = ref_syndrome(cw);
      #1;
      check(d_taec == d && d_daec == d, "no error");
      for (int len = 1; len <= 3; len++)
        for (int first = 1; first + len - 1 <= 23; first++) begin
          cw  = good ^ burst(first, len);
          syn = ref_syndrome(cw);
          #1;
          check(d_taec == d, "TAEC corrects burst");
          if (len < 3) check(d_daec == d, "DAEC corrects burst");
          else         check(d_daec == ref_extract(cw), "DAEC leaves triple untouched");
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
