// tb_ecc_encoder -- self-checking testbench of ecc_encoder.
//
// 1. The published worked example: all-ones information word gives check bits
//    0100010 and codeword 01111111011110111010111.
// 2. All 65536 information words: the codeword must satisfy H * c^T = 0 and
//    carry the information bits unchanged at the non-check positions.
// 3. 2000 random words compared bit for bit with the brute-force reference.
// The encoder is combinational; each vector is applied and sampled after #1.
module tb_ecc_encoder;
  import tb_ecc_ref_pkg::*;

  logic [1:16] data;
  logic [1:23] cw;
  int checks = 0, failures = 0;

  ecc_encoder dut (.data_i(data), .codeword_o(cw));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s data=%b cw=%b", what, data, cw);
    end
  endtask

  initial begin
    data = '1;
    #1;
    check(cw == 23'b01111111011110111010111, "worked example codeword");
    check({cw[1], cw[3], cw[9], cw[14], cw[18], cw[19], cw[20]} == 7'b0100010,
          "worked example check bits");

    for (int v = 0; v < 65536; v++) begin
      data = v[15:0];
      #1;
      check(ref_syndrome(cw) == '0 && ref_extract(cw) == data, "exhaustive codeword");
    end

    for (int n = 0; n < 2000; n++) begin
      data = $urandom();
      #1;
      check(cw == ref_encode(data), "random vs reference");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
