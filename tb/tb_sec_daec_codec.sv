// tb_sec_daec_codec -- end-to-end testbench of the codec built as SEC-DAEC (TAEC=0).
//
// Same H-matrix and encoder as the SEC-DAEC-TAEC codec; only the correction
// logic differs. Words are encoded, stored in a 64-entry codeword array
// modelled here, hit by single, double adjacent and triple adjacent upsets and
// read back. Expected: single and double adjacent upsets are corrected; a triple
// adjacent upset gives a non-zero syndrome that matches no correctable pattern,
// so the information bits are delivered exactly as read (no miscorrection).
// Each of the three cases is counted; a case never seen is a failure.
module tb_sec_daec_codec;
  import tb_ecc_ref_pkg::*;

  localparam int DEPTH = 64;

  logic [1:16] wr_data, rd_data;
  logic [1:23] wr_cw, rd_cw;
  logic [1:7]  rd_syn;
  logic [1:23] mem    [DEPTH];
  logic [1:16] golden [DEPTH];
  logic [1:23] errv   [DEPTH];

  int checks = 0, failures = 0;
  int n_single = 0, n_double = 0, n_triple_passed = 0;

  sec_daec_taec_codec #(.TAEC(1'b0)) dut (
    .wr_data_i     (wr_data),
    .wr_codeword_o (wr_cw),
    .rd_codeword_i (rd_cw),
    .rd_data_o     (rd_data),
    .rd_syndrome_o (rd_syn)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10)
        $display("FAIL %s cw=%b rd=%b syn=%b", what, rd_cw, rd_data, rd_syn);
    end
  endtask

  initial begin
    for (int len = 1; len <= 3; len++)
      for (int first = 1; first + len - 1 <= 23; first++) begin
        for (int a = 0; a < DEPTH; a++) begin
          wr_data = 16'($urandom());
          #1;
          check(wr_cw == ref_encode(wr_data), "write codeword");
          golden[a] = wr_data;
          errv[a]   = burst(first, len);
          mem[a]    = wr_cw ^ errv[a];
        end
        for (int a = 0; a < DEPTH; a++) begin
          rd_cw = mem[a];
          #1;
          check(rd_syn == ref_syndrome(errv[a]) && rd_syn != '0, "syndrome");
          if (len < 3) begin
            check(rd_data == golden[a], "corrected data");
            if (len == 1) n_single++;
            else n_double++;
          end else begin
            check(rd_data == ref_extract(rd_cw), "triple passed through unchanged");
            n_triple_passed++;
          end
        end
      end
    $display("mechanisms: single=%0d double=%0d triple_uncorrected=%0d",
             n_single, n_double, n_triple_passed);
    check(n_single > 0 && n_double > 0 && n_triple_passed > 0, "all cases seen");
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
