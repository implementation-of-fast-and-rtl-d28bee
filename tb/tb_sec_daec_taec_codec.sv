// tb_sec_daec_taec_codec -- end-to-end testbench of the (23,16) SEC-DAEC-TAEC codec.
//
// The codec is used as it would sit in front of a memory: words are encoded on
// the write path and stored in a 64-entry codeword array modelled here; soft
// errors are then injected into the stored codewords (as radiation upsets
// would flip cells); finally every word is read back through the decoder and
// compared with what was written.
//
// Runs with the codec's default parameters (TAEC=1). Covered:
//   - the published worked example (all-ones word, upsets on i_b2..i_b4);
//   - clean reads, single upsets, double and triple adjacent upsets,
//     upsets that hit only check bits and upsets that span check and
//     information bits, each counted; a mechanism never seen is a failure;
//   - a sweep of every burst position for every memory word.
// The write codeword is checked against the reference encoder, the syndrome
// against H * e^T for the injected error e.
module tb_sec_daec_taec_codec;
  import tb_ecc_ref_pkg::*;

  localparam int DEPTH = 64;

  logic [1:16] wr_data, rd_data;
  logic [1:23] wr_cw, rd_cw;
  logic [1:7]  rd_syn;

  logic [1:23] mem      [DEPTH];  // memory array holding codewords
  logic [1:16] golden   [DEPTH];  // what was written
  logic [1:23] err_vec  [DEPTH];  // soft errors injected per word

  int checks = 0, failures = 0;
  int n_clean = 0, n_single = 0, n_double = 0, n_triple = 0;
  int n_check_only = 0, n_mixed = 0, n_example = 0;

  sec_daec_taec_codec dut (
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
        $display("FAIL %s wr=%b cw=%b rd=%b syn=%b", what, wr_data, rd_cw, rd_data, rd_syn);
    end
  endtask

  task automatic write_word(int addr, logic [1:16] d);
    wr_data = d;
    #1;
    check(wr_cw == ref_encode(d), "write codeword");
    mem[addr]    = wr_cw;
    golden[addr] = d;
  endtask

  // read a word, check it, and classify the error it carried
  task automatic read_word(int addr);
    logic [1:23] e;
    int w, first, last;
    bit on_info, on_check;
    rd_cw = mem[addr];
    #1;
    e = err_vec[addr];
    check(rd_syn == ref_syndrome(e), "syndrome");
    check(rd_data == golden[addr], "corrected data");
    w = $countones(e);
    on_info = 1'b0;
    on_check = 1'b0;
    first = 0;
    last = 0;
    for (int c = 1; c <= 23; c++)
      if (e[c]) begin
        if (first == 0) first = c;
        last = c;
        if (is_check_pos(c)) on_check = 1'b1;
        else on_info = 1'b1;
      end
    case (w)
      0: n_clean++;
      1: n_single++;
      2: n_double++;
      3: n_triple++;
      default: ;
    endcase
    if (w > 0) check(last - first + 1 == w, "injected error is a single burst");
    if (on_check && !on_info) n_check_only++;
    if (on_check && on_info) n_mixed++;
  endtask

  initial begin
    // --- published worked example ---
    write_word(0, 16'hFFFF);
    check(mem[0] == 23'b01111111011110111010111, "example codeword");
    err_vec[0] = burst(4, 3);                   // i_b2, i_b3, i_b4
    mem[0]     = mem[0] ^ err_vec[0];
    check(mem[0] == 23'b01100011011110111010111, "example received word");
    read_word(0);
    check(rd_syn == 7'b1011101, "example syndrome");
    if (rd_data == 16'hFFFF) n_example++;

    // --- random traffic with random upsets ---
    for (int pass = 0; pass < 20; pass++) begin
      for (int a = 0; a < DEPTH; a++) begin
        int len, first;
        write_word(a, 16'($urandom()));
        len = $urandom_range(0, 3);
        first = $urandom_range(1, 24 - ((len == 0) ? 1 : len));
        err_vec[a] = (len == 0) ? '0 : burst(first, len);
        mem[a] = mem[a] ^ err_vec[a];
      end
      for (int a = 0; a < DEPTH; a++) read_word(a);
    end

    // --- every burst position on every word ---
    for (int len = 1; len <= 3; len++)
      for (int first = 1; first + len - 1 <= 23; first++) begin
        for (int a = 0; a < DEPTH; a++) begin
          write_word(a, 16'($urandom()));
          err_vec[a] = burst(first, len);
          mem[a] = mem[a] ^ err_vec[a];
        end
        for (int a = 0; a < DEPTH; a++) read_word(a);
      end

    $display("mechanisms: clean=%0d single=%0d double=%0d triple=%0d check_only=%0d mixed=%0d example=%0d",
             n_clean, n_single, n_double, n_triple, n_check_only, n_mixed, n_example);
    check(n_clean > 0, "clean read seen");
    check(n_single > 0, "single upset corrected");
    check(n_double > 0, "double adjacent upset corrected");
    check(n_triple > 0, "triple adjacent upset corrected");
    check(n_check_only > 0, "upset on check bits only seen");
    check(n_mixed > 0, "upset spanning check and data bits seen");
    check(n_example == 1, "worked example reproduced");

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
