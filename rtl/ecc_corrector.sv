// ecc_corrector -- error correction logic of the (23,16) SEC-DAEC / SEC-DAEC-TAEC code.
//
// For information bit i_bk sitting at codeword position c_j, the corrected bit
// i_bek is r_bj XOR "the syndrome equals the syndrome of a correctable error
// pattern that covers c_j". The correctable patterns covering c_j are
//   - the single error at c_j,
//   - the double adjacent errors (c_j-1,c_j) and (c_j,c_j+1),
//   - with TAEC=1 also the triple adjacent errors (c_j-2..c_j), (c_j-1..c_j+1)
//     and (c_j..c_j+2),
// dropping those that would run past c1 or c23. Each pattern test is a 7-input
// AND of syndrome bits, some inverted; the tests of one bit are ORed and the OR
// drives the XOR that flips the received bit. The pattern syndromes are computed
// from H at elaboration time.
//
// For i_b1 at c2 with TAEC=1 there are five patterns: five 7-input ANDs feeding
// an OR and an XOR, as in the published gate-level drawing. Only information
// bits are corrected; check bits are not needed after decoding.
//
// TAEC=1 gives the SEC-DAEC-TAEC decoder, TAEC=0 the SEC-DAEC decoder. Because
// all 66 single/double/triple syndromes are distinct, a triple adjacent error
// seen by the SEC-DAEC decoder matches no pattern and is passed through
// uncorrected rather than miscorrected.
//
// Interface: codeword_i (23 bits), syndrome_i (7 bits) in, data_o (16 bits,
// index k = i_bek) out. Purely combinational.
//
// The correctable classes and the AND-OR-XOR structure follow the published
// design. Writing each AND as an equality against a constant derived from H,
// correcting only information bits, and the TAEC parameter are choices of
// this implementation.
module ecc_corrector
  import ecc_pkg::*;
#(
  parameter bit TAEC = 1'b1  // 1: also correct triple adjacent errors
) (
  input  codeword_t codeword_i,
  input  syndrome_t syndrome_i,
  output data_t     data_o
);

  localparam int unsigned MAX_LEN = TAEC ? 3 : 2;

  for (genvar k = 1; k <= K; k++) begin : g_bit
    localparam int unsigned J = INFO_POS[k];
    // hit[len][o]: the burst of length len starting at J-o matches the syndrome
    logic [1:3][0:2] hit;

    for (genvar len = 1; len <= 3; len++) begin : g_len
      for (genvar o = 0; o <= 2; o++) begin : g_off
        if (len <= MAX_LEN && o < len && J > o && J - o + len - 1 <= N) begin : g_pat
          localparam syndrome_t S = burst_syndrome(J - o, len);
          assign hit[len][o] = (syndrome_i == S);
        end else begin : g_none
          assign hit[len][o] = 1'b0;
        end
      end
    end

    assign data_o[k] = codeword_i[J] ^ (|hit);
  end

endmodule
