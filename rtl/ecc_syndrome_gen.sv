// ecc_syndrome_gen -- syndrome generator of the (23,16) SEC-DAEC / SEC-DAEC-TAEC code.
//
// Multiplies the codeword read from memory by the transpose of H: syndrome bit
// s_bk is the XOR of the received bits selected by row k of H. A valid codeword
// gives the zero syndrome; a single error at c_j gives column j of H; a burst of
// two or three adjacent errors gives the XOR of the columns it covers.
//
// Syndrome bit k belongs to H row k counted from the top of the published matrix
// (so the worked example with errors on i_b2..i_b4 gives s = 1011101). Each
// s_bk is a parity tree of 5 to 9 inputs.
//
// Interface: codeword_i (23 bits, index k = r_bk) in, syndrome_o (7 bits,
// index k = s_bk) out. Purely combinational.
//
// The function (s = H r^T) and the matrix follow the published code. The bit
// order of the syndrome follows its worked example. One published figure
// numbers s_b1..s_b7 after the check bit of each row instead; this only
// relabels the syndrome.
module ecc_syndrome_gen
  import ecc_pkg::*;
(
  input  codeword_t codeword_i,
  output syndrome_t syndrome_o
);

  always_comb begin
    for (int unsigned k = 1; k <= R; k++)
      syndrome_o[k] = ^(codeword_i & H_ROW[k]);
  end

endmodule
