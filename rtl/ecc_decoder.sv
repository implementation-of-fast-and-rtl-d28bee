// ecc_decoder -- decoder of the (23,16) SEC-DAEC / SEC-DAEC-TAEC code.
//
// Syndrome generator followed by the error correction logic. The syndrome of
// the received codeword is decoded against every correctable error pattern and
// the affected information bits are flipped. Zero syndrome: data passes
// unchanged. A non-zero syndrome that matches no correctable pattern (an error
// beyond the code's reach) also leaves the data unchanged; the syndrome output
// lets the surrounding system see that something was wrong.
//
// TAEC=1 is the SEC-DAEC-TAEC decoder, TAEC=0 the SEC-DAEC decoder; both use
// the same H-matrix.
//
// Interface: codeword_i (23 bits, r_b1..r_b23) in; data_o (16 bits, corrected
// i_b1..i_b16) and syndrome_o (7 bits, s_b1..s_b7) out. Purely combinational.
// The syndrome-then-correct structure is the published one; exposing the
// syndrome as an output is a choice of this implementation.
module ecc_decoder
  import ecc_pkg::*;
#(
  parameter bit TAEC = 1'b1
) (
  input  codeword_t codeword_i,
  output data_t     data_o,
  output syndrome_t syndrome_o
);

  ecc_syndrome_gen u_syndrome (
    .codeword_i (codeword_i),
    .syndrome_o (syndrome_o)
  );

  ecc_corrector #(.TAEC(TAEC)) u_corrector (
    .codeword_i (codeword_i),
    .syndrome_i (syndrome_o),
    .data_o     (data_o)
  );

endmodule
