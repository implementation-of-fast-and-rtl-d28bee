// sec_daec_taec_codec -- (23,16) SEC-DAEC-TAEC memory codec (SEC-DAEC with TAEC=0).
//
// Sits between a memory user and a memory array that stores 23-bit codewords.
// On the write side the encoder turns a 16-bit word into a codeword; on the read
// side the decoder computes the syndrome of the codeword read back and corrects
// any single error, any double adjacent error and (TAEC=1) any triple adjacent
// error, such as a multiple-cell upset hitting neighbouring cells.
//
// The memory itself is not part of this module: its write and read codewords
// are ports, so the codec can be put in front of any array. Write and read
// paths are independent combinational paths with no clock and no state, the
// form in which the codec's delay is usually quoted. The encoder-memory-decoder
// chain follows the published codec; leaving the memory outside and adding no
// clock or handshake are choices of this implementation.
//
// Interface:
//   wr_data_i     16  word to store                     -> wr_codeword_o 23
//   rd_codeword_i 23  codeword read from memory         -> rd_data_o     16
//                                                          rd_syndrome_o  7
module sec_daec_taec_codec
  import ecc_pkg::*;
#(
  parameter bit TAEC = 1'b1  // 1: SEC-DAEC-TAEC, 0: SEC-DAEC
) (
  input  data_t     wr_data_i,
  output codeword_t wr_codeword_o,
  input  codeword_t rd_codeword_i,
  output data_t     rd_data_o,
  output syndrome_t rd_syndrome_o
);

  ecc_encoder u_encoder (
    .data_i     (wr_data_i),
    .codeword_o (wr_codeword_o)
  );

  ecc_decoder #(.TAEC(TAEC)) u_decoder (
    .codeword_i (rd_codeword_i),
    .data_o     (rd_data_o),
    .syndrome_o (rd_syndrome_o)
  );

endmodule
