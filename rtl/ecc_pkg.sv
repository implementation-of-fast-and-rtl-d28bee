// ecc_pkg -- shared types and constants of the (23,16) SEC-DAEC / SEC-DAEC-TAEC code.
//
// The code protects a 16-bit information word with 7 check bits. Its 7x23
// parity-check matrix H is chosen so that every single-bit error, every error on
// two adjacent codeword bits and every error on three adjacent codeword bits
// gives a distinct, non-zero syndrome (66 distinct syndromes out of 127).
//
// Bit numbering follows the published code: vectors use ascending ranges so that
// index k of a vector is the bit with subscript k (data_t[k] = i_bk,
// codeword_t[k] = c_k = r_bk, syndrome_t[k] = s_bk). Printing a vector with %b
// therefore lists bit 1 first, as the codewords are written out in the text.
//
// The H-matrix rows, the placement of parity and information bits in the
// codeword and the row-to-syndrome order are those of the published (23,16)
// matrix. The helper functions are elaboration-time only: they turn H into the
// syndrome constants the decoder compares against.
package ecc_pkg;

  localparam int unsigned K = 16;  // information bits
  localparam int unsigned N = 23;  // codeword bits
  localparam int unsigned R = 7;   // check bits = syndrome bits

  typedef logic [1:K] data_t;
  typedef logic [1:N] codeword_t;
  typedef logic [1:R] syndrome_t;
  typedef logic [1:R] parity_t;

  // Rows of H, top to bottom; row k produces syndrome bit s_bk.
  // Row k checks the parity bit noted on the right.
  localparam codeword_t H_ROW [1:R] = '{
    23'b00000101101010100000111,  // p_b3
    23'b01011010000001010000111,  // p_b4
    23'b01010000010110101010000,  // p_b6
    23'b10001000100010001000100,  // p_b1
    23'b01000100010001000100010,  // p_b5
    23'b00100010001000100010001,  // p_b2
    23'b00010001000100010001000   // p_b7
  };

  // Codeword position of each information bit i_bk.
  localparam int unsigned INFO_POS [1:K] = '{
    2, 4, 5, 6, 7, 8, 10, 11, 12, 13, 15, 16, 17, 21, 22, 23
  };

  // Codeword position of each parity bit p_bk.
  localparam int unsigned PAR_POS [1:R] = '{1, 3, 9, 14, 18, 19, 20};

  // Column c of H as a syndrome value: the syndrome of a single error at c.
  function automatic syndrome_t h_column(input int unsigned c);
    syndrome_t s;
    for (int unsigned k = 1; k <= R; k++) s[k] = H_ROW[k][c];
    return s;
  endfunction

  // Syndrome of a burst of LEN adjacent errors starting at codeword bit FIRST.
  function automatic syndrome_t burst_syndrome(input int unsigned first,
                                               input int unsigned len);
    syndrome_t s = '0;
    for (int unsigned c = first; c < first + len; c++) s ^= h_column(c);
    return s;
  endfunction

endpackage
