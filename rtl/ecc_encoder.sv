// ecc_encoder -- encoder of the (23,16) SEC-DAEC / SEC-DAEC-TAEC code.
//
// Computes the seven check bits p_b1..p_b7 from the information bits i_b1..i_b16
// and places check and information bits at their codeword positions:
//   c1=p_b1 c2=i_b1 c3=p_b2 c4..c8=i_b2..i_b6 c9=p_b3 c10..c13=i_b7..i_b10
//   c14=p_b4 c15..c17=i_b11..i_b13 c18=p_b5 c19=p_b6 c20=p_b7 c21..c23=i_b14..i_b16
//
// The parity equations are the published ones. Three of them reuse an earlier
// check bit as a shared sub-expression instead of recomputing its terms:
// p_b1 reuses p_b3, p_b2 reuses p_b6 and p_b5 reuses p_b4. Writing the equations
// this way, rather than as one XOR per H row, is what makes this codec smaller.
//
// Interface: data_i (16 bits, index k = i_bk) in, codeword_o (23 bits, index
// k = c_k) out. Purely combinational, no clock: the codeword is valid one
// propagation delay after data_i changes. The code is systematic, so 16 of the
// 23 outputs are the information inputs wired straight through.
//
// The equations, the bit placement and the sharing follow the published
// (23,16) code. Leaving the XOR-tree shape to synthesis and having no
// register stage are choices of this implementation.
module ecc_encoder
  import ecc_pkg::*;
(
  input  data_t     data_i,
  output codeword_t codeword_o
);

  parity_t p;
  data_t   i;

  assign i = data_i;

  always_comb begin
    p[3] = i[4] ^ i[6] ^ i[8] ^ i[10] ^ i[11] ^ i[14] ^ i[15] ^ i[16];
    p[4] = i[1] ^ i[2] ^ i[3] ^ i[5] ^ i[12] ^ i[14] ^ i[15] ^ i[16];
    p[6] = i[1] ^ i[2] ^ i[7] ^ i[9] ^ i[10] ^ i[11] ^ i[13];
    p[7] = i[2] ^ i[6] ^ i[9] ^ i[12];
    p[1] = i[3] ^ i[10] ^ i[13] ^ i[14] ^ p[3];
    p[2] = i[5] ^ i[8] ^ i[11] ^ i[16] ^ p[6];
    p[5] = i[1] ^ i[4] ^ i[7] ^ i[15] ^ p[4];
  end

  always_comb begin
    codeword_o = '0;
    for (int unsigned k = 1; k <= K; k++) codeword_o[INFO_POS[k]] = i[k];
    for (int unsigned k = 1; k <= R; k++) codeword_o[PAR_POS[k]]  = p[k];
  end

endmodule
