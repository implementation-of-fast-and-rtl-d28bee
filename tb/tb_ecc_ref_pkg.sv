// tb_ecc_ref_pkg -- reference model of the (23,16) code for the testbenches.
//
// Written independently of the RTL: it knows only the parity-check matrix H
// (copied row by row from the published matrix) and which codeword positions
// hold check bits. Encoding is done by brute force: the 16 information bits are
// placed at the non-check positions and the 128 possible check-bit values are
// tried until H * c^T = 0. Decoding references are built from the error
// pattern the testbench injected, never from the RTL's own tables.
package tb_ecc_ref_pkg;

  typedef logic [1:16] ref_data_t;
  typedef logic [1:23] ref_cw_t;
  typedef logic [1:7]  ref_syn_t;

  localparam ref_cw_t REF_H [1:7] = '{
    23'b00000101101010100000111,
    23'b01011010000001010000111,
    23'b01010000010110101010000,
    23'b10001000100010001000100,
    23'b01000100010001000100010,
    23'b00100010001000100010001,
    23'b00010001000100010001000
  };

  // positions of p_b1..p_b7 in the codeword
  localparam int REF_PPOS [1:7] = '{1, 3, 9, 14, 18, 19, 20};

  // Loop bounds kept in variables so that the simulator runs the reference
  // loops as loops instead of unrolling them (keeps the testbench build fast).
  int ref_n = 23;
  int ref_r = 7;
  int ref_tries = 128;

  function automatic bit is_check_pos(int c);
    for (int k = 1; k <= ref_r; k++) if (REF_PPOS[k] == c) return 1'b1;
    return 1'b0;
  endfunction

  function automatic ref_syn_t ref_syndrome(ref_cw_t cw);
    ref_syn_t s;
    for (int r = 1; r <= ref_r; r++) begin
      s[r] = 1'b0;
      for (int c = 1; c <= ref_n; c++) s[r] ^= REF_H[r][c] & cw[c];
    end
    return s;
  endfunction

  // information bits of a codeword, in order of position
  function automatic ref_data_t ref_extract(ref_cw_t cw);
    ref_data_t d;
    int k = 1;
    for (int c = 1; c <= ref_n; c++)
      if (!is_check_pos(c)) begin
        d[k] = cw[c];
        k++;
      end
    return d;
  endfunction

  function automatic ref_cw_t ref_encode(ref_data_t d);
    ref_cw_t cw = '0;
    int k = 1;
    for (int c = 1; c <= ref_n; c++)
      if (!is_check_pos(c)) begin
        cw[c] = d[k];
        k++;
      end
    for (int pv = 0; pv < ref_tries; pv++) begin
      for (int j = 1; j <= ref_r; j++) cw[REF_PPOS[j]] = pv[7-j];
      if (ref_syndrome(cw) == '0) return cw;
    end
    $fatal(1, "reference encoder found no codeword");
    return cw;
  endfunction

  // error vector: LEN adjacent bits starting at FIRST
  function automatic ref_cw_t burst(int first, int len);
    ref_cw_t e = '0;
    for (int c = first; c < first + len; c++) e[c] = 1'b1;
    return e;
  endfunction

endpackage
