// hamming_decoder: (26,20) shortened Hamming (Hsiao) SECDED decoder.
//
// Four stages, all combinational:
//   syndrome    syn = H.A^T, each bit the XOR of the codeword bits whose column has a one there;
//   pattern     err_loc has a one at the codeword bit whose column equals syn (the 26 entries
//               of the code's syndrome table), all zeros otherwise;
//   corrector   corrected_data = rd_data ^ err_loc;
//   flags       err_flag = OR of the syndrome bits; corrected_flag = a table entry matched.
// A single upset gives an odd-weight syndrome that matches exactly one column and is corrected.
// A double upset gives a nonzero even-weight syndrome, which matches no column: err_flag rises,
// corrected_flag stays low and the word passes through unchanged, as in the publication's
// simulation (raw 155557c -> corrected 155557c, err_loc 0).
// The publication says a single error is correctable "because the number of ones in the syndrome
// matrix S is odd"; the six weight-5 syndromes are odd too but match no column (three or more
// upsets). This design raises corrected_flag only when a column matched, so those words are
// reported as detected, not corrected.
//
// Interface: rd_data[25:0] in; syn[5:0], err_loc[25:0], corrected_data[25:0] (codeword),
// data_out[19:0] (corrected data bits), err_flag, corrected_flag out. No clock.
module hamming_decoder
  import ecc_pkg::*;
(
  input  ham_cw_t   rd_data,
  output ham_syn_t  syn,
  output ham_cw_t   err_loc,
  output ham_cw_t   corrected_data,
  output ham_data_t data_out,
  output logic      err_flag,
  output logic      corrected_flag
);

  // Syndrome calculation.
  always_comb begin
    syn = '0;
    for (int unsigned p = 0; p < HAM_N; p++)
      if (rd_data[p]) syn ^= ham_col(p);
  end

  // Error pattern: compare the syndrome with the column of every codeword bit.
  always_comb begin
    for (int unsigned p = 0; p < HAM_N; p++)
      err_loc[p] = (syn == ham_col(p));
  end

  // Error corrector and flags.
  assign corrected_data = rd_data ^ err_loc;
  assign data_out       = corrected_data[HAM_N-1:HAM_R];
  assign err_flag       = |syn;
  assign corrected_flag = |err_loc;

endmodule
