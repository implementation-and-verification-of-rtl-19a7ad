// bch_decoder: single-cycle (26,16) shortened BCH decoder.
//
// Follows the decoder structure of the source publication's block diagram: the syndrome
// calculation (bch_syndrome), the error pattern lookup (bch_error_pattern), the error corrector
// that XORs the read codeword with the error location, and the error flag that ORs the ten
// syndrome bits. Multi-cycle algebraic decoders (Peterson, Berlekamp, Chien search) are avoided:
// every stage is combinational, so the corrected word is available in the cycle the codeword is
// read. One and two upsets are corrected and flagged; a word with more upsets raises err_flag
// with err_loc all zeros and is passed through uncorrected (or, rarely, miscorrected).
//
// Interface: rd_data[25:0] in; syn[9:0], err_loc[25:0], corrected_data[25:0] (codeword),
// data_out[15:0] and err_flag out. No clock.
module bch_decoder
  import ecc_pkg::*;
(
  input  bch_cw_t   rd_data,
  output bch_syn_t  syn,
  output bch_cw_t   err_loc,
  output bch_cw_t   corrected_data,
  output bch_data_t data_out,
  output logic      err_flag
);

  bch_syndrome u_syndrome (
    .rd_data (rd_data),
    .syn     (syn)
  );

  bch_error_pattern u_pattern (
    .syn     (syn),
    .err_loc (err_loc)
  );

  // Error corrector (XOR) and error flag (OR of the syndrome bits).
  assign corrected_data = rd_data ^ err_loc;
  assign data_out       = corrected_data[BCH_N-1:BCH_R];
  assign err_flag       = |syn;

endmodule
