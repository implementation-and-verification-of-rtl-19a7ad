// bch_syndrome: syndrome calculation of the (26,16) shortened BCH decoder.
//
// The parity-check matrix of the systematic code is H = [P I], so the syndrome S^T = H.B^T is
// the parity recomputed from the received data bits XOR the received parity bits. The
// recomputation uses the same ten XOR trees as the encoder, which is how the source publication
// describes this block ("similar with the parity-check bits calculation"). The syndrome is zero
// for a clean word and nonzero for any pattern of one to four upsets.
//
// Interface: rd_data[25:0] in ({D15..D0, P9..P0}), syn[9:0] out. Purely combinational.
module bch_syndrome
  import ecc_pkg::*;
(
  input  bch_cw_t  rd_data,
  output bch_syn_t syn
);

  bch_syn_t recomputed;
  bch_cw_t  unused_cw;

  bch_encoder u_parity (
    .data_in (rd_data[BCH_N-1:BCH_R]),
    .check   (recomputed),
    .wr_data (unused_cw)
  );

  assign syn = recomputed ^ rd_data[BCH_R-1:0];

endmodule
