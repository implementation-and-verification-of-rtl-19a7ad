// bch_error_pattern: syndrome to error-location lookup of the (26,16) shortened BCH decoder.
//
// The code corrects up to two upsets, so the 26 single-bit and 325 double-bit error patterns
// (351 in all) each have their own syndrome: h(p) for one upset at bit p and h(p)^h(q) for two,
// where h(p) = X^p mod g(X) is the column of H. The publication pre-computes these 351 values
// and checks the syndrome against each; this module does the same with one comparator per
// pattern, the constants being computed at elaboration time by ecc_pkg::BCH_COL. At most one
// comparator can match because the code's minimum distance is five. err_loc is all zeros for a
// zero syndrome and for any syndrome outside the 351 (three or more upsets).
//
// Interface: syn[9:0] in, err_loc[25:0] out. Purely combinational.
module bch_error_pattern
  import ecc_pkg::*;
(
  input  bch_syn_t syn,
  output bch_cw_t  err_loc
);

  always_comb begin
    err_loc = '0;
    for (int unsigned p = 0; p < BCH_N; p++) begin
      if (syn == BCH_COL[p]) err_loc[p] = 1'b1;
      for (int unsigned q = p + 1; q < BCH_N; q++)
        if (syn == (BCH_COL[p] ^ BCH_COL[q])) begin
          err_loc[p] = 1'b1;
          err_loc[q] = 1'b1;
        end
    end
  end

endmodule
