// bch_encoder: (26,16) shortened BCH encoder (double error correcting).
//
// Computes the ten parity bits P9..P0 of a 16-bit data word and appends them below the data to
// form the codeword {D15..D0, P9..P0}. The code is the (31,21) BCH code with generator
// g(X) = X^10+X^9+X^8+X^6+X^5+X^3+1, shortened by five data bits; systematic encoding gives the
// parity as D(X).X^10 mod g(X), which is the product of the data with the reduced generator
// matrix. Each parity bit is one XOR tree; the ten trees below are the ones drawn in the source
// publication's encoder schematic and were checked against the division by g(X).
//
// Interface: data_in[15:0] in, check[9:0] and wr_data[25:0] out (names from the publication's
// block diagram). Timing: purely combinational.
module bch_encoder
  import ecc_pkg::*;
(
  input  bch_data_t data_in,
  output bch_syn_t  check,
  output bch_cw_t   wr_data
);

  bch_data_t d;
  assign d = data_in;

  always_comb begin
    check[0] = d[0] ^ d[1] ^ d[3] ^ d[5] ^ d[7] ^ d[8] ^ d[9] ^ d[10] ^ d[13];
    check[1] = d[1] ^ d[2] ^ d[4] ^ d[6] ^ d[8] ^ d[9] ^ d[10] ^ d[11] ^ d[14];
    check[2] = d[2] ^ d[3] ^ d[5] ^ d[7] ^ d[9] ^ d[10] ^ d[11] ^ d[12] ^ d[15];
    check[3] = d[0] ^ d[1] ^ d[4] ^ d[5] ^ d[6] ^ d[7] ^ d[9] ^ d[11] ^ d[12];
    check[4] = d[1] ^ d[2] ^ d[5] ^ d[6] ^ d[7] ^ d[8] ^ d[10] ^ d[12] ^ d[13];
    check[5] = d[0] ^ d[1] ^ d[2] ^ d[5] ^ d[6] ^ d[10] ^ d[11] ^ d[14];
    check[6] = d[0] ^ d[2] ^ d[5] ^ d[6] ^ d[8] ^ d[9] ^ d[10] ^ d[11] ^ d[12] ^ d[13] ^ d[15];
    check[7] = d[1] ^ d[3] ^ d[6] ^ d[7] ^ d[9] ^ d[10] ^ d[11] ^ d[12] ^ d[13] ^ d[14];
    check[8] = d[0] ^ d[1] ^ d[2] ^ d[3] ^ d[4] ^ d[5] ^ d[9] ^ d[11] ^ d[12] ^ d[14] ^ d[15];
    check[9] = d[0] ^ d[2] ^ d[4] ^ d[6] ^ d[7] ^ d[8] ^ d[9] ^ d[12] ^ d[15];
  end

  assign wr_data = {data_in, check};

endmodule
