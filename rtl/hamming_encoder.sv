// hamming_encoder: (26,20) shortened Hamming (Hsiao, SECDED) encoder.
//
// Computes the six parity bits P5..P0 of a 20-bit data word with XOR trees and appends them
// below the data to form the codeword {D19..D0, P5..P0} that is written into the memory.
// Each parity bit is the XOR of the ten data bits whose syndrome-table column has a one in that
// row, which is the parity-check equation set H.A^T = 0 of the source publication (Eq. (3)).
// The equations are copied from that publication; the port names follow its block diagram.
//
// Interface: data_in[19:0] in, check[5:0] (parity) and wr_data[25:0] (codeword) out.
// Timing: purely combinational, no clock; wr_data is valid in the same cycle as data_in.
module hamming_encoder
  import ecc_pkg::*;
(
  input  ham_data_t data_in,
  output ham_syn_t  check,
  output ham_cw_t   wr_data
);

  ham_data_t d;
  assign d = data_in;

  always_comb begin
    check[5] = d[19] ^ d[18] ^ d[17] ^ d[15] ^ d[14] ^ d[12] ^ d[9] ^ d[8] ^ d[6] ^ d[3];
    check[4] = d[19] ^ d[18] ^ d[16] ^ d[15] ^ d[13] ^ d[11] ^ d[9] ^ d[7] ^ d[5] ^ d[2];
    check[3] = d[19] ^ d[17] ^ d[16] ^ d[14] ^ d[13] ^ d[10] ^ d[8] ^ d[7] ^ d[4] ^ d[1];
    check[2] = d[18] ^ d[17] ^ d[16] ^ d[12] ^ d[11] ^ d[10] ^ d[6] ^ d[5] ^ d[4] ^ d[0];
    check[1] = d[15] ^ d[14] ^ d[13] ^ d[12] ^ d[11] ^ d[10] ^ d[3] ^ d[2] ^ d[1] ^ d[0];
    check[0] = d[9]  ^ d[8]  ^ d[7]  ^ d[6]  ^ d[5]  ^ d[4]  ^ d[3] ^ d[2] ^ d[1] ^ d[0];
  end

  assign wr_data = {data_in, check};

endmodule
