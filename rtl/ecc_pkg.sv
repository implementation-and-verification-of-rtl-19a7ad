// ecc_pkg: code constants shared by the encoders, decoders, memory and test sequencer.
//
// Two 26-bit codes protect the same memory word width:
//   * (26,20) shortened Hamming / Hsiao SECDED code. Codeword A = {D19..D0, P5..P0}, so data bit
//     Di sits at codeword bit 6+i and parity bit Pj at bit j. The syndrome column of every data
//     bit is the one given in the code's syndrome table (Table 1 of the source publication);
//     parity bit Pj has the one-hot column 1<<j.
//   * (26,16) shortened BCH code, derived from the (31,21) double-error-correcting BCH code with
//     generator g(X) = X^10+X^9+X^8+X^6+X^5+X^3+1. Codeword B = {D15..D0, P9..P0}, so Di sits at
//     bit 10+i (the coefficient of X^(10+i)). The syndrome column of codeword bit p is
//     X^p mod g(X); for p < 10 this is the one-hot 1<<p, for data bits it is the parity pattern of
//     that bit, so H = [P I] as in a systematic code.
// The functions below compute these columns at elaboration time; no table file is read.
package ecc_pkg;

  // ---------------- shortened Hamming (26,20) ----------------
  localparam int unsigned HAM_N = 26;
  localparam int unsigned HAM_K = 20;
  localparam int unsigned HAM_R = HAM_N - HAM_K;  // 6

  typedef logic [HAM_K-1:0] ham_data_t;
  typedef logic [HAM_R-1:0] ham_syn_t;
  typedef logic [HAM_N-1:0] ham_cw_t;

  // Syndrome S5..S0 for an error on data bit Di, i = 0..19 (Table 1).
  localparam ham_syn_t HAM_DATA_COL [HAM_K] = '{
    6'b000111, 6'b001011, 6'b010011, 6'b100011, 6'b001101,   // D0  .. D4
    6'b010101, 6'b100101, 6'b011001, 6'b101001, 6'b110001,   // D5  .. D9
    6'b001110, 6'b010110, 6'b100110, 6'b011010, 6'b101010,   // D10 .. D14
    6'b110010, 6'b011100, 6'b101100, 6'b110100, 6'b111000    // D15 .. D19
  };

  // Syndrome column of codeword bit p (0..25).
  function automatic ham_syn_t ham_col(input int unsigned p);
    if (p < HAM_R) return ham_syn_t'(1) << p;
    else           return HAM_DATA_COL[p - HAM_R];
  endfunction

  // Syndrome of a 26-bit word: XOR of the columns of all set bits (Eq. (1)).
  function automatic ham_syn_t ham_syndrome(input ham_cw_t cw);
    ham_syn_t s = '0;
    for (int unsigned p = 0; p < HAM_N; p++)
      if (cw[p]) s ^= ham_col(p);
    return s;
  endfunction

  // Parity bits P5..P0 of 20 data bits (Eq. (3)): the syndrome of {d, 6'b0}.
  function automatic ham_syn_t ham_parity(input ham_data_t d);
    return ham_syndrome({d, {HAM_R{1'b0}}});
  endfunction

  // ---------------- shortened BCH (26,16) ----------------
  localparam int unsigned BCH_N = 26;
  localparam int unsigned BCH_K = 16;
  localparam int unsigned BCH_R = BCH_N - BCH_K;  // 10
  // g(X) = X^10+X^9+X^8+X^6+X^5+X^3+1 (Eq. (4)), bit i = coefficient of X^i.
  localparam logic [BCH_R:0] BCH_G = 11'b111_0110_1001;

  typedef logic [BCH_K-1:0] bch_data_t;
  typedef logic [BCH_R-1:0] bch_syn_t;
  typedef logic [BCH_N-1:0] bch_cw_t;

  // X^p mod g(X) for p = 0..25: the syndrome column of every codeword bit, each column being
  // the previous one multiplied by X and reduced modulo g(X).
  typedef bch_syn_t bch_cols_t [BCH_N];

  function automatic bch_cols_t bch_cols();
    bch_cols_t      c;
    logic [BCH_R:0] r = 11'b1;  // X^0
    for (int unsigned p = 0; p < BCH_N; p++) begin
      c[p] = r[BCH_R-1:0];
      r = r << 1;
      if (r[BCH_R]) r ^= BCH_G;
    end
    return c;
  endfunction

  localparam bch_cols_t BCH_COL = bch_cols();

  function automatic bch_syn_t bch_col(input int unsigned p);
    return BCH_COL[p];
  endfunction

  // Syndrome of a 26-bit word, S^T = H.B^T: equals B(X) mod g(X).
  function automatic bch_syn_t bch_syndrome(input bch_cw_t cw);
    bch_syn_t s = '0;
    for (int unsigned p = 0; p < BCH_N; p++)
      if (cw[p]) s ^= bch_col(p);
    return s;
  endfunction

  // Parity bits P9..P0 of 16 data bits: D(X).X^10 mod g(X), i.e. [D].G of Eq. (7).
  function automatic bch_syn_t bch_parity(input bch_data_t d);
    return bch_syndrome({d, {BCH_R{1'b0}}});
  endfunction

endpackage
