// bch_ref_pkg: reference model of the (26,16) shortened BCH code for the testbenches.
// Works by long division by g(X) = X^10+X^9+X^8+X^6+X^5+X^3+1, independently of the RTL's
// column functions and XOR trees.
package bch_ref_pkg;
  localparam logic [10:0] G = 11'h769;

  // Remainder of a 26-bit polynomial (bit i = coefficient of X^i) divided by g(X).
  function automatic logic [9:0] rem(input logic [25:0] v);
    logic [35:0] r = 36'(v);
    for (int b = 25; b >= 10; b--)
      if (r[b]) r ^= 36'(G) << (b - 10);
    return r[9:0];
  endfunction

  function automatic logic [25:0] encode(input logic [15:0] d);
    return {d, rem({d, 10'b0})};
  endfunction
endpackage
