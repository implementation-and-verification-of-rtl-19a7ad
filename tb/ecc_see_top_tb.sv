// ecc_see_top_tb: end-to-end test of ecc_see_top at reduced size (64 words, 200-cycle
// exposure, two passes). The stimulus and checks are in ecc_see_top_bench.
module ecc_see_top_tb;
  ecc_see_top_bench #(.DEPTH(64), .WAIT_CYCLES(200), .TWO_PASSES(1'b1)) bench ();
endmodule
