// ecc_see_top_fulldepth_tb: one complete test pass of ecc_see_top with the default memory
// depth of 7424 words per lane and a shortened exposure of 2,000,000 cycles (0.2 s at 10 MHz)
// instead of 1.2e9. The stimulus and checks are in ecc_see_top_bench.
module ecc_see_top_fulldepth_tb;
  ecc_see_top_bench #(.DEPTH(7424), .WAIT_CYCLES(2_000_000),
                      .TWO_PASSES(1'b0)) bench ();
  // Backstop in case the bench's own watchdog never fires.
  initial begin
    #(64'd1_000_000_000);
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
