// ecc_see_top_beam_tb: a beam-test-like run of both lanes at the full memory depth.
// During one exposure, 600 random upset events hit distinct words of each lane's memory. Each
// event is a single-bit upset, or with probability 1/26 a two-bit upset of adjacent bits; the
// ratio follows the ~25:1 single-to-double event ratio seen in irradiation of unprotected
// RAM. Expected: the Hamming lane corrects every single upset and reports every double upset as
// detected, leaving bad data exactly where a double upset touched a data bit; the BCH lane
// corrects every event and leaves no bad word. Checks the per-pass counters and every report.
// The exposure is shortened to 20,000 cycles.
module ecc_see_top_beam_tb;
  localparam int DEPTH = 7424, AW = 13, WAIT = 20_000, EVENTS = 600;
  localparam logic [25:0] HAM_CLEAN = 26'h155557f;
  localparam logic [25:0] BCH_CLEAN = 26'h1555535;

  logic clk = 0, rst_n = 0, run = 0;
  logic ham_inj_en = 0, bch_inj_en = 0;
  logic [AW-1:0] ham_inj_addr = '0, bch_inj_addr = '0;
  logic [25:0]   ham_inj_mask = '0, bch_inj_mask = '0;
  logic          ham_rpt_valid, ham_rpt_err_flag, ham_rpt_corrected_flag, ham_rpt_mismatch;
  logic          bch_rpt_valid, bch_rpt_err_flag, bch_rpt_corrected_flag, bch_rpt_mismatch;
  logic [AW-1:0] ham_err_addr, bch_err_addr;
  logic [25:0]   ham_rpt_raw, ham_rpt_err_loc, bch_rpt_raw, bch_rpt_err_loc;
  logic [19:0]   ham_rpt_data;
  logic [15:0]   bch_rpt_data, ham_rpt_pass, bch_rpt_pass;
  logic [47:0]   ham_rpt_time, bch_rpt_time;
  logic          ham_pass_done, bch_pass_done, busy;
  logic [AW:0]   ham_cnt_flagged, ham_cnt_corrected, ham_cnt_bad;
  logic [AW:0]   bch_cnt_flagged, bch_cnt_corrected, bch_cnt_bad;

  ecc_see_top #(.DEPTH(DEPTH), .WAIT_CYCLES(WAIT)) dut (.*);

  always #50 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [25:0] ham_hit [int];
  logic [25:0] bch_hit [int];
  int n_single = 0, n_double = 0, exp_ham_bad = 0, n_ham_rpt = 0, n_bch_rpt = 0;
  bit done = 0;

  task automatic check_reports();
    if (ham_rpt_valid) begin
      n_ham_rpt++;
      if (!ham_hit.exists(int'(ham_err_addr))) chk(0, "Hamming report at an address never hit");
      else begin
        logic [25:0] m = ham_hit[int'(ham_err_addr)];
        chk(ham_rpt_raw == (HAM_CLEAN ^ m), "Hamming raw word");
        if ($countones(m) == 1)
          chk(ham_rpt_corrected_flag && !ham_rpt_mismatch && ham_rpt_err_loc == m,
              "Hamming single corrected");
        else
          chk(ham_rpt_err_flag && !ham_rpt_corrected_flag && ham_rpt_mismatch == (m[25:6] != 0),
              "Hamming double detected");
      end
    end
    if (bch_rpt_valid) begin
      n_bch_rpt++;
      if (!bch_hit.exists(int'(bch_err_addr))) chk(0, "BCH report at an address never hit");
      else begin
        logic [25:0] m = bch_hit[int'(bch_err_addr)];
        chk(bch_rpt_raw == (BCH_CLEAN ^ m) && bch_rpt_err_loc == m && !bch_rpt_mismatch
            && bch_rpt_err_flag, "BCH event corrected");
      end
    end
    if (ham_pass_done) begin
      chk(int'(ham_cnt_flagged) == EVENTS, "Hamming flagged count");
      chk(int'(ham_cnt_corrected) == n_single, "Hamming corrected count");
      chk(int'(ham_cnt_bad) == exp_ham_bad, "Hamming bad-word count");
      chk(int'(bch_cnt_flagged) == EVENTS, "BCH flagged count");
      chk(int'(bch_cnt_corrected) == EVENTS, "BCH corrected count");
      chk(bch_cnt_bad == 0, "BCH leaves no bad word");
      $display("events=%0d single=%0d double=%0d hamming_bad=%0d bch_bad=%0d",
               EVENTS, n_single, n_double, ham_cnt_bad, bch_cnt_bad);
      done = 1;
    end
  endtask

  always @(posedge clk)
    if (rst_n && (ham_rpt_valid || bch_rpt_valid || ham_pass_done)) check_reports();

  initial begin
    #(64'd100 * (2 * DEPTH + WAIT + 5000));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, b, bit0;
    logic [25:0] m;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run = 1;
    @(negedge clk);
    run = 0;  // one pass only
    repeat (DEPTH + 5) @(negedge clk);
    for (int e = 0; e < EVENTS; e++) begin
      do a = $urandom_range(DEPTH - 1); while (ham_hit.exists(a));
      do b = $urandom_range(DEPTH - 1); while (bch_hit.exists(b));
      if ($urandom_range(25) == 0) begin
        bit0 = $urandom_range(24);
        m = 26'(3) << bit0;
        n_double++;
      end else begin
        m = 26'(1) << $urandom_range(25);
        n_single++;
      end
      ham_hit[a] = m;
      bch_hit[b] = m;
      if ($countones(m) == 2 && m[25:6] != 0) exp_ham_bad++;
      ham_inj_en = 1; ham_inj_addr = AW'(a); ham_inj_mask = m;
      bch_inj_en = 1; bch_inj_addr = AW'(b); bch_inj_mask = m;
      @(negedge clk);
    end
    ham_inj_en = 0; bch_inj_en = 0;
    wait (done);
    repeat (3) @(negedge clk);
    chk(n_ham_rpt == EVENTS && n_bch_rpt == EVENTS, "one report per hit word");
    chk(n_double > 0, "at least one double upset occurred");
    chk(!busy, "idle after the pass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
