// ecc_see_top_bench: end-to-end test of both ECC lanes under an SEE test run, shared by
// ecc_see_top_tb (64 words, 200-cycle exposure, two passes) and ecc_see_top_fulldepth_tb
// (7424 words, 2e6-cycle exposure, one pass). During the exposure of the first pass, upsets are injected
// into both memories: single upsets, double upsets and triple upsets confined to data bits.
// Expected, per the two codes: the Hamming lane corrects single upsets (err_flag and
// corrected_flag high, corrected data equal to the checkerboard) and only detects double ones
// (err_flag high, corrected_flag low, word passed through); the BCH lane corrects both single
// and double upsets; a triple upset is reported as a bad word by both lanes. The second pass
// rewrites the pattern and must report nothing; run is then dropped and the design must idle.
// Every report is compared with the injected mask (raw codeword = clean codeword ^ mask,
// err_loc = mask when corrected). Each mechanism is counted and must occur at least once.
// With TWO_PASSES = 0 run is dropped as soon as the first pass starts and only one pass runs.
module ecc_see_top_bench #(
  parameter int unsigned DEPTH       = 64,
  parameter int unsigned WAIT_CYCLES = 200,
  parameter bit          TWO_PASSES  = 1'b1
);
  localparam int AW = $clog2(DEPTH);
  localparam logic [25:0] HAM_CLEAN = 26'h155557f;  // checkerboard codewords
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

  ecc_see_top #(.DEPTH(DEPTH), .WAIT_CYCLES(WAIT_CYCLES)) dut (.*);

  always #50 clk = ~clk;  // 10 MHz

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // injected upsets of the first pass: address -> mask
  logic [25:0] ham_inj [int];
  logic [25:0] bch_inj [int];
  int n_ham_single = 0, n_ham_double = 0, n_ham_bad = 0;
  int n_bch_single = 0, n_bch_double = 0, n_bch_bad = 0;
  int n_reports_pass1 = 0, n_passes = 0;

  task automatic check_ham();
    begin
      logic [25:0] m;
      if (ham_rpt_pass != 0 || !ham_inj.exists(int'(ham_err_addr))) begin
        n_reports_pass1++;
        chk(0, "unexpected Hamming report");
      end else begin
        m = ham_inj[int'(ham_err_addr)];
        chk(ham_rpt_raw == (HAM_CLEAN ^ m), "Hamming raw codeword");
        chk(ham_rpt_err_flag, "Hamming err_flag");
        case ($countones(m))
          1: begin
            n_ham_single++;
            chk(ham_rpt_corrected_flag && !ham_rpt_mismatch && ham_rpt_err_loc == m
                && ham_rpt_data == 20'h55555, "Hamming single upset corrected");
          end
          2: begin
            n_ham_double++;
            chk(!ham_rpt_corrected_flag && ham_rpt_mismatch == (m[25:6] != 0)
                && ham_rpt_err_loc == 0 && ham_rpt_data == (HAM_CLEAN[25:6] ^ m[25:6]),
                "Hamming double upset detected only");
          end
          default: begin
            n_ham_bad++;
            chk(ham_rpt_mismatch, "Hamming triple upset reported as bad data");
          end
        endcase
      end
    end
  endtask

  task automatic check_bch();
    begin
      logic [25:0] m;
      if (bch_rpt_pass != 0 || !bch_inj.exists(int'(bch_err_addr))) begin
        n_reports_pass1++;
        chk(0, "unexpected BCH report");
      end else begin
        m = bch_inj[int'(bch_err_addr)];
        chk(bch_rpt_raw == (BCH_CLEAN ^ m), "BCH raw codeword");
        chk(bch_rpt_err_flag, "BCH err_flag");
        case ($countones(m))
          1, 2: begin
            if ($countones(m) == 1) n_bch_single++; else n_bch_double++;
            chk(bch_rpt_corrected_flag && !bch_rpt_mismatch && bch_rpt_err_loc == m
                && bch_rpt_data == 16'h5555, "BCH single/double upset corrected");
          end
          default: begin
            n_bch_bad++;
            chk(bch_rpt_mismatch, "BCH triple upset reported as bad data");
          end
        endcase
      end
    end
  endtask

  task automatic check_pass();
    begin
      n_passes++;
      if (n_passes == 1) begin
        chk(ham_cnt_flagged == 5 && ham_cnt_corrected == 2 && ham_cnt_bad == 2,
            "Hamming pass counters");
        chk(bch_cnt_flagged == 5 && bch_cnt_corrected == 4 && bch_cnt_bad == 1,
            "BCH pass counters");
      end else begin
        chk(ham_cnt_flagged == 0 && bch_cnt_flagged == 0 && ham_cnt_bad == 0 && bch_cnt_bad == 0,
            "clean second pass");
      end
    end
  endtask

  // The checks are woken by the report time stamps (new in every report) and by pass_done, not
  // by every clock edge, which keeps the long exposure phase fast to simulate.
  always @(ham_rpt_time) if (rst_n && ham_rpt_valid) check_ham();
  always @(bch_rpt_time) if (rst_n && bch_rpt_valid) check_bch();
  always @(posedge ham_pass_done) if (rst_n) check_pass();

  task automatic inject(input bit bch, input int a, input logic [25:0] m);
    @(negedge clk);
    if (bch) begin bch_inj_en = 1; bch_inj_addr = AW'(a); bch_inj_mask = m; bch_inj[a] = m; end
    else     begin ham_inj_en = 1; ham_inj_addr = AW'(a); ham_inj_mask = m; ham_inj[a] = m; end
    @(negedge clk);
    ham_inj_en = 0; bch_inj_en = 0;
  endtask

  // watchdog: one pass is about 2*DEPTH + WAIT_CYCLES cycles
  initial begin
    longint limit = 3 * (2 * longint'(DEPTH) + longint'(WAIT_CYCLES)) + 1000;
    #(limit * 100);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy, "idle after reset");
    run = 1;
    // the write phase takes DEPTH cycles; inject during the exposure interval
    @(negedge clk);
    if (!TWO_PASSES) run = 0;
    repeat (DEPTH + 5) @(negedge clk);
    inject(0, 0,         26'h0000001);             // single, parity bit P0
    inject(0, 3,         26'h2000000);             // single, data bit D19
    inject(0, 7,         26'h0000003);             // double, parity bits only
    inject(0, 9,         26'h0001040);             // double, data bits
    inject(0, DEPTH - 1, 26'h0070000);             // triple, data bits
    inject(1, 0,         26'h0000001);             // single
    inject(1, 3,         26'h0000003);             // double (published example)
    inject(1, 7,         26'h2000400);             // double, D15 and D0
    inject(1, 9,         26'h0100000);             // single, data
    inject(1, DEPTH - 1, 26'h1c00000);             // triple, data bits
    while (n_passes < 1) @(negedge ham_pass_done);
    if (TWO_PASSES) begin
      run = 0;  // the second pass has begun and is the last one
      while (n_passes < 2) @(negedge ham_pass_done);
    end
    repeat (5) @(negedge clk);
    chk(!busy, "idle after run dropped");
    chk(n_ham_single == 2, "Hamming single upsets reported");
    chk(n_ham_double == 2, "Hamming double upsets reported");
    chk(n_ham_bad    == 1, "Hamming triple upset reported");
    chk(n_bch_single == 2, "BCH single upsets reported");
    chk(n_bch_double == 2, "BCH double upsets reported");
    chk(n_bch_bad    == 1, "BCH triple upset reported");
    chk(n_reports_pass1 == 0, "no reports after rewrite");
    chk(n_passes == (TWO_PASSES ? 2 : 1), "number of passes");
    $display("mechanisms: ham_single=%0d ham_double_detect=%0d ham_bad=%0d bch_single=%0d bch_double_correct=%0d bch_bad=%0d passes=%0d",
             n_ham_single, n_ham_double, n_ham_bad, n_bch_single, n_bch_double, n_bch_bad, n_passes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
