// see_tester_tb: self-checking test of the SEE test sequencer (DEPTH 16, WAIT_CYCLES 20).
// A memory and a stand-in decoder are modelled here: the memory holds the written data word,
// and the decoder reports err_flag for addresses listed in flag_mask and returns the stored
// data with bit 0 inverted for addresses listed in bad_mask. Checks: the write phase writes
// the checkerboard pattern to every address in order and takes DEPTH cycles; the wait lasts
// WAIT_CYCLES; the read phase reads every address in order; every flagged or bad word is
// reported with its address, flags and pass number two cycles after its read; the per-pass
// counters; pass_done; a second pass follows while run is high and the sequencer idles after
// run drops.
module see_tester_tb;
  localparam int K = 16, N = 26, DEPTH = 16, AW = 4, WAIT = 20;
  logic          clk = 0, rst_n = 0, run = 0;
  logic          mem_wr_en, mem_rd_en;
  logic [AW-1:0] mem_wr_addr, mem_rd_addr;
  logic [K-1:0]  data_in, dec_data;
  logic [N-1:0]  raw_data, err_loc;
  logic          err_flag, corrected_flag;
  logic          rpt_valid, rpt_err_flag, rpt_corrected_flag, rpt_mismatch, busy, pass_done;
  logic [AW-1:0] err_addr;
  logic [N-1:0]  rpt_raw, rpt_err_loc;
  logic [K-1:0]  rpt_data;
  logic [15:0]   rpt_pass;
  logic [47:0]   rpt_time;
  logic [AW:0]   cnt_flagged, cnt_corrected, cnt_bad;
  int checks = 0, failures = 0;

  see_tester #(.K(K), .N(N), .DEPTH(DEPTH), .WAIT_CYCLES(WAIT)) dut (.*);

  always #5 clk = ~clk;

  // memory + decoder model
  logic [K-1:0]     mem [DEPTH];
  logic [AW-1:0]    rd_q;
  logic [DEPTH-1:0] flag_mask = 16'b0000_0100_0010_0001;  // addresses 0, 5, 10
  logic [DEPTH-1:0] bad_mask  = 16'b1000_0000_0010_0000;  // addresses 5, 15
  always_ff @(posedge clk) begin
    if (mem_wr_en) mem[mem_wr_addr] <= data_in;
    if (mem_rd_en) rd_q <= mem_rd_addr;
  end
  assign dec_data       = mem[rd_q] ^ K'(bad_mask[rd_q]);
  assign raw_data       = {mem[rd_q], 10'h0};
  assign err_loc        = N'(flag_mask[rd_q]);
  assign err_flag       = flag_mask[rd_q];
  assign corrected_flag = flag_mask[rd_q];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // phase bookkeeping
  int cyc = 0, wr_cnt = 0, rd_cnt = 0, first_wr = -1, last_wr = -1, first_rd = -1;
  int exp_wr_addr = 0, exp_rd_addr = 0, rd_issue [int];
  int reports = 0, passes_done = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (mem_wr_en) begin
      if (first_wr < 0) first_wr = cyc;
      last_wr = cyc;
      chk(mem_wr_addr == AW'(exp_wr_addr) && data_in == 16'h5555, "write address/pattern");
      exp_wr_addr = (exp_wr_addr + 1) % DEPTH;
      wr_cnt++;
    end
    if (mem_rd_en) begin
      if (first_rd < 0) begin
        first_rd = cyc;
        chk(first_rd - last_wr - 1 == WAIT, "wait interval length");
      end
      chk(mem_rd_addr == AW'(exp_rd_addr), "read address order");
      rd_issue[exp_rd_addr] = cyc;
      exp_rd_addr = (exp_rd_addr + 1) % DEPTH;
      rd_cnt++;
    end
    if (rpt_valid && rst_n) begin
      reports++;
      chk(flag_mask[err_addr] || bad_mask[err_addr], "reported address has an error");
      chk(cyc - rd_issue[int'(err_addr)] == 2, "report latency 2 cycles");
      chk(rpt_err_flag == flag_mask[err_addr], "reported err_flag");
      chk(rpt_mismatch == bad_mask[err_addr], "reported mismatch");
      chk(rpt_data == (16'h5555 ^ 16'(bad_mask[err_addr])), "reported data");
      chk(rpt_pass == 16'(passes_done), "reported pass number");
    end
    if (pass_done && rst_n) begin
      chk(cnt_flagged == 3 && cnt_bad == 2 && cnt_corrected == 2, "per-pass counters");
      passes_done++;
    end
  end

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && !mem_wr_en && !mem_rd_en, "idle after reset");
    run = 1;
    wait (passes_done == 1);
    chk(wr_cnt >= DEPTH && wr_cnt < 2 * DEPTH, "pass 1 wrote every word");
    chk(last_wr - first_wr + 1 >= DEPTH, "write phase length");
    run = 0;          // second pass has started; it must be the last
    wait (passes_done == 2);
    repeat (5) @(negedge clk);
    chk(!busy, "idle after run dropped");
    chk(wr_cnt == 2 * DEPTH && rd_cnt == 2 * DEPTH, "two full passes");
    chk(reports == 2 * 4, $sformatf("four reports per pass (%0d)", reports));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
