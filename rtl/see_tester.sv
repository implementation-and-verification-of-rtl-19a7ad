// see_tester: on-chip sequencer of the single-event-effect (SEE) memory test.
//
// Runs the test loop used in the heavy-ion experiments: write a known "checkerboard" pattern
// (alternating ones and zeros, bit 0 = 1) into every memory word, wait a fixed interval while the
// memory is exposed, read every word back through the decoder and report each word that shows an
// error, then start the next pass with a fresh write. The loop continues while `run` is high;
// when `run` is low at the end of a read pass the sequencer returns to idle (the host's "enough
// errors" decision). The publication gives this flow, the pattern, the 120 s write-to-read
// interval at 10 MHz (WAIT_CYCLES = 1.2e9) and the recorded items (error address, time and
// data); the state machine, the report format and the counters are this design's own.
//
// A word is reported when the decoder raises err_flag or when the corrected data differs from
// the pattern (an upset the code missed or miscorrected). Each report carries the address, the
// raw codeword, the error location, the corrected data, both flags, the mismatch bit, the pass
// number and a cycle time stamp. Per pass it counts flagged, corrected and bad words.
//
// Timing: a pass takes DEPTH write cycles, WAIT_CYCLES idle cycles, DEPTH read cycles and one
// drain cycle. mem_rd_en at cycle t returns the codeword at t+1 (one-cycle RAM); the decoder is
// combinational and the report registers it, so rpt_valid for the word read at t is high at t+2.
// pass_done pulses for one cycle when the last word of a pass has been checked.
module see_tester #(
  parameter int unsigned K           = 16,          // data bits per word
  parameter int unsigned N           = 26,          // codeword bits
  parameter int unsigned DEPTH       = 7424,
  parameter int unsigned ADDR_W      = $clog2(DEPTH),
  parameter int unsigned WAIT_CYCLES = 1_200_000_000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  // memory side
  output logic              mem_wr_en,
  output logic [ADDR_W-1:0] mem_wr_addr,
  output logic [K-1:0]      data_in,
  output logic              mem_rd_en,
  output logic [ADDR_W-1:0] mem_rd_addr,
  // decoder side (combinational from the RAM output)
  input  logic [N-1:0]      raw_data,
  input  logic [N-1:0]      err_loc,
  input  logic [K-1:0]      dec_data,
  input  logic              err_flag,
  input  logic              corrected_flag,
  // error report
  output logic              rpt_valid,
  output logic [ADDR_W-1:0] err_addr,
  output logic [N-1:0]      rpt_raw,
  output logic [N-1:0]      rpt_err_loc,
  output logic [K-1:0]      rpt_data,
  output logic              rpt_err_flag,
  output logic              rpt_corrected_flag,
  output logic              rpt_mismatch,
  output logic [15:0]       rpt_pass,
  output logic [47:0]       rpt_time,
  // status
  output logic              busy,
  output logic              pass_done,
  output logic [ADDR_W:0]   cnt_flagged,
  output logic [ADDR_W:0]   cnt_corrected,
  output logic [ADDR_W:0]   cnt_bad
);

  typedef enum logic [2:0] {S_IDLE, S_WRITE, S_WAIT, S_READ, S_DRAIN} state_e;

  localparam logic [K-1:0]      PATTERN = K'(32'h5555_5555);
  localparam logic [ADDR_W-1:0] LAST    = ADDR_W'(DEPTH - 1);

  state_e            state;
  logic [ADDR_W-1:0] addr;
  logic [31:0]       wait_cnt;
  logic [15:0]       pass;
  logic [47:0]       now;
  logic              chk_valid;     // RAM output holds a word read in the previous cycle
  logic [ADDR_W-1:0] chk_addr;
  logic              chk_last;
  logic              mismatch;
  logic              word_err;

  assign busy        = (state != S_IDLE);
  assign mem_wr_en   = (state == S_WRITE);
  assign mem_wr_addr = addr;
  assign data_in     = PATTERN;
  assign mem_rd_en   = (state == S_READ);
  assign mem_rd_addr = addr;

  assign mismatch = (dec_data != PATTERN);
  assign word_err = err_flag || mismatch;

  // Sequencer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      addr     <= '0;
      wait_cnt <= '0;
      pass     <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (run) begin
          state <= S_WRITE;
          addr  <= '0;
        end
        S_WRITE: begin
          addr <= addr + 1'b1;
          if (addr == LAST) begin
            addr     <= '0;
            wait_cnt <= WAIT_CYCLES - 1;
            state    <= S_WAIT;
          end
        end
        S_WAIT: begin
          wait_cnt <= wait_cnt - 1;
          if (wait_cnt == 0) state <= S_READ;
        end
        S_READ: begin
          addr <= addr + 1'b1;
          if (addr == LAST) begin
            addr  <= '0;
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          pass  <= pass + 1'b1;
          state <= run ? S_WRITE : S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Read pipeline: the RAM word arrives one cycle after the read was issued.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chk_valid <= 1'b0;
      chk_addr  <= '0;
      chk_last  <= 1'b0;
      now       <= '0;
    end else begin
      chk_valid <= mem_rd_en;
      chk_addr  <= addr;
      chk_last  <= mem_rd_en && (addr == LAST);
      now       <= now + 1'b1;
    end
  end

  // Error report and per-pass counters.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rpt_valid          <= 1'b0;
      err_addr           <= '0;
      rpt_raw            <= '0;
      rpt_err_loc        <= '0;
      rpt_data           <= '0;
      rpt_err_flag       <= 1'b0;
      rpt_corrected_flag <= 1'b0;
      rpt_mismatch       <= 1'b0;
      rpt_pass           <= '0;
      rpt_time           <= '0;
      pass_done          <= 1'b0;
      cnt_flagged        <= '0;
      cnt_corrected      <= '0;
      cnt_bad            <= '0;
    end else begin
      rpt_valid <= chk_valid && word_err;
      pass_done <= chk_last;
      if (chk_valid && word_err) begin
        err_addr           <= chk_addr;
        rpt_raw            <= raw_data;
        rpt_err_loc        <= err_loc;
        rpt_data           <= dec_data;
        rpt_err_flag       <= err_flag;
        rpt_corrected_flag <= corrected_flag;
        rpt_mismatch       <= mismatch;
        rpt_pass           <= pass;
        rpt_time           <= now;
      end
      if (state == S_WRITE && addr == '0) begin
        cnt_flagged   <= '0;
        cnt_corrected <= '0;
        cnt_bad       <= '0;
      end else if (chk_valid) begin
        cnt_flagged   <= cnt_flagged   + (ADDR_W+1)'(err_flag);
        cnt_corrected <= cnt_corrected + (ADDR_W+1)'(err_flag && corrected_flag && !mismatch);
        cnt_bad       <= cnt_bad       + (ADDR_W+1)'(mismatch);
      end
    end
  end

  a_one_port: assert property (@(posedge clk) disable iff (!rst_n) !(mem_wr_en && mem_rd_en));

endmodule
