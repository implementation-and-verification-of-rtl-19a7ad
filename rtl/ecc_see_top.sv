// ecc_see_top: two ECC-protected block-RAM lanes and their SEE test sequencers.
//
// Lane "ham" protects its memory with the (26,20) shortened Hamming SECDED code, lane "bch" with
// the (26,16) shortened BCH double-error-correcting code. Each lane is the write/read structure of
// the source publication: data_in -> encoder -> RAM (codeword of data + parity bits) -> decoder ->
// corrected data, error location and flags. A see_tester per lane writes the checkerboard
// pattern, waits WAIT_CYCLES, reads the memory back and reports every erroneous word. Both lanes
// share clk, rst_n and run and so run in lock step. In the publication the two codes were built
// on separate devices (one per code, plus an unprotected control device that is not part of
// this design); placing both lanes in one top is this design's choice, so that one simulation
// compares them on the same pattern and timing.
//
// The BCH decoder has no corrected flag of its own; for its tester the top derives one as "the
// syndrome matched one of the 351 correctable patterns" (err_loc nonzero).
//
// Upsets are injected through the RAMs' inject ports (ham_inj_* and bch_inj_*), which stand for
// the particle strikes. Timing: see see_tester (reports two cycles after the read is issued).
module ecc_see_top
  import ecc_pkg::*;
#(
  parameter int unsigned DEPTH       = 7424,
  parameter int unsigned ADDR_W      = $clog2(DEPTH),
  parameter int unsigned WAIT_CYCLES = 1_200_000_000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  // upset injection
  input  logic              ham_inj_en,
  input  logic [ADDR_W-1:0] ham_inj_addr,
  input  ham_cw_t           ham_inj_mask,
  input  logic              bch_inj_en,
  input  logic [ADDR_W-1:0] bch_inj_addr,
  input  bch_cw_t           bch_inj_mask,
  // Hamming lane report
  output logic              ham_rpt_valid,
  output logic [ADDR_W-1:0] ham_err_addr,
  output ham_cw_t           ham_rpt_raw,
  output ham_cw_t           ham_rpt_err_loc,
  output ham_data_t         ham_rpt_data,
  output logic              ham_rpt_err_flag,
  output logic              ham_rpt_corrected_flag,
  output logic              ham_rpt_mismatch,
  output logic [15:0]       ham_rpt_pass,
  output logic [47:0]       ham_rpt_time,
  output logic              ham_pass_done,
  output logic [ADDR_W:0]   ham_cnt_flagged,
  output logic [ADDR_W:0]   ham_cnt_corrected,
  output logic [ADDR_W:0]   ham_cnt_bad,
  // BCH lane report
  output logic              bch_rpt_valid,
  output logic [ADDR_W-1:0] bch_err_addr,
  output bch_cw_t           bch_rpt_raw,
  output bch_cw_t           bch_rpt_err_loc,
  output bch_data_t         bch_rpt_data,
  output logic              bch_rpt_err_flag,
  output logic              bch_rpt_corrected_flag,
  output logic              bch_rpt_mismatch,
  output logic [15:0]       bch_rpt_pass,
  output logic [47:0]       bch_rpt_time,
  output logic              bch_pass_done,
  output logic [ADDR_W:0]   bch_cnt_flagged,
  output logic [ADDR_W:0]   bch_cnt_corrected,
  output logic [ADDR_W:0]   bch_cnt_bad,
  output logic              busy
);

  // ---------------- Hamming lane ----------------
  logic              ham_wr_en, ham_rd_en;
  logic [ADDR_W-1:0] ham_wr_addr, ham_rd_addr;
  ham_data_t         ham_data_in, ham_dec_data;
  ham_syn_t          ham_check, ham_syn;
  ham_cw_t           ham_wr_data, ham_rd_data, ham_err_loc, ham_corrected;
  logic              ham_err_flag, ham_corr_flag, ham_busy;

  hamming_encoder u_ham_enc (
    .data_in (ham_data_in),
    .check   (ham_check),
    .wr_data (ham_wr_data)
  );

  ecc_bram #(.WIDTH(HAM_N), .DEPTH(DEPTH), .ADDR_W(ADDR_W)) u_ham_ram (
    .clk      (clk),
    .wr_en    (ham_wr_en),
    .wr_addr  (ham_wr_addr),
    .wr_data  (ham_wr_data),
    .rd_en    (ham_rd_en),
    .rd_addr  (ham_rd_addr),
    .rd_data  (ham_rd_data),
    .inj_en   (ham_inj_en),
    .inj_addr (ham_inj_addr),
    .inj_mask (ham_inj_mask)
  );

  hamming_decoder u_ham_dec (
    .rd_data        (ham_rd_data),
    .syn            (ham_syn),
    .err_loc        (ham_err_loc),
    .corrected_data (ham_corrected),
    .data_out       (ham_dec_data),
    .err_flag       (ham_err_flag),
    .corrected_flag (ham_corr_flag)
  );

  see_tester #(.K(HAM_K), .N(HAM_N), .DEPTH(DEPTH), .ADDR_W(ADDR_W),
               .WAIT_CYCLES(WAIT_CYCLES)) u_ham_tester (
    .clk                (clk),
    .rst_n              (rst_n),
    .run                (run),
    .mem_wr_en          (ham_wr_en),
    .mem_wr_addr        (ham_wr_addr),
    .data_in            (ham_data_in),
    .mem_rd_en          (ham_rd_en),
    .mem_rd_addr        (ham_rd_addr),
    .raw_data           (ham_rd_data),
    .err_loc            (ham_err_loc),
    .dec_data           (ham_dec_data),
    .err_flag           (ham_err_flag),
    .corrected_flag     (ham_corr_flag),
    .rpt_valid          (ham_rpt_valid),
    .err_addr           (ham_err_addr),
    .rpt_raw            (ham_rpt_raw),
    .rpt_err_loc        (ham_rpt_err_loc),
    .rpt_data           (ham_rpt_data),
    .rpt_err_flag       (ham_rpt_err_flag),
    .rpt_corrected_flag (ham_rpt_corrected_flag),
    .rpt_mismatch       (ham_rpt_mismatch),
    .rpt_pass           (ham_rpt_pass),
    .rpt_time           (ham_rpt_time),
    .busy               (ham_busy),
    .pass_done          (ham_pass_done),
    .cnt_flagged        (ham_cnt_flagged),
    .cnt_corrected      (ham_cnt_corrected),
    .cnt_bad            (ham_cnt_bad)
  );

  // ---------------- BCH lane ----------------
  logic              bch_wr_en, bch_rd_en;
  logic [ADDR_W-1:0] bch_wr_addr, bch_rd_addr;
  bch_data_t         bch_data_in, bch_dec_data;
  bch_syn_t          bch_check, bch_syn;
  bch_cw_t           bch_wr_data, bch_rd_data, bch_err_loc, bch_corrected;
  logic              bch_err_flag, bch_busy;

  bch_encoder u_bch_enc (
    .data_in (bch_data_in),
    .check   (bch_check),
    .wr_data (bch_wr_data)
  );

  ecc_bram #(.WIDTH(BCH_N), .DEPTH(DEPTH), .ADDR_W(ADDR_W)) u_bch_ram (
    .clk      (clk),
    .wr_en    (bch_wr_en),
    .wr_addr  (bch_wr_addr),
    .wr_data  (bch_wr_data),
    .rd_en    (bch_rd_en),
    .rd_addr  (bch_rd_addr),
    .rd_data  (bch_rd_data),
    .inj_en   (bch_inj_en),
    .inj_addr (bch_inj_addr),
    .inj_mask (bch_inj_mask)
  );

  bch_decoder u_bch_dec (
    .rd_data        (bch_rd_data),
    .syn            (bch_syn),
    .err_loc        (bch_err_loc),
    .corrected_data (bch_corrected),
    .data_out       (bch_dec_data),
    .err_flag       (bch_err_flag)
  );

  see_tester #(.K(BCH_K), .N(BCH_N), .DEPTH(DEPTH), .ADDR_W(ADDR_W),
               .WAIT_CYCLES(WAIT_CYCLES)) u_bch_tester (
    .clk                (clk),
    .rst_n              (rst_n),
    .run                (run),
    .mem_wr_en          (bch_wr_en),
    .mem_wr_addr        (bch_wr_addr),
    .data_in            (bch_data_in),
    .mem_rd_en          (bch_rd_en),
    .mem_rd_addr        (bch_rd_addr),
    .raw_data           (bch_rd_data),
    .err_loc            (bch_err_loc),
    .dec_data           (bch_dec_data),
    .err_flag           (bch_err_flag),
    .corrected_flag     (|bch_err_loc),
    .rpt_valid          (bch_rpt_valid),
    .err_addr           (bch_err_addr),
    .rpt_raw            (bch_rpt_raw),
    .rpt_err_loc        (bch_rpt_err_loc),
    .rpt_data           (bch_rpt_data),
    .rpt_err_flag       (bch_rpt_err_flag),
    .rpt_corrected_flag (bch_rpt_corrected_flag),
    .rpt_mismatch       (bch_rpt_mismatch),
    .rpt_pass           (bch_rpt_pass),
    .rpt_time           (bch_rpt_time),
    .busy               (bch_busy),
    .pass_done          (bch_pass_done),
    .cnt_flagged        (bch_cnt_flagged),
    .cnt_corrected      (bch_cnt_corrected),
    .cnt_bad            (bch_cnt_bad)
  );

  assign busy = ham_busy | bch_busy;

endmodule
