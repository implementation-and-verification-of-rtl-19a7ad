// bch_error_pattern_tb: exhaustive self-checking test of the BCH error-pattern lookup.
// Builds its own table of all 1024 syndromes: the syndrome of each of the 26 single and 325
// double error patterns (by long division) maps to that pattern, every other syndrome to zero.
// Then drives all 1024 syndromes and compares err_loc with the table. Also checks that the 351
// syndromes are distinct and nonzero (the reason a lookup can correct two errors).
module bch_error_pattern_tb;
  import bch_ref_pkg::*;
  logic [9:0]  syn;
  logic [25:0] err_loc;
  logic [25:0] table_q [1024];
  int checks = 0, failures = 0, used = 0;

  bch_error_pattern dut (.syn(syn), .err_loc(err_loc));

  task automatic enter(input logic [25:0] e);
    logic [9:0] s = rem(e);
    checks++;
    if (s == 0 || table_q[s] != 0) begin
      failures++;
      $display("FAIL syndrome %h of %h not unique", s, e);
    end
    table_q[s] = e;
    used++;
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 1024; s++) table_q[s] = '0;
    for (int i = 0; i < 26; i++) begin
      enter(26'(1) << i);
      for (int j = i + 1; j < 26; j++) enter((26'(1) << i) | (26'(1) << j));
    end
    checks++;
    if (used != 351) failures++;
    for (int s = 0; s < 1024; s++) begin
      syn = 10'(s);
      #1;
      checks++;
      if (err_loc !== table_q[s]) begin
        failures++;
        if (failures < 10) $display("FAIL syn=%h err_loc=%h exp=%h", s, err_loc, table_q[s]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
