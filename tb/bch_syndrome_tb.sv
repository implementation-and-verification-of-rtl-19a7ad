// bch_syndrome_tb: self-checking test of the BCH syndrome calculation.
// The syndrome of any 26-bit word must equal its remainder modulo g(X) (reference by long
// division). Checks all clean codewords' zero syndrome on random data, every single and double
// upset of the checkerboard codeword, and random words.
module bch_syndrome_tb;
  import bch_ref_pkg::*;
  logic [25:0] rd_data;
  logic [9:0]  syn;
  int checks = 0, failures = 0;

  bch_syndrome dut (.rd_data(rd_data), .syn(syn));

  task automatic apply(input logic [25:0] w);
    rd_data = w;
    #1;
    checks++;
    if (syn !== rem(w)) begin
      failures++;
      if (failures < 10) $display("FAIL w=%h syn=%h exp=%h", w, syn, rem(w));
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [25:0] cw;
    cw = 26'h1555535;
    apply(cw);
    checks++;
    if (syn !== 10'h0) failures++;
    for (int i = 0; i < 26; i++)
      for (int j = i; j < 26; j++) apply(cw ^ (26'(1) << i) ^ (26'(1) << j));
    for (int n = 0; n < 2000; n++) begin
      cw = encode(16'($urandom));
      apply(cw);
      checks++;
      if (syn !== 10'h0) failures++;
      apply(26'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
