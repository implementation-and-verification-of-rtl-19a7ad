// bch_decoder_tb: self-checking test of the single-cycle (26,16) BCH decoder.
// Codewords come from the long-division reference. For random data words it checks: no error;
// every single and every double upset (corrected, err_loc equal to the injected pattern,
// err_flag high); random triple upsets (err_flag high). Also the published simulation values:
// 1555534 -> 1555535 with err_loc 1, and 1555536 -> 1555535 with err_loc 3.
module bch_decoder_tb;
  import bch_ref_pkg::*;
  logic [25:0] rd_data, err_loc, corrected_data;
  logic [15:0] data_out;
  logic [9:0]  syn;
  logic        err_flag;
  int checks = 0, failures = 0;

  bch_decoder dut (.rd_data(rd_data), .syn(syn), .err_loc(err_loc),
                   .corrected_data(corrected_data), .data_out(data_out), .err_flag(err_flag));

  task automatic expect_fix(input logic [25:0] cw, input logic [25:0] e);
    rd_data = cw ^ e;
    #1;
    checks++;
    if (corrected_data !== cw || data_out !== cw[25:10] || err_loc !== e
        || err_flag !== (e != 0)) begin
      failures++;
      if (failures < 10)
        $display("FAIL cw=%h e=%h cor=%h loc=%h ef=%b", cw, e, corrected_data, err_loc, err_flag);
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [25:0] cw, e;
    int a, b, c;
    expect_fix(26'h1555535, 26'h1);
    expect_fix(26'h1555535, 26'h3);
    for (int n = 0; n < 30; n++) begin
      cw = encode(n == 0 ? 16'h5555 : 16'($urandom));
      expect_fix(cw, '0);
      for (int i = 0; i < 26; i++)
        for (int j = i; j < 26; j++) expect_fix(cw, (26'(1) << i) | (26'(1) << j));
      for (int k = 0; k < 50; k++) begin
        a = $urandom_range(25); b = (a + 1 + $urandom_range(23)) % 26;
        c = $urandom_range(25);
        while (c == a || c == b) c = (c + 1) % 26;
        rd_data = cw ^ (26'(1) << a) ^ (26'(1) << b) ^ (26'(1) << c);
        #1;
        checks++;
        if (err_flag !== 1'b1) begin failures++; $display("FAIL triple not flagged"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
