// hamming_decoder_tb: self-checking test of the (26,20) Hamming SECDED decoder.
// Clean codewords are built with the parity-check equations written out here (rows of the
// parity-check matrix as masks over D19..D0). For random data words it checks: no error;
// every single upset (corrected, err_loc one-hot, both flags high); every double upset
// (err_flag only, word passed through unchanged, err_loc zero). Also the two words of the
// published simulation: 155557e -> 155557f with err_loc 1, and 155557c passed through.
module hamming_decoder_tb;
  logic [25:0] rd_data, err_loc, corrected_data;
  logic [19:0] data_out;
  logic [5:0]  syn;
  logic        err_flag, corrected_flag;
  int checks = 0, failures = 0;

  hamming_decoder dut (.rd_data(rd_data), .syn(syn), .err_loc(err_loc),
                       .corrected_data(corrected_data), .data_out(data_out),
                       .err_flag(err_flag), .corrected_flag(corrected_flag));

  // Row masks over D19..D0 of the parity-check equations, P5 first.
  localparam logic [19:0] ROW [6] = '{
    20'b1110_1101_0011_0100_1000,  // P5
    20'b1101_1010_1010_1010_0100,  // P4
    20'b1011_0110_0101_1001_0010,  // P3
    20'b0111_0001_1100_0111_0001,  // P2
    20'b0000_1111_1100_0000_1111,  // P1
    20'b0000_0000_0011_1111_1111}; // P0

  function automatic logic [25:0] ref_encode(input logic [19:0] d);
    logic [5:0] p;
    for (int r = 0; r < 6; r++) p[5-r] = ^(d & ROW[r]);
    return {d, p};
  endfunction

  task automatic expect_out(input logic [25:0] raw, input logic [25:0] loc, input logic [25:0] cor,
                            input logic ef, input logic cf);
    rd_data = raw;
    #1;
    checks++;
    if (err_loc !== loc || corrected_data !== cor || err_flag !== ef || corrected_flag !== cf
        || data_out !== cor[25:6]) begin
      failures++;
      $display("FAIL raw=%h loc=%h/%h cor=%h/%h ef=%b/%b cf=%b/%b", raw, err_loc, loc,
               corrected_data, cor, err_flag, ef, corrected_flag, cf);
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
    logic [25:0] cw, e;
    // published simulation values
    expect_out(26'h155557f, 26'h0, 26'h155557f, 1'b0, 1'b0);
    expect_out(26'h155557e, 26'h1, 26'h155557f, 1'b1, 1'b1);
    expect_out(26'h155557c, 26'h0, 26'h155557c, 1'b1, 1'b0);
    for (int n = 0; n < 40; n++) begin
      cw = ref_encode(n == 0 ? 20'h55555 : 20'($urandom));
      expect_out(cw, '0, cw, 1'b0, 1'b0);
      for (int i = 0; i < 26; i++) begin
        e = 26'(1) << i;
        expect_out(cw ^ e, e, cw, 1'b1, 1'b1);
        for (int j = i + 1; j < 26; j++) begin
          e = (26'(1) << i) | (26'(1) << j);
          expect_out(cw ^ e, '0, cw ^ e, 1'b1, 1'b0);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
