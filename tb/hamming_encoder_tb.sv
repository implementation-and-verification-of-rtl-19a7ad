// hamming_encoder_tb: self-checking test of the (26,20) Hamming encoder.
// The reference parity is built here from the syndrome table (one 6-bit column per data bit),
// independently of the encoder's XOR equations. Checks the checkerboard word of the published
// simulation (data 0x55555 -> codeword 0x155557f), every one-hot data word and random words,
// and that every codeword has a zero syndrome.
module hamming_encoder_tb;
  logic [19:0] data_in;
  logic [5:0]  check;
  logic [25:0] wr_data;
  int checks = 0, failures = 0;

  hamming_encoder dut (.data_in(data_in), .check(check), .wr_data(wr_data));

  localparam logic [5:0] COL [20] = '{
    6'b000111, 6'b001011, 6'b010011, 6'b100011, 6'b001101, 6'b010101, 6'b100101, 6'b011001,
    6'b101001, 6'b110001, 6'b001110, 6'b010110, 6'b100110, 6'b011010, 6'b101010, 6'b110010,
    6'b011100, 6'b101100, 6'b110100, 6'b111000};

  function automatic logic [5:0] ref_parity(input logic [19:0] d);
    logic [5:0] p = '0;
    for (int i = 0; i < 20; i++) if (d[i]) p ^= COL[i];
    return p;
  endfunction

  task automatic apply(input logic [19:0] d);
    data_in = d;
    #1;
    checks++;
    if (check !== ref_parity(d) || wr_data !== {d, ref_parity(d)}) begin
      failures++;
      $display("FAIL d=%h check=%b exp=%b", d, check, ref_parity(d));
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply(20'h55555);
    checks++;
    if (wr_data !== 26'h155557f) begin failures++; $display("FAIL checkerboard %h", wr_data); end
    apply(20'h0);
    apply(20'hfffff);
    for (int i = 0; i < 20; i++) apply(20'(1) << i);
    for (int n = 0; n < 5000; n++) apply(20'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
