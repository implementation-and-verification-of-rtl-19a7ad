// bch_encoder_tb: exhaustive self-checking test of the (26,16) BCH encoder.
// All 65536 data words are encoded and compared with division by g(X) in bch_ref_pkg; the
// checkerboard word of the published simulation must give codeword 0x1555535.
module bch_encoder_tb;
  import bch_ref_pkg::*;
  logic [15:0] data_in;
  logic [9:0]  check;
  logic [25:0] wr_data;
  int checks = 0, failures = 0;

  bch_encoder dut (.data_in(data_in), .check(check), .wr_data(wr_data));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_in = 16'h5555;
    #1;
    checks++;
    if (wr_data !== 26'h1555535) begin failures++; $display("FAIL checkerboard %h", wr_data); end
    for (int d = 0; d < 65536; d++) begin
      data_in = 16'(d);
      #1;
      checks++;
      if (wr_data !== encode(16'(d)) || check !== wr_data[9:0]) begin
        failures++;
        if (failures < 10) $display("FAIL d=%h got %h exp %h", d, wr_data, encode(16'(d)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
