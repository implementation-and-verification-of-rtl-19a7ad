// ecc_bram_tb: self-checking test of the codeword RAM (reduced to 64 words).
// Writes random words to every address, reads them back and checks the one-cycle read latency
// (data appears on the edge after rd_en), that rd_data holds while rd_en is low, that an
// injected upset mask is XORed into exactly the addressed word, that upsets accumulate, and
// that a write in the same cycle wins over an injection.
module ecc_bram_tb;
  localparam int DEPTH = 64, AW = 6;
  logic          clk = 0;
  logic          wr_en = 0, rd_en = 0, inj_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0, inj_addr = '0;
  logic [25:0]   wr_data = '0, inj_mask = '0, rd_data;
  logic [25:0]   model [DEPTH];
  int checks = 0, failures = 0;

  ecc_bram #(.WIDTH(26), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input logic [25:0] exp, input string what);
    checks++;
    if (rd_data !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, rd_data, exp);
    end
  endtask

  task automatic read(input int a);
    @(negedge clk); rd_en = 1; rd_addr = AW'(a);
    @(negedge clk); rd_en = 0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_data = 26'($urandom); model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    // latency: issue a read, data must not be there before the clock edge
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); rd_en = 1; rd_addr = AW'(a);
      if (a > 0) chk(model[a-1], "pipelined read");
    end
    @(negedge clk); rd_en = 0; chk(model[DEPTH-1], "last read");
    rd_addr = 6'd5;
    @(negedge clk); chk(model[DEPTH-1], "hold while rd_en low");
    @(negedge clk); chk(model[DEPTH-1], "hold while rd_en low, second cycle");
    // upset injection
    @(negedge clk); inj_en = 1; inj_addr = 6'd10; inj_mask = 26'h1;
    @(negedge clk); inj_en = 1; inj_addr = 6'd10; inj_mask = 26'h2000000;
    @(negedge clk); inj_en = 0;
    model[10] ^= 26'h2000001;
    read(10); chk(model[10], "two accumulated upsets");
    read(11); chk(model[11], "neighbour untouched");
    // write has priority over injection in the same cycle
    @(negedge clk); wr_en = 1; wr_addr = 6'd20; wr_data = 26'h0abcdef;
    inj_en = 1; inj_addr = 6'd21; inj_mask = 26'h3;
    @(negedge clk); wr_en = 0; inj_en = 0;
    model[20] = 26'h0abcdef;
    read(20); chk(model[20], "write wins");
    read(21); chk(model[21], "injection dropped during write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
