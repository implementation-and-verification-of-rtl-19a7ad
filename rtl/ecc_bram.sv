// ecc_bram: the embedded block RAM that stores the 26-bit codewords.
//
// A simple dual-port RAM written as an array: one synchronous write port and one synchronous
// read port with one cycle of read latency (rd_data is the word addressed in the previous cycle
// with rd_en high, and holds otherwise). The memory contents are not reset, like the FPGA's RAM
// blocks. The default depth of 7424 words is this design's choice: it is the largest 26-bit-wide
// memory the target device's 88 RAM blocks of 2304 bits can hold when each block is organised as
// 256 x 9 bits (three blocks per word, 29 groups of 256 words).
//
// The inject port models single event upsets for verification: with inj_en high (and no write
// in that cycle) the stored word at inj_addr is XORed with inj_mask at the clock edge. A write
// has priority over an injection in the same cycle. It is this design's addition for
// fault-injection simulation; a real FPGA RAM block has no such port.
//
// Interface: clk; wr_en/wr_addr/wr_data; rd_en/rd_addr/rd_data; inj_en/inj_addr/inj_mask.
module ecc_bram #(
  parameter int unsigned WIDTH  = 26,
  parameter int unsigned DEPTH  = 7424,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [WIDTH-1:0]  wr_data,
  input  logic              rd_en,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic [WIDTH-1:0]  rd_data,
  input  logic              inj_en,
  input  logic [ADDR_W-1:0] inj_addr,
  input  logic [WIDTH-1:0]  inj_mask
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en)       mem[wr_addr]  <= wr_data;
    else if (inj_en) mem[inj_addr] <= mem[inj_addr] ^ inj_mask;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

  // Addresses must lie inside the array.
  a_wr_range:  assert property (@(posedge clk) wr_en  |-> int'(wr_addr)  < DEPTH);
  a_rd_range:  assert property (@(posedge clk) rd_en  |-> int'(rd_addr)  < DEPTH);
  a_inj_range: assert property (@(posedge clk) inj_en |-> int'(inj_addr) < DEPTH);

endmodule
