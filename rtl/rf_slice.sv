// rf_slice: one 64 KB register-file slice of a SIMD unit.
//
// 256 entries x 4 blocks x 64 B, stored as a 1024-word array of 512-bit
// blocks addressed {entry, block}. Two read ports (fnt0, fnt1) and one write
// port (dest), each moving one block per cycle, as in the paper. In the paper
// the slice runs below Vmin and some of its blocks are faulty; here the array
// is ideal and the fault map only steers allocation. Reads are synchronous
// (data one cycle after the address, like an SRAM macro); a read and a write
// of the same block in one cycle returns the old data. No reset: contents are
// only read after being written.
module rf_slice
  import rrcd_pkg::*;
#(
  parameter int unsigned ENTRIES = NUM_ENTRIES,
  parameter int unsigned AW      = $clog2(ENTRIES) + BLQ_W
) (
  input  logic          clk,
  input  logic          rd_en   [2],
  input  logic [AW-1:0] rd_addr [2],
  output block_t        rd_data [2],
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  block_t        wdata
);
  block_t mem [ENTRIES*NUM_BLK];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (rd_en[0]) rd_data[0] <= mem[rd_addr[0]];
    if (rd_en[1]) rd_data[1] <= mem[rd_addr[1]];
  end
endmodule
