// dest_reg_buffer: Destination Register Buffer (BRD).
//
// As large as one slice entry: four 64 B blocks. While the compressor has not
// yet seen all four result blocks of a register, the blocks are kept here; if
// compression fails at the fourth block (misprediction) they are written to a
// reliable entry one per cycle. Following the paper in size and role; the
// write-by-index / combinational read-by-index interface is this design's.
module dest_reg_buffer
  import rrcd_pkg::*;
(
  input  logic             clk,
  input  logic             we,
  input  logic [BLQ_W-1:0] widx,
  input  block_t           wdata,
  input  logic [BLQ_W-1:0] ridx,
  output block_t           rdata
);
  block_t buf_q [NUM_BLK];

  always_ff @(posedge clk) begin
    if (we) buf_q[widx] <= wdata;
  end
  assign rdata = buf_q[ridx];
endmodule
