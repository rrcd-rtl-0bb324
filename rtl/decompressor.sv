// decompressor: Des unit of the decompression stage.
//
// Receives, in one cycle, the block that holds a compressed source register
// and then hands the four uncompressed 64 B blocks of that register to the
// SIMD unit, one per cycle, as in the paper. On load the compressed word is
// latched; block blk is produced combinationally from the incoming word in
// the load cycle and from the latched word afterwards, so block 0 leaves in
// the same cycle the compressed block arrives and blocks 1..3 follow.
// Component i = 16*blk + lane is base + (i mod K)*d1 + (i div K)*dr with
// K = 2 << kcode: one multiply-add per lane. The paper names the patterns
// (one value, constant stride, a second stride between groups) but not the
// encoding; comp_t and the power-of-two group size K are this design's.
module decompressor
  import rrcd_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  comp_t            comp_in,
  input  logic [BLQ_W-1:0] blk,
  output block_t           out
);
  comp_t held_q, cw;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    held_q <= '0;
    else if (load) held_q <= comp_in;
  end

  assign cw = load ? comp_in : held_q;

  always_comb begin
    logic [5:0]        i;
    logic [5:0]        col, row;
    logic [5:0]        kmask;
    logic [COMP_W-1:0] v;
    kmask = 6'((7'd2 << cw.kcode) - 7'd1);
    for (int lane = 0; lane < LANES; lane++) begin
      i   = {blk, 4'(lane)};
      col = i & kmask;
      row = i >> (cw.kcode + 3'd1);
      v   = cw.base + cw.d1 * COMP_W'(col) + cw.dr * COMP_W'(row);
      out[lane*COMP_W +: COMP_W] = v;
    end
  end
endmodule
