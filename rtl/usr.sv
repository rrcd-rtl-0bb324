// usr: Redirection Selection Unit (USR).
//
// Keeps a 256 x 4 bitmap with one bit per slice block (1 = busy). At start-up
// the post-fabrication fault map is loaded into it (fmap_*): faulty blocks
// are set busy and their entry is marked defective; they are never handed
// out or freed. Registers then allocate and free locations through alloc_*
// and free_* (both may act in the same cycle on different locations).
// Two priority encoders, as in the paper, offer locations at all times:
//   * 1024 inputs: a free block for a compressed register. Blocks of
//     defective entries come first (so reliable entries are not wasted);
//     failing that, a free block of a reliable entry that already holds
//     compressed registers; failing that, block 0 of a fully free reliable
//     entry. The two fall-back levels are this design's choice.
//   * 256 inputs: a reliable entry with its four blocks free, for an
//     uncompressed register.
// The paper obtains these "preventive" redirections while the instruction
// travels down the pipeline; here the encoders are combinational on the
// registered bitmap, so their outputs are always up to date when the
// writeback stage samples them. A third, 128-input encoder hands out slots
// of the LDS spill partition (half of the 64 KB LDS, 256 B per register);
// its size and allocation policy are this design's choice.
module usr
  import rrcd_pkg::*;
#(
  parameter int unsigned ENTRIES = NUM_ENTRIES,
  parameter int unsigned SLOTS   = SPILL_SLOTS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // fault map load
  input  logic                       fmap_we,
  input  logic [$clog2(ENTRIES)-1:0] fmap_entry,
  input  logic [NUM_BLK-1:0]         fmap_bits,
  // offered locations
  output logic                       blk_valid,
  output loc_t                       blk_loc,
  output logic                       blk_in_defective,
  output logic                       ent_valid,
  output loc_t                       ent_loc,
  output logic                       spl_valid,
  output loc_t                       spl_loc,
  // allocation and release
  input  logic                       alloc_en,
  input  loc_t                       alloc_loc,
  input  logic                       free_en,
  input  loc_t                       free_loc,
  // status
  output logic [$clog2(ENTRIES):0]   free_entries,
  output logic [$clog2(ENTRIES):0]   defective_entries
);
  localparam int unsigned EW = $clog2(ENTRIES);
  localparam int unsigned SW = $clog2(SLOTS);

  logic [NUM_BLK-1:0] bmap_q  [ENTRIES];
  logic [ENTRIES-1:0] defect_q;
  logic [SLOTS-1:0]   spill_q;

  // ---------------------------------------------------------------- update
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) bmap_q[e] <= '0;
      defect_q <= '0;
      spill_q  <= '0;
    end else begin
      if (fmap_we) begin
        bmap_q[fmap_entry]   <= fmap_bits;
        defect_q[fmap_entry] <= |fmap_bits;
      end
      if (free_en) begin
        unique case (free_loc.kind)
          LOC_ENTRY: bmap_q[free_loc.entry[EW-1:0]] <= '0;
          LOC_BLOCK: bmap_q[free_loc.entry[EW-1:0]][free_loc.blq] <= 1'b0;
          LOC_SPILL: spill_q[free_loc.entry[SW-1:0]] <= 1'b0;
          default: ;
        endcase
      end
      if (alloc_en) begin
        unique case (alloc_loc.kind)
          LOC_ENTRY: bmap_q[alloc_loc.entry[EW-1:0]] <= '1;
          LOC_BLOCK: bmap_q[alloc_loc.entry[EW-1:0]][alloc_loc.blq] <= 1'b1;
          LOC_SPILL: spill_q[alloc_loc.entry[SW-1:0]] <= 1'b1;
          default: ;
        endcase
      end
    end
  end

  // -------------------------------------------------------------- encoders
  logic [ENTRIES*NUM_BLK-1:0] req_def, req_shr, req_new, req_blk;
  logic [ENTRIES-1:0]         req_ent;

  always_comb begin
    for (int e = 0; e < ENTRIES; e++) begin
      for (int b = 0; b < NUM_BLK; b++) begin
        req_def[e*NUM_BLK+b] = ~bmap_q[e][b] & defect_q[e];
        req_shr[e*NUM_BLK+b] = ~bmap_q[e][b] & ~defect_q[e] & (|bmap_q[e]);
        req_new[e*NUM_BLK+b] = (b == 0) & ~defect_q[e] & ~(|bmap_q[e]);
      end
      req_ent[e] = ~defect_q[e] & ~(|bmap_q[e]);
    end
    if (|req_def)      req_blk = req_def;
    else if (|req_shr) req_blk = req_shr;
    else               req_blk = req_new;
  end

  logic [EW+BLQ_W-1:0] blk_idx;
  logic [EW-1:0]       ent_idx;
  logic [SW-1:0]       spl_idx;

  prio_enc #(.N(ENTRIES*NUM_BLK)) u_enc_blk (.req(req_blk), .valid(blk_valid), .idx(blk_idx));
  prio_enc #(.N(ENTRIES))         u_enc_ent (.req(req_ent), .valid(ent_valid), .idx(ent_idx));
  prio_enc #(.N(SLOTS))           u_enc_spl (.req(~spill_q), .valid(spl_valid), .idx(spl_idx));

  always_comb begin
    blk_loc       = '0;
    blk_loc.kind  = LOC_BLOCK;
    blk_loc.entry = ENTRY_W'(blk_idx[EW+BLQ_W-1:BLQ_W]);
    blk_loc.blq   = blk_idx[BLQ_W-1:0];
    ent_loc       = '0;
    ent_loc.kind  = LOC_ENTRY;
    ent_loc.entry = ENTRY_W'(ent_idx);
    spl_loc       = '0;
    spl_loc.kind  = LOC_SPILL;
    spl_loc.entry = ENTRY_W'(spl_idx);
  end
  assign blk_in_defective = defect_q[blk_idx[EW+BLQ_W-1:BLQ_W]];

  always_comb begin
    free_entries      = '0;
    defective_entries = '0;
    for (int e = 0; e < ENTRIES; e++) begin
      free_entries      = free_entries + (EW+1)'(req_ent[e]);
      defective_entries = defective_entries + (EW+1)'(defect_q[e]);
    end
  end
endmodule
