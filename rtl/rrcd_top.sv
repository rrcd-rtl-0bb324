// rrcd_top: register-file path of one SIMD unit with RRCD (Register
// Redirection based on Compressed Data).
//
// The register-file slice runs below its safe supply voltage, so some of its
// 64 B blocks are permanently faulty (fault map, loaded through fmap_*).
// Every physical register is redirected, through the redirection table (TR),
// to wherever it currently fits: an uncompressed register to a fully
// reliable entry, a compressed one to a single free block, preferably in a
// defective entry, and, when the slice is full, to a spill partition in the
// LDS (ports lds_*, the LDS itself lives outside).
//
// Pipeline, as in the paper's figure:
//   translation  base table + adders (reg_translate) and TR read, at issue;
//   operand read slice / LDS read, one block per cycle (operand_read);
//   decompress   Des units and c-controlled 2:1 multiplexers -> op0/op1;
//   (execution in the SIMD unit, outside this block)
//   compress     Com on each result block, registered with its verdicts;
//   writeback    BRD and USR (wb_stage, usr) -> slice / LDS write, TR and
//                bitmap update.
// Interfaces (all valid/ready or single-cycle strobes):
//   fmap_*, ecp_* start-up configuration from the post-fabrication test:
//            faulty blocks per entry, and the position of the single faulty
//            bit of entries that the per-entry spare bit repairs;
//   alloc_*  place a wavefront: its base register;
//   iss_*    issue an instruction (wavefront, two source indices and an
//            optional destination index); accepted once per 4 cycles;
//   op_*     source blocks 0..3, one per cycle, block 0 valid two clock
//            edges after the edge that accepts the issue;
//   wb_*     result blocks 0..3 of the oldest issued destination, in order;
//   ev, ev_redir_defective, c_compr, misp, rsel, wb_stall
//            per-write event pulses and the paper's control bits, for
//            counters and debug;
//   rel_*    release the window of a finished wavefront (win_size rows from
//            its base): TR rows invalidated and locations freed, one row
//            per cycle, while new writebacks wait.
// The destination register number travels from issue to writeback in a
// small in-order queue (DQ_DEPTH); its TR row is read when its first result
// block reaches writeback. There is no forwarding: the issuing scheduler
// must not read a register whose writeback is still in flight. Queue,
// release walker and event outputs are this design's choices.
module rrcd_top
  import rrcd_pkg::*;
#(
  parameter int unsigned NUM_WF   = 256,
  parameter int unsigned DQ_DEPTH = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // fault map
  input  logic                      fmap_we,
  input  logic [ENTRY_W-1:0]        fmap_entry,
  input  logic [NUM_BLK-1:0]        fmap_bits,
  // error-correcting pointers (one spare bit per entry)
  input  logic                      ecp_we,
  input  logic [ENTRY_W-1:0]        ecp_entry,
  input  logic                      ecp_valid,
  input  logic [BLQ_W+8:0]          ecp_pos,
  // wavefront placement and release
  input  logic                      alloc_we,
  input  logic [$clog2(NUM_WF)-1:0] alloc_wf,
  input  logic [ENTRY_W-1:0]        alloc_base,
  input  logic [ENTRY_W:0]          win_size,
  input  logic                      rel_valid,
  output logic                      rel_ready,
  input  logic [$clog2(NUM_WF)-1:0] rel_wf,
  // issue
  input  logic                      iss_valid,
  output logic                      iss_ready,
  input  logic [$clog2(NUM_WF)-1:0] iss_wf,
  input  logic [ENTRY_W-1:0]        iss_idc0,
  input  logic [ENTRY_W-1:0]        iss_idc1,
  input  logic                      iss_has_dest,
  input  logic [ENTRY_W-1:0]        iss_idcd,
  // operands to the SIMD unit
  output logic                      op_valid,
  output logic [BLQ_W-1:0]          op_blk,
  output block_t                    op0,
  output block_t                    op1,
  // results from the SIMD unit
  input  logic                      wb_valid,
  output logic                      wb_ready,
  input  block_t                    wb_data,
  // LDS spill partition
  output logic                      lds_rd_en   [2],
  output logic [SLOT_W+BLQ_W-1:0]   lds_rd_addr [2],
  input  block_t                    lds_rd_data [2],
  output logic                      lds_we,
  output logic [SLOT_W+BLQ_W-1:0]   lds_waddr,
  output block_t                    lds_wdata,
  // status
  output wb_event_t                 ev,
  output logic                      ev_redir_defective,
  output logic                      c_compr,
  output logic                      misp,
  output logic                      rsel,
  output logic                      wb_stall,
  output logic                      rel_busy,
  output logic [ENTRY_W:0]          free_entries,
  output logic [ENTRY_W:0]          defective_entries
);
  localparam int unsigned QW = $clog2(DQ_DEPTH);

  // ------------------------------------------------------------ translation
  logic [ENTRY_W-1:0] phys0, phys1, physd, rel_base;

  reg_translate #(.NUM_WF(NUM_WF)) u_xlate (
    .clk(clk), .rst_n(rst_n),
    .alloc_we(alloc_we), .alloc_wf(alloc_wf), .alloc_base(alloc_base),
    .wf_id(iss_wf), .idc_fnt0(iss_idc0), .idc_fnt1(iss_idc1), .idc_dest(iss_idcd),
    .phys_fnt0(phys0), .phys_fnt1(phys1), .phys_dest(physd),
    .rel_wf(rel_wf), .rel_base(rel_base)
  );

  // ------------------------------------------------------ destination queue
  logic [ENTRY_W-1:0] dq_mem [DQ_DEPTH];
  logic [QW-1:0]      dq_rd_q, dq_wr_q;
  logic [QW:0]        dq_cnt_q;
  logic               dq_push, dq_pop, dq_valid, dq_full;

  assign dq_valid = (dq_cnt_q != '0);
  assign dq_full  = (dq_cnt_q == (QW+1)'(DQ_DEPTH));

  // --------------------------------------------------------------------- TR
  logic [ENTRY_W-1:0] tr_rd_addr [4];
  tr_row_t            tr_rd_row  [4];
  logic               tr_we, wb_tr_we;
  logic [ENTRY_W-1:0] tr_waddr, wb_tr_waddr;
  tr_row_t            tr_wrow, wb_tr_wrow;

  // release walker
  logic               rel_act_q;
  logic [ENTRY_W-1:0] rel_row_q;
  logic [ENTRY_W:0]   rel_left_q;

  assign tr_rd_addr[0] = phys0;
  assign tr_rd_addr[1] = phys1;
  assign tr_rd_addr[2] = dq_mem[dq_rd_q];
  assign tr_rd_addr[3] = rel_row_q;

  redirection_table u_tr (
    .clk(clk), .rst_n(rst_n),
    .rd_addr(tr_rd_addr), .rd_row(tr_rd_row),
    .we(tr_we), .waddr(tr_waddr), .wrow(tr_wrow)
  );

  // ---------------------------------------------------------- operand read
  logic              or_ready;
  logic              sl_rd_en   [2];
  logic [ADDR_W-1:0] sl_rd_addr [2];
  block_t            sl_rd_data [2];
  tr_row_t           src_rows   [2];
  block_t            op_blocks  [2];
  logic              iss_fire;

  assign src_rows[0] = tr_rd_row[0];
  assign src_rows[1] = tr_rd_row[1];
  assign iss_ready   = or_ready & ~dq_full;
  assign iss_fire    = iss_valid & iss_ready;
  assign dq_push     = iss_fire & iss_has_dest;

  operand_read u_rd (
    .clk(clk), .rst_n(rst_n), .start(iss_fire), .row_in(src_rows), .ready(or_ready),
    .sl_rd_en(sl_rd_en), .sl_rd_addr(sl_rd_addr), .sl_rd_data(sl_rd_data),
    .lds_rd_en(lds_rd_en), .lds_rd_addr(lds_rd_addr), .lds_rd_data(lds_rd_data),
    .op_valid(op_valid), .op_blk(op_blk), .op(op_blocks)
  );
  assign op0 = op_blocks[0];
  assign op1 = op_blocks[1];

  // ----------------------------------------------------------------- slice
  logic              sl_we;
  logic [ADDR_W-1:0] sl_waddr;
  block_t            sl_wdata;

  block_t            sl_rd_raw  [2];

  rf_slice u_slice (
    .clk(clk), .rd_en(sl_rd_en), .rd_addr(sl_rd_addr), .rd_data(sl_rd_raw),
    .we(sl_we), .waddr(sl_waddr), .wdata(sl_wdata)
  );

  // single faulty bit of an otherwise reliable entry replaced by its spare
  ecp u_ecp (
    .clk(clk), .rst_n(rst_n),
    .cfg_we(ecp_we), .cfg_entry(ecp_entry), .cfg_valid(ecp_valid), .cfg_pos(ecp_pos),
    .wr_en(sl_we), .wr_addr(sl_waddr), .wr_data(sl_wdata),
    .rd_en(sl_rd_en), .rd_addr(sl_rd_addr), .rd_raw(sl_rd_raw), .rd_fixed(sl_rd_data)
  );

  // -------------------------------------------------------------------- USR
  logic  blk_valid, ent_valid, spl_valid, blk_in_def;
  loc_t  blk_loc, ent_loc, spl_loc;
  logic  alloc_en, free_en, wb_free_en, rel_free_en;
  loc_t  alloc_loc, free_loc, wb_free_loc, rel_free_loc;

  usr u_usr (
    .clk(clk), .rst_n(rst_n),
    .fmap_we(fmap_we), .fmap_entry(fmap_entry), .fmap_bits(fmap_bits),
    .blk_valid(blk_valid), .blk_loc(blk_loc), .blk_in_defective(blk_in_def),
    .ent_valid(ent_valid), .ent_loc(ent_loc),
    .spl_valid(spl_valid), .spl_loc(spl_loc),
    .alloc_en(alloc_en), .alloc_loc(alloc_loc),
    .free_en(free_en), .free_loc(free_loc),
    .free_entries(free_entries), .defective_entries(defective_entries)
  );

  // ------------------------------------------------------------- writeback
  logic wb_busy, wb_hold;

  assign wb_hold = rel_act_q | rel_valid;

  wb_stage u_wb (
    .clk(clk), .rst_n(rst_n),
    .wb_valid(wb_valid), .wb_ready(wb_ready), .wb_data(wb_data),
    .dq_valid(dq_valid), .dq_phys(dq_mem[dq_rd_q]), .dq_row(tr_rd_row[2]), .dq_pop(dq_pop),
    .hold(wb_hold), .busy(wb_busy),
    .blk_valid(blk_valid), .blk_loc(blk_loc), .ent_valid(ent_valid), .ent_loc(ent_loc),
    .spl_valid(spl_valid), .spl_loc(spl_loc),
    .alloc_en(alloc_en), .alloc_loc(alloc_loc), .free_en(wb_free_en), .free_loc(wb_free_loc),
    .tr_we(wb_tr_we), .tr_waddr(wb_tr_waddr), .tr_wrow(wb_tr_wrow),
    .sl_we(sl_we), .sl_waddr(sl_waddr), .sl_wdata(sl_wdata),
    .lds_we(lds_we), .lds_waddr(lds_waddr), .lds_wdata(lds_wdata),
    .c_compr(c_compr), .misp(misp), .rsel(rsel), .stall(wb_stall), .ev(ev)
  );

  // a new compressed redirection that landed in a defective entry
  assign ev_redir_defective = ev.redir_block & blk_in_def;

  // --------------------------------------------------------- window release
  tr_row_t rel_old;
  assign rel_old   = tr_rd_row[3];
  assign rel_ready = ~rel_act_q & ~wb_busy;
  assign rel_busy  = rel_act_q;

  always_comb begin
    rel_free_en  = rel_act_q & rel_old.v;
    rel_free_loc = '0;
    rel_free_loc.entry = rel_old.entry;
    rel_free_loc.blq   = rel_old.blq;
    rel_free_loc.kind  = rel_old.m ? LOC_SPILL : (rel_old.c ? LOC_BLOCK : LOC_ENTRY);
    // the release walker and a register writeback never overlap
    tr_we    = wb_tr_we | rel_act_q;
    tr_waddr = rel_act_q ? rel_row_q : wb_tr_waddr;
    tr_wrow  = rel_act_q ? tr_row_t'('0) : wb_tr_wrow;
    free_en  = wb_free_en | rel_free_en;
    free_loc = rel_act_q ? rel_free_loc : wb_free_loc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rel_act_q  <= 1'b0;
      rel_row_q  <= '0;
      rel_left_q <= '0;
    end else if (!rel_act_q) begin
      if (rel_valid && rel_ready && win_size != '0) begin
        rel_act_q  <= 1'b1;
        rel_row_q  <= rel_base;
        rel_left_q <= win_size;
      end
    end else begin
      rel_row_q  <= rel_row_q + 1'b1;
      rel_left_q <= rel_left_q - 1'b1;
      if (rel_left_q == (ENTRY_W+1)'(1)) rel_act_q <= 1'b0;
    end
  end

  // ----------------------------------------------------- destination queue
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dq_rd_q  <= '0;
      dq_wr_q  <= '0;
      dq_cnt_q <= '0;
      for (int i = 0; i < DQ_DEPTH; i++) dq_mem[i] <= '0;
    end else begin
      if (dq_push) begin
        dq_mem[dq_wr_q] <= physd;
        dq_wr_q         <= dq_wr_q + 1'b1;
      end
      if (dq_pop) dq_rd_q <= dq_rd_q + 1'b1;
      dq_cnt_q <= dq_cnt_q + (QW+1)'(dq_push) - (QW+1)'(dq_pop);
    end
  end

  a_release_excludes_wb: assert property (@(posedge clk) disable iff (!rst_n)
    rel_act_q |-> !wb_tr_we);
  a_queue_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    dq_push |-> !dq_full);
endmodule
