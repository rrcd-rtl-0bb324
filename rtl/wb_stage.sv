// wb_stage: compression and writeback stages of the RRCD pipeline.
//
// Takes the four result blocks of one destination register from the SIMD
// unit (wb_valid/wb_ready, block 0 first). The compression stage runs each
// block through Com and registers it with Com's verdicts; one cycle later
// the writeback stage decides where the register is stored, following the
// paper's flow:
//   * Block 0 goes through the compressor (Com). If it does not fit any
//     pattern (c_compr = 0) the register is uncompressed: it stays in its
//     entry if it already held an uncompressed register there, otherwise it
//     takes the reliable entry offered by the USR (rsel selects the new
//     redirection), or, with none left, a slot of the LDS spill partition.
//     Blocks 0..3 are written straight through, one per cycle.
//   * If block 0 fits (c_compr = 1) the blocks are kept in the destination
//     register buffer (BRD). At block 3 the compressor gives its verdict:
//     - compressible: the compressed word is written, in one cycle, to the
//       register's current block if it was already compressed in the slice,
//       else to the block offered by the USR (a defective entry first);
//     - not compressible (misp = 1): the register is treated as
//       uncompressed and the BRD is drained into its entry over four cycles
//       while the pipeline is stalled (stall = 1, the paper's stall).
//   * A register held in the LDS (m = 1) is moved back into the slice when
//     a location is free; otherwise it keeps its spill slot. Spilled
//     registers are stored uncompressed, four blocks (this design's choice).
// When the register is done, the redirection-table row is rewritten, the new
// location allocated and the old one freed in the USR bitmap, and one event
// pulse tells which kind of write it was.
// Design choices beyond the paper: the compressed word is written at block 3
// (the group step for K = 16, 32 is only known then), the destination row is
// read when block 0 reaches writeback (the top reads it with the queued
// physical register), hold stops a new register from starting (window
// release), and with no location and no spill slot the register is dropped
// and flagged.
module wb_stage
  import rrcd_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // results from the SIMD unit
  input  logic              wb_valid,
  output logic              wb_ready,
  input  block_t            wb_data,
  // queued destination: physical register and its current TR row
  input  logic              dq_valid,
  input  logic [ENTRY_W-1:0] dq_phys,
  input  tr_row_t           dq_row,
  output logic              dq_pop,
  input  logic              hold,
  output logic              busy,
  // USR offers and bitmap updates
  input  logic              blk_valid,
  input  loc_t              blk_loc,
  input  logic              ent_valid,
  input  loc_t              ent_loc,
  input  logic              spl_valid,
  input  loc_t              spl_loc,
  output logic              alloc_en,
  output loc_t              alloc_loc,
  output logic              free_en,
  output loc_t              free_loc,
  // redirection-table write
  output logic              tr_we,
  output logic [ENTRY_W-1:0] tr_waddr,
  output tr_row_t           tr_wrow,
  // slice write port
  output logic              sl_we,
  output logic [ADDR_W-1:0] sl_waddr,
  output block_t            sl_wdata,
  // LDS spill-partition write port
  output logic              lds_we,
  output logic [SLOT_W+BLQ_W-1:0] lds_waddr,
  output block_t            lds_wdata,
  // status
  output logic              c_compr,
  output logic              misp,
  output logic              rsel,
  output logic              stall,
  output wb_event_t         ev
);
  typedef enum logic [1:0] {S_IDLE, S_UNC, S_CMP, S_DRAIN} state_t;

  state_t            st_q;
  logic [BLQ_W-1:0]  k_q;
  logic [ENTRY_W-1:0] phys_q;
  tr_row_t           row_q;
  loc_t              tgt_q;
  logic              tgt_new_q, tgt_ok_q, misp_q;

  // ------------------------------------------------- compression stage
  // Com examines each incoming block; the block and Com's verdicts are held
  // in the stage register cs_* until the writeback stage takes them.
  logic             com_valid;
  logic [BLQ_W-1:0] ck_q;
  logic             com_first, com_final;
  comp_t            com_word;
  logic             cs_valid_q, cs_first_q, cs_final_q;
  block_t           cs_data_q;
  comp_t            cs_word_q;
  logic             fsm_ready, fsm_take;

  assign fsm_take  = cs_valid_q & fsm_ready;
  assign wb_ready  = ~cs_valid_q | fsm_take;
  assign com_valid = wb_valid & wb_ready;

  compressor u_com (
    .clk(clk), .rst_n(rst_n), .in_valid(com_valid), .in_blk(ck_q),
    .in_data(wb_data), .c_first(com_first), .c_final(com_final), .comp_out(com_word)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ck_q       <= '0;
      cs_valid_q <= 1'b0;
      cs_first_q <= 1'b0;
      cs_final_q <= 1'b0;
      cs_data_q  <= '0;
      cs_word_q  <= '0;
    end else if (com_valid) begin
      ck_q       <= ck_q + 2'd1;
      cs_valid_q <= 1'b1;
      cs_first_q <= com_first;
      cs_final_q <= com_final;
      cs_data_q  <= wb_data;
      cs_word_q  <= com_word;
    end else if (fsm_take) begin
      cs_valid_q <= 1'b0;
    end
  end

  // ------------------------------------------------------------------- BRD
  logic             brd_we;
  logic [BLQ_W-1:0] brd_widx, brd_ridx;
  block_t           brd_rdata;

  dest_reg_buffer u_brd (
    .clk(clk), .we(brd_we), .widx(brd_widx), .wdata(cs_data_q),
    .ridx(brd_ridx), .rdata(brd_rdata)
  );

  // ------------------------------------------------------- target choices
  // Uncompressed register: keep entry, new reliable entry, or spill.
  function automatic void pick_unc(input tr_row_t r, output loc_t t,
                                   output logic is_new, output logic ok);
    t = '0; is_new = 1'b0; ok = 1'b1;
    if (r.v && !r.c && !r.m) begin
      t.kind = LOC_ENTRY; t.entry = r.entry;
    end else if (ent_valid) begin
      t = ent_loc; is_new = 1'b1;
    end else if (r.v && r.m) begin
      t.kind = LOC_SPILL; t.entry = r.entry;
    end else if (spl_valid) begin
      t = spl_loc; is_new = 1'b1;
    end else begin
      ok = 1'b0;
    end
  endfunction

  // Compressed register: keep block, new block, or spill.
  function automatic void pick_cmp(input tr_row_t r, output loc_t t,
                                   output logic is_new, output logic ok);
    t = '0; is_new = 1'b0; ok = 1'b1;
    if (r.v && r.c && !r.m) begin
      t.kind = LOC_BLOCK; t.entry = r.entry; t.blq = r.blq;
    end else if (blk_valid) begin
      t = blk_loc; is_new = 1'b1;
    end else if (r.v && r.m) begin
      t.kind = LOC_SPILL; t.entry = r.entry;
    end else if (spl_valid) begin
      t = spl_loc; is_new = 1'b1;
    end else begin
      ok = 1'b0;
    end
  endfunction

  function automatic loc_t old_loc(input tr_row_t r);
    loc_t l;
    l.entry = r.entry;
    l.blq   = r.blq;
    if (r.m)      l.kind = LOC_SPILL;
    else if (r.c) l.kind = LOC_BLOCK;
    else          l.kind = LOC_ENTRY;
    return l;
  endfunction

  // ----------------------------------------------------------- main FSM
  loc_t    u_t, c_t;
  logic    u_new, u_ok, c_new, c_ok;
  tr_row_t cur_row;

  always_comb begin
    cur_row = (st_q == S_IDLE) ? dq_row : row_q;
    pick_unc(cur_row, u_t, u_new, u_ok);
    pick_cmp(cur_row, c_t, c_new, c_ok);
  end

  // write one block of a register to the chosen location
  function automatic void put_block(input loc_t t, input logic [BLQ_W-1:0] b,
                                    output logic s_we, output logic [ADDR_W-1:0] s_a,
                                    output logic l_we, output logic [SLOT_W+BLQ_W-1:0] l_a);
    s_we = 1'b0; l_we = 1'b0;
    s_a  = {t.entry, b};
    l_a  = {t.entry[SLOT_W-1:0], b};
    if (t.kind == LOC_SPILL) l_we = 1'b1;
    else                     s_we = 1'b1;
  endfunction

  logic              commit;
  loc_t              c_loc;      // location being committed
  logic              c_isnew, c_isok, c_comp;
  state_t            st_n;
  logic [BLQ_W-1:0]  k_n;
  loc_t              tgt_n;
  logic              tgt_new_n, tgt_ok_n, misp_n;

  always_comb begin
    st_n      = st_q;
    k_n       = k_q;
    tgt_n     = tgt_q;
    tgt_new_n = tgt_new_q;
    tgt_ok_n  = tgt_ok_q;
    misp_n    = misp_q;
    fsm_ready = 1'b0;
    dq_pop    = 1'b0;
    brd_we    = 1'b0;
    brd_widx  = k_q;
    brd_ridx  = k_q;
    sl_we     = 1'b0;
    sl_waddr  = '0;
    sl_wdata  = cs_data_q;
    lds_we    = 1'b0;
    lds_waddr = '0;
    lds_wdata = cs_data_q;
    commit    = 1'b0;
    c_loc     = tgt_q;
    c_isnew   = tgt_new_q;
    c_isok    = tgt_ok_q;
    c_comp    = 1'b0;
    c_compr   = 1'b0;
    misp      = 1'b0;
    rsel      = 1'b0;

    unique case (st_q)
      S_IDLE: begin
        fsm_ready = dq_valid & ~hold;
        if (fsm_take) begin
          dq_pop  = 1'b1;
          c_compr = cs_first_q;
          if (!cs_first_q) begin
            tgt_n = u_t; tgt_new_n = u_new; tgt_ok_n = u_ok; misp_n = 1'b0;
            rsel  = u_new;
            if (u_ok) put_block(u_t, 2'd0, sl_we, sl_waddr, lds_we, lds_waddr);
            st_n = S_UNC;
          end else begin
            brd_we   = 1'b1;
            brd_widx = 2'd0;
            st_n     = S_CMP;
          end
          k_n = 2'd1;
        end
      end

      S_UNC: begin
        fsm_ready = 1'b1;
        if (cs_valid_q) begin
          if (tgt_ok_q) put_block(tgt_q, k_q, sl_we, sl_waddr, lds_we, lds_waddr);
          k_n = k_q + 2'd1;
          if (k_q == 2'd3) begin
            commit = 1'b1;
            st_n   = S_IDLE;
          end
        end
      end

      S_CMP: begin
        fsm_ready = 1'b1;
        c_compr  = 1'b1;
        if (cs_valid_q) begin
          brd_we   = 1'b1;
          brd_widx = k_q;
          k_n      = k_q + 2'd1;
          if (k_q == 2'd3) begin
            if (cs_final_q && !(c_ok && c_t.kind == LOC_SPILL)) begin
              // compressed word written once into its block
              rsel     = c_new;
              c_loc    = c_t; c_isnew = c_new; c_isok = c_ok; c_comp = 1'b1;
              if (c_ok) begin
                sl_we    = 1'b1;
                sl_waddr = {c_t.entry, c_t.blq};
                sl_wdata = BLK_W'(cs_word_q);
              end
              commit = 1'b1;
              st_n   = S_IDLE;
            end else if (cs_final_q) begin
              // compressible but spilled: stored uncompressed in the LDS
              tgt_n = c_t; tgt_new_n = c_new; tgt_ok_n = c_ok; misp_n = 1'b0;
              rsel  = c_new;
              k_n   = 2'd0;
              st_n  = S_DRAIN;
            end else begin
              // misprediction: drain the BRD into a reliable entry
              c_compr = 1'b0;
              misp    = 1'b1;
              tgt_n = u_t; tgt_new_n = u_new; tgt_ok_n = u_ok; misp_n = 1'b1;
              rsel  = u_new;
              k_n   = 2'd0;
              st_n  = S_DRAIN;
            end
          end
        end
      end

      S_DRAIN: begin
        misp     = misp_q;
        brd_ridx = k_q;
        sl_wdata = brd_rdata;
        lds_wdata = brd_rdata;
        if (tgt_ok_q) put_block(tgt_q, k_q, sl_we, sl_waddr, lds_we, lds_waddr);
        k_n = k_q + 2'd1;
        if (k_q == 2'd3) begin
          commit = 1'b1;
          st_n   = S_IDLE;
        end
      end

      default: st_n = S_IDLE;
    endcase
  end

  // --------------------------------------------------------------- commit
  always_comb begin
    tr_we     = commit;
    tr_waddr  = phys_q;
    tr_wrow   = '0;
    tr_wrow.v = c_isok;
    tr_wrow.c = c_comp & (c_loc.kind == LOC_BLOCK);
    tr_wrow.m = (c_loc.kind == LOC_SPILL);
    tr_wrow.blq   = (c_loc.kind == LOC_BLOCK) ? c_loc.blq : '0;
    tr_wrow.entry = c_loc.entry;
    alloc_en  = commit & c_isok & c_isnew;
    alloc_loc = c_loc;
    free_en   = commit & row_q.v & (c_isnew | ~c_isok);
    free_loc  = old_loc(row_q);

    ev             = '0;
    ev.regular     = commit & c_isok & ~c_isnew & (c_loc.kind != LOC_SPILL);
    ev.redir_entry = commit & c_isok & c_isnew & (c_loc.kind == LOC_ENTRY);
    ev.redir_block = commit & c_isok & c_isnew & (c_loc.kind == LOC_BLOCK);
    ev.lds         = commit & c_isok & (c_loc.kind == LOC_SPILL);
    ev.misp        = commit & misp_q & (st_q == S_DRAIN);
    ev.overflow    = commit & ~c_isok;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q      <= S_IDLE;
      k_q       <= '0;
      phys_q    <= '0;
      row_q     <= '0;
      tgt_q     <= '0;
      tgt_new_q <= 1'b0;
      tgt_ok_q  <= 1'b0;
      misp_q    <= 1'b0;
    end else begin
      st_q      <= st_n;
      k_q       <= k_n;
      tgt_q     <= tgt_n;
      tgt_new_q <= tgt_new_n;
      tgt_ok_q  <= tgt_ok_n;
      misp_q    <= misp_n;
      if (dq_pop) begin
        phys_q <= dq_phys;
        row_q  <= dq_row;
      end
    end
  end

  assign busy  = (st_q != S_IDLE);
  assign stall = (st_q == S_DRAIN);

  // While draining the writeback stage takes no block, so at most one new
  // block waits in the compression stage.
  a_no_take_in_drain: assert property (@(posedge clk) disable iff (!rst_n)
    (st_q == S_DRAIN) |-> !fsm_take);
  a_pop_needs_entry: assert property (@(posedge clk) disable iff (!rst_n)
    dq_pop |-> dq_valid);
endmodule
