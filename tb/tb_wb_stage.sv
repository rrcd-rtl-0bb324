// tb_wb_stage: directed scenarios for the compression/writeback stage.
// The testbench plays the redirection table (dq_row) and the USR (offers).
// For each scenario it sends the four result blocks, records every slice and
// LDS write and the commit (TR row, allocation, free, event), and compares
// them with the expected outcome worked out by hand for that scenario.
// It also counts the stall cycles after a misprediction (the paper's
// four-cycle stall), checks that a following register waits for them, and
// checks that compressed words expand to the data.
module tb_wb_stage;
  import rrcd_pkg::*;
  import tb_patterns::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wb_valid, wb_ready; block_t wb_data;
  logic dq_valid, dq_pop, hold, busy; logic [7:0] dq_phys; tr_row_t dq_row;
  logic blk_valid, ent_valid, spl_valid; loc_t blk_loc, ent_loc, spl_loc;
  logic alloc_en, free_en; loc_t alloc_loc, free_loc;
  logic tr_we; logic [7:0] tr_waddr; tr_row_t tr_wrow;
  logic sl_we; logic [9:0] sl_waddr; block_t sl_wdata;
  logic lds_we; logic [8:0] lds_waddr; block_t lds_wdata;
  logic c_compr, misp, rsel, stall; wb_event_t ev;
  int checks = 0, failures = 0;

  wb_stage dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- monitor
  block_t    sl_w  [int];
  block_t    lds_w [int];
  int        n_commit, stall_cycles, blocked_cycles;
  tr_row_t   c_row; logic [7:0] c_addr;
  logic      c_alloc, c_free; loc_t c_aloc, c_floc; wb_event_t c_ev;

  always @(posedge clk) if (rst_n) begin
    if (sl_we)  sl_w[int'(sl_waddr)]   = sl_wdata;
    if (lds_we) lds_w[int'(lds_waddr)] = lds_wdata;
    if (tr_we) begin
      n_commit++; c_row = tr_wrow; c_addr = tr_waddr;
      c_alloc = alloc_en; c_aloc = alloc_loc; c_free = free_en; c_floc = free_loc; c_ev = ev;
    end
    if (stall) stall_cycles++;
    if (wb_valid && !wb_ready) blocked_cycles++;
  end

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic run(input tr_row_t row, input reg64_t r);
    sl_w.delete(); lds_w.delete(); n_commit = 0; stall_cycles = 0;
    @(negedge clk);
    dq_valid = 1; dq_phys = 8'd42; dq_row = row;
    for (int b = 0; b < 4; b++) begin
      wb_valid = 1; wb_data = get_block(r, b);
      do @(posedge clk); while (!wb_ready);
      @(negedge clk);
      if (b == 1) begin dq_valid = 0; dq_row = '0; end   // popped with block 0
    end
    wb_valid = 0;
    repeat (8) @(negedge clk);
    chk(n_commit == 1, "one commit");
    chk(c_addr == 8'd42, "commit address");
  endtask

  function automatic tr_row_t mk(input bit v, c, m, input int blq, entry);
    tr_row_t t; t.v = v; t.c = c; t.m = m; t.blq = 2'(blq); t.entry = 8'(entry);
    return t;
  endfunction

  function automatic bit expands_to(input block_t w, input reg64_t r);
    comp_t cw; reg64_t e; int k;
    cw = comp_t'(w[COMPW_BITS-1:0]);
    k = 2 << cw.kcode;
    make_reg(k, cw.base, cw.d1, cw.dr - 32'(k - 1) * cw.d1, e);
    return e == r;
  endfunction

  task automatic unc_in(input int entry, input reg64_t r, input string s);
    for (int b = 0; b < 4; b++)
      chk(sl_w.exists(entry*4+b) && sl_w[entry*4+b] == get_block(r, b), {s, " block written"});
    chk(sl_w.num() == 4, {s, " four writes"});
  endtask

  initial begin
    reg64_t rc, ru, rm; int unsigned k;
    wb_valid = 0; wb_data = '0; dq_valid = 0; dq_phys = 0; dq_row = '0; hold = 0;
    blk_valid = 1; blk_loc = '{kind: LOC_BLOCK, entry: 8'd200, blq: 2'd3};
    ent_valid = 1; ent_loc = '{kind: LOC_ENTRY, entry: 8'd17,  blq: 2'd0};
    spl_valid = 1; spl_loc = '{kind: LOC_SPILL, entry: 8'd9,   blq: 2'd0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    rand_reg(ru);
    make_reg(8, 32'h1000, 32'd4, 32'd100, rc);
    make_reg(4, 32'h2000, 32'd1, 32'd50, rm); rm[40] ^= 32'h8;   // regular block 0, broken later

    // 1: first write, uncompressed -> new reliable entry
    run(mk(0,0,0,0,0), ru);
    unc_in(17, ru, "s1");
    chk(c_row == mk(1,0,0,0,17) && c_alloc && c_aloc == ent_loc && !c_free && c_ev.redir_entry, "s1 commit");
    chk(stall_cycles == 0, "s1 no stall");

    // 2: uncompressed again in its entry -> regular write in place
    run(mk(1,0,0,0,33), ru);
    unc_in(33, ru, "s2");
    chk(c_row == mk(1,0,0,0,33) && !c_alloc && !c_free && c_ev.regular, "s2 commit");

    // 3: uncompressed register becomes compressible -> block of defective entry
    run(mk(1,0,0,0,33), rc);
    chk(sl_w.num() == 1 && sl_w.exists(200*4+3) && expands_to(sl_w[200*4+3], rc), "s3 one compressed write");
    chk(c_row == mk(1,1,0,3,200) && c_alloc && c_aloc == blk_loc, "s3 row/alloc");
    chk(c_free && c_floc.kind == LOC_ENTRY && c_floc.entry == 8'd33 && c_ev.redir_block, "s3 free old entry");

    // 4: compressed stays compressed -> rewritten in its own block
    run(mk(1,1,0,1,77), rc);
    chk(sl_w.num() == 1 && sl_w.exists(77*4+1) && expands_to(sl_w[77*4+1], rc), "s4 in place");
    chk(c_row == mk(1,1,0,1,77) && !c_alloc && !c_free && c_ev.regular, "s4 commit");

    // 5: misprediction -> BRD drained to reliable entry, four-cycle stall
    run(mk(1,1,0,2,77), rm);
    unc_in(17, rm, "s5");
    chk(stall_cycles == 4, $sformatf("s5 stall of four cycles (%0d)", stall_cycles));
    chk(c_row == mk(1,0,0,0,17) && c_ev.misp && c_ev.redir_entry, "s5 commit");
    chk(c_free && c_floc.kind == LOC_BLOCK && c_floc.entry == 8'd77 && c_floc.blq == 2'd2, "s5 free block");

    // 6: no reliable entry left -> spill to the LDS
    ent_valid = 0;
    run(mk(0,0,0,0,0), ru);
    chk(sl_w.num() == 0 && lds_w.num() == 4, "s6 four LDS writes");
    for (int b = 0; b < 4; b++) chk(lds_w.exists(9*4+b) && lds_w[9*4+b] == get_block(ru, b), "s6 LDS data");
    chk(c_row == mk(1,0,1,0,9) && c_alloc && c_aloc == spl_loc && c_ev.lds, "s6 commit");

    // 7: spilled register written again, slice still full -> same slot
    run(mk(1,0,1,0,5), ru);
    chk(lds_w.num() == 4 && lds_w.exists(5*4), "s7 same slot");
    chk(c_row == mk(1,0,1,0,5) && !c_alloc && !c_free && c_ev.lds, "s7 commit");

    // 8: spilled register, an entry is free again -> back into the slice
    ent_valid = 1;
    run(mk(1,0,1,0,5), ru);
    unc_in(17, ru, "s8");
    chk(c_free && c_floc.kind == LOC_SPILL && c_floc.entry == 8'd5, "s8 free slot");

    // 9: compressible, no block and no slot -> overflow, row invalid
    blk_valid = 0; spl_valid = 0;
    run(mk(0,0,0,0,0), rc);
    chk(sl_w.num() == 0 && lds_w.num() == 0 && c_row.v == 0 && c_ev.overflow, "s9 overflow");
    blk_valid = 1; spl_valid = 1;

    // 10: random compressible registers of every group size
    for (int t = 0; t < 60; t++) begin
      rand_comp_reg(rc, k);
      run(mk(0,0,0,0,0), rc);
      chk(sl_w.exists(200*4+3) && expands_to(sl_w[200*4+3], rc), $sformatf("s10 k=%0d", k));
    end

    // 12: a register right behind a misprediction waits for the drain
    sl_w.delete(); n_commit = 0; blocked_cycles = 0;
    @(negedge clk);
    fork
      begin
        for (int b = 0; b < 8; b++) begin
          wb_valid = 1; wb_data = (b < 4) ? get_block(rm, b) : get_block(ru, b - 4);
          do @(posedge clk); while (!wb_ready);
          @(negedge clk);
        end
        wb_valid = 0;
      end
      begin
        dq_valid = 1; dq_phys = 8'd42; dq_row = mk(1,1,0,2,77);
        do @(posedge clk); while (!dq_pop);
        @(negedge clk); dq_phys = 8'd43; dq_row = mk(0,0,0,0,0);
        do @(posedge clk); while (!dq_pop);
        @(negedge clk); dq_valid = 0;
      end
    join
    repeat (8) @(negedge clk);
    chk(n_commit == 2 && c_addr == 8'd43, "s12 two commits");
    chk(blocked_cycles == 4, $sformatf("s12 next register held four cycles (%0d)", blocked_cycles));
    unc_in(17, ru, "s12");

    // 11: hold keeps a register from starting
    hold = 1;
    @(negedge clk); dq_valid = 1; dq_row = '0; wb_valid = 1;
    repeat (3) begin @(posedge clk); #1 chk(!wb_ready && !dq_pop, "s11 hold"); end
    @(negedge clk); wb_valid = 0; dq_valid = 0; hold = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
