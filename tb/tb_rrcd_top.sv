// tb_rrcd_top: end-to-end test of the RRCD register-file path at its default
// size (256-entry slice, 256-row tables, 128 spill slots).
//
// A fault map is drawn from the "common" scenario distribution of the
// reliability model (per entry: 34 % no faulty bit, 33 % one - corrected by
// the per-entry spare bit, so reliable - 20 % two, 10 % three, 3 % four or
// more faulty bits, i.e. that many faulty 64 B blocks). Eight wavefronts with
// 32-register windows fill all 256 physical registers. The testbench plays
// the SIMD unit and the LDS: it issues instructions with two sources and a
// destination, checks every source block against a reference copy of all
// registers, and returns a result register that is, at random, uniform,
// strided, two-strided, regular only in its first block (a compression
// misprediction) or random. Windows are released and placed again now and
// then. The faults of the map are applied to the slice array (see the
// sub-Vmin cell model below), so a misused faulty block or a missing
// correction shows up as a wrong source block. Every mechanism of the
// design must occur at least once: in-place
// writes, new redirections to reliable entries and to blocks of defective
// entries, spills to and reads from the LDS, mispredictions with their
// stall, compressed reads, spare-bit repairs, window release and issue
// back-pressure.
module tb_rrcd_top;
  import rrcd_pkg::*;
  import tb_patterns::*;

  localparam int NWF = 8, WIN = 32, NOPS = 3000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic fmap_we; logic [7:0] fmap_entry; logic [3:0] fmap_bits;
  logic ecp_we, ecp_valid; logic [7:0] ecp_entry; logic [10:0] ecp_pos;
  logic alloc_we; logic [7:0] alloc_wf, alloc_base; logic [8:0] win_size;
  logic rel_valid, rel_ready; logic [7:0] rel_wf;
  logic iss_valid, iss_ready; logic [7:0] iss_wf, iss_idc0, iss_idc1, iss_idcd; logic iss_has_dest;
  logic op_valid; logic [1:0] op_blk; block_t op0, op1;
  logic wb_valid, wb_ready; block_t wb_data;
  logic lds_rd_en [2]; logic [8:0] lds_rd_addr [2]; block_t lds_rd_data [2];
  logic lds_we; logic [8:0] lds_waddr; block_t lds_wdata;
  wb_event_t ev; logic ev_redir_defective, c_compr, misp, rsel, wb_stall, rel_busy;
  logic [8:0] free_entries, defective_entries;

  rrcd_top dut (.*);

  always #5 clk = ~clk;

  // ------------------------------------------------------ LDS model (1 cycle)
  block_t lds [512];
  always @(posedge clk) begin
    for (int s = 0; s < 2; s++) if (lds_rd_en[s]) lds_rd_data[s] <= lds[lds_rd_addr[s]];
    if (lds_we) lds[lds_waddr] <= lds_wdata;
  end

  int checks = 0, failures = 0;

  // ------------------------------------------- sub-Vmin cells of the slice
  // The slice array in the design is ideal; the faults of the drawn map are
  // applied here. Writing a block that the map marks faulty is an error. In
  // an entry with one faulty bit, that cell keeps the wrong value: after
  // every write to its block the bit is inverted in the array, so only the
  // spare bit can restore it on a read.
  logic [3:0]  f_map  [256];
  logic        f_ecp  [256];
  logic [10:0] f_pos  [256];
  int n_faulty_wr = 0, n_bad_cell = 0;

  always @(posedge clk) if (rst_n && dut.sl_we) begin : sub_vmin
    logic [9:0] a; logic [7:0] e; block_t d;
    a = dut.sl_waddr; e = a[9:2]; d = dut.sl_wdata;
    if (f_map[e][a[1:0]]) begin
      n_faulty_wr++;
      $display("FAIL write to faulty block %0d of entry %0d", a[1:0], e);
    end
    if (f_ecp[e] && f_pos[e][10:9] == a[1:0]) begin
      #1 dut.u_slice.mem[a][f_pos[e][8:0]] = ~d[f_pos[e][8:0]];
      n_bad_cell++;
    end
  end
  int n_regular = 0, n_redir_ent = 0, n_redir_blk = 0, n_redir_def = 0, n_lds = 0;
  int n_misp = 0, n_overflow = 0, n_wb_stall = 0, n_iss_stall = 0, n_lds_rd = 0;
  int n_comp_rd = 0, n_release = 0, n_rsel = 0;

  always @(posedge clk) if (rst_n) begin
    n_regular   += int'(ev.regular);
    n_redir_ent += int'(ev.redir_entry);
    n_redir_blk += int'(ev.redir_block);
    n_redir_def += int'(ev_redir_defective);
    n_lds       += int'(ev.lds);
    n_misp      += int'(ev.misp);
    n_overflow  += int'(ev.overflow);
    n_rsel      += int'(rsel);
    if (wb_stall) n_wb_stall++;
    if (iss_valid && !iss_ready) n_iss_stall++;
    if (lds_rd_en[0] || lds_rd_en[1]) n_lds_rd++;
    if (dut.u_rd.d_act_q && dut.u_rd.d_k_q == 0 && (dut.u_rd.d_c_q[0] || dut.u_rd.d_c_q[1])) n_comp_rd++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  // ------------------------------------------------------- reference state
  reg64_t regs  [NWF][WIN];
  bit     valid [NWF][WIN];

  function automatic void new_value(output reg64_t r);
    int unsigned k;
    case ($urandom_range(0, 9))
      0, 1, 2: rand_comp_reg(r, k);
      3: begin make_reg(4, $urandom, 32'd1, $urandom, r); r[$urandom_range(16, 63)] ^= 32'h100; end
      default: rand_reg(r);
    endcase
  endfunction

  task automatic write_reg(input int w, input int i);
    reg64_t r;
    new_value(r);
    for (int b = 0; b < 4; b++) begin
      @(negedge clk);
      wb_valid = 1; wb_data = get_block(r, b);
      @(posedge clk);
      while (!wb_ready) @(posedge clk);
    end
    @(negedge clk); wb_valid = 0;
    // wait for the commit (after a possible BRD drain)
    while (dut.u_wb.busy) @(negedge clk);
    regs[w][i] = r; valid[w][i] = 1;
  endtask

  task automatic place_wf(input int w);
    @(negedge clk);
    alloc_we = 1; alloc_wf = 8'(w); alloc_base = 8'(w * WIN);
    @(negedge clk); alloc_we = 0;
    for (int i = 0; i < WIN; i++) valid[w][i] = 0;
  endtask

  task automatic release_wf(input int w);
    @(negedge clk);
    rel_valid = 1; rel_wf = 8'(w);
    @(posedge clk);
    while (!rel_ready) @(posedge clk);
    @(negedge clk); rel_valid = 0;
    while (rel_busy) @(negedge clk);
    n_release++;
  endtask

  // one instruction: read two sources, then write the destination
  task automatic instr(input int w, input int s0, input int s1, input int d, input bit has_d);
    @(negedge clk);
    iss_valid = 1; iss_wf = 8'(w); iss_idc0 = 8'(s0); iss_idc1 = 8'(s1);
    iss_idcd = 8'(d); iss_has_dest = has_d;
    @(posedge clk);
    while (!iss_ready) @(posedge clk);
    @(negedge clk); iss_valid = 0;
    for (int b = 0; b < 4; b++) begin
      while (!op_valid) @(negedge clk);
      chk(op_blk == 2'(b), "operand block order");
      if (valid[w][s0]) chk(op0 == get_block(regs[w][s0], b), $sformatf("wf%0d r%0d blk%0d src0", w, s0, b));
      if (valid[w][s1]) chk(op1 == get_block(regs[w][s1], b), $sformatf("wf%0d r%0d blk%0d src1", w, s1, b));
      @(negedge clk);
    end
    if (has_d) write_reg(w, d);
  endtask

  initial begin
    int nf, w;
    fmap_we = 0; fmap_entry = 0; fmap_bits = 0; ecp_we = 0; ecp_valid = 0; ecp_entry = 0; ecp_pos = 0; alloc_we = 0; alloc_wf = 0; alloc_base = 0;
    win_size = 9'(WIN); rel_valid = 0; rel_wf = 0; iss_valid = 0; iss_wf = 0; iss_idc0 = 0;
    iss_idc1 = 0; iss_idcd = 0; iss_has_dest = 0; wb_valid = 0; wb_data = '0;
    for (int a = 0; a < 512; a++) lds[a] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fault map, "common" scenario
    for (int e = 0; e < 256; e++) begin
      int p; logic [3:0] m;
      p = $urandom_range(0, 99);
      nf = (p < 67) ? 0 : (p < 87) ? 2 : (p < 97) ? 3 : 4;
      m = 0;
      while ($countones(m) < nf) m[$urandom_range(0, 3)] = 1'b1;
      @(negedge clk);
      fmap_we = 1; fmap_entry = 8'(e); fmap_bits = m;
      // entries with exactly one faulty bit get an error-correcting pointer
      ecp_we = 1; ecp_entry = 8'(e); ecp_valid = (p >= 34 && p < 67); ecp_pos = 11'($urandom);
      f_map[e] = m; f_ecp[e] = ecp_valid; f_pos[e] = ecp_pos;
    end
    @(negedge clk); fmap_we = 0; ecp_we = 0;
    $display("defective entries: %0d of 256", defective_entries);
    for (w = 0; w < NWF; w++) place_wf(w);
    // first touch of every register
    for (w = 0; w < NWF; w++)
      for (int i = 0; i < WIN; i++) instr(w, 0, 0, i, 1);
    // random instructions
    for (int t = 0; t < NOPS; t++) begin
      w = $urandom_range(0, NWF - 1);
      instr(w, $urandom_range(0, WIN - 1), $urandom_range(0, WIN - 1),
            $urandom_range(0, WIN - 1), $urandom_range(0, 7) != 0);
      if (t % 700 == 699) begin
        release_wf(w);
        place_wf(w);
      end
    end
    // two instructions back to back: the second waits for the read stage
    @(negedge clk);
    iss_valid = 1; iss_wf = 0; iss_idc0 = 0; iss_idc1 = 1; iss_has_dest = 0;
    @(negedge clk);
    repeat (4) @(negedge clk);
    iss_valid = 0;
    repeat (6) @(negedge clk);

    $display("writes: regular=%0d redirect-entry=%0d redirect-block=%0d (defective entry %0d) lds=%0d",
             n_regular, n_redir_ent, n_redir_blk, n_redir_def, n_lds);
    $display("mispredictions=%0d wb-stall-cycles=%0d issue-stall-cycles=%0d lds-read-cycles=%0d",
             n_misp, n_wb_stall, n_iss_stall, n_lds_rd);
    $display("compressed-reads=%0d releases=%0d rsel=%0d overflow=%0d", n_comp_rd, n_release, n_rsel, n_overflow);
    $display("writes over a faulty cell repaired by the spare bit=%0d writes to faulty blocks=%0d", n_bad_cell, n_faulty_wr);
    chk(n_regular > 0,   "no in-place write");
    chk(n_redir_ent > 0, "no redirection to a reliable entry");
    chk(n_redir_def > 0, "no redirection to a defective entry");
    chk(n_lds > 0,       "no spill to the LDS");
    chk(n_lds_rd > 0,    "no read from the LDS");
    chk(n_misp > 0,      "no misprediction");
    chk(n_wb_stall >= 4 * n_misp && n_wb_stall > 0, "misprediction stall shorter than four cycles");
    chk(n_iss_stall > 0, "no issue back-pressure");
    chk(n_comp_rd > 0,   "no compressed read");
    chk(n_release > 0,   "no window release");
    chk(n_overflow == 0, "spill partition overflowed");
    chk(n_faulty_wr == 0, "writes to faulty blocks");
    chk(n_bad_cell > 0,   "no write over a faulty cell covered by the spare bit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
