// tb_rrcd_scenarios: the design under the three reliability scenarios of the
// evaluation, at its default size.
//
// For each scenario the design is reset and given a fault map drawn from that
// scenario's distribution of faulty bits per entry (percent of entries with
// 0 / 1 / 2 / 3 / >=4 faulty bits): common 34/33/20/10/3, clustered
// 43/20/12/10/15, dispersed 26/35/23/12/4. One faulty bit is repaired by the
// entry's spare (ECP); i >= 2 faulty bits make i faulty blocks. Each
// scenario is run at three register-file occupancies, the lowest, average
// and highest reported for the evaluated programs (54 %, 74 %, 93 %):
// 6 x 23, 8 x 24 and 7 x 34 registers (wavefronts x window). The wavefronts
// run random instructions whose results mix compressible and random data.
// Every operand is checked against a reference copy; the breakdown of
// register writes (in place, new redirection to a reliable entry, to a block
// of a defective entry, to the LDS) is printed per run, and every run must
// end without losing a register or writing a faulty block.
// The drawn faults are applied to the slice array, as in tb_rrcd_top.
module tb_rrcd_scenarios;
  import rrcd_pkg::*;
  import tb_patterns::*;

  localparam int MAXWF = 8, MAXWIN = 40, NOPS = 1200;

  // register-file occupancy: wavefronts x window size
  int nwf_of [3] = '{6, 8, 7};
  int win_of [3] = '{23, 24, 34};
  int NWF, WIN;

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

  // sub-Vmin cells: the design's slice array is ideal, so the drawn faults
  // are applied here. A write to a faulty block is an error; the cell behind
  // a spare bit is inverted after every write to its block.
  logic [3:0]  f_map  [256];
  logic        f_ecp  [256];
  logic [10:0] f_pos  [256];
  int n_faulty_wr = 0;

  always @(posedge clk) if (rst_n && dut.sl_we) begin : sub_vmin
    logic [9:0] a; logic [7:0] e; block_t d;
    a = dut.sl_waddr; e = a[9:2]; d = dut.sl_wdata;
    if (f_map[e][a[1:0]]) n_faulty_wr++;
    if (f_ecp[e] && f_pos[e][10:9] == a[1:0])
      #1 dut.u_slice.mem[a][f_pos[e][8:0]] = ~d[f_pos[e][8:0]];
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
    repeat (1500000) @(posedge clk);
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
  reg64_t regs  [MAXWF][MAXWIN];
  bit     valid [MAXWF][MAXWIN];

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

  // distribution of faulty bits per entry, cumulative percent: 0,1,2,3 bits
  int cum [3][4] = '{'{34, 67, 87, 97}, '{43, 63, 75, 85}, '{26, 61, 84, 96}};
  string sname [3] = '{"common", "clustered", "dispersed"};

  initial begin
    int nf, w, n0 [7], tot;
    fmap_we = 0; fmap_entry = 0; fmap_bits = 0; ecp_we = 0; ecp_valid = 0; ecp_entry = 0; ecp_pos = 0;
    alloc_we = 0; alloc_wf = 0; alloc_base = 0;
    win_size = 0; rel_valid = 0; rel_wf = 0; iss_valid = 0; iss_wf = 0; iss_idc0 = 0;
    iss_idc1 = 0; iss_idcd = 0; iss_has_dest = 0; wb_valid = 0; wb_data = '0;
    for (int a = 0; a < 512; a++) lds[a] = '0;
    for (int run = 0; run < 9; run++) begin
      int sc, oc;
      sc = run / 3; oc = run % 3;
      NWF = nwf_of[oc]; WIN = win_of[oc]; win_size = 9'(WIN);
      rst_n = 0;
      repeat (3) @(posedge clk);
      rst_n = 1;
      for (int e = 0; e < 256; e++) begin
        int p; logic [3:0] m;
        p = $urandom_range(0, 99);
        nf = (p < cum[sc][1]) ? 0 : (p < cum[sc][2]) ? 2 : (p < cum[sc][3]) ? 3 : 4;
        m = 0;
        while ($countones(m) < nf) m[$urandom_range(0, 3)] = 1'b1;
        @(negedge clk);
        fmap_we = 1; fmap_entry = 8'(e); fmap_bits = m;
        ecp_we = 1; ecp_entry = 8'(e); ecp_valid = (p >= cum[sc][0] && p < cum[sc][1]); ecp_pos = 11'($urandom);
        f_map[e] = m; f_ecp[e] = ecp_valid; f_pos[e] = ecp_pos;
      end
      @(negedge clk); fmap_we = 0; ecp_we = 0;
      @(negedge clk);
      nf = 0;
      for (int e = 0; e < 256; e++) nf += int'(f_map[e] != 0);
      chk(int'(defective_entries) == nf, $sformatf("%s: defective entries %0d, map has %0d", sname[sc], defective_entries, nf));
      n0 = '{n_regular, n_redir_ent, n_redir_blk, n_lds, n_misp, n_overflow, n_redir_def};
      for (w = 0; w < NWF; w++) place_wf(w);
      for (w = 0; w < NWF; w++)
        for (int i = 0; i < WIN; i++) instr(w, 0, 0, i, 1);
      for (int t = 0; t < NOPS; t++) begin
        w = $urandom_range(0, NWF - 1);
        instr(w, $urandom_range(0, WIN - 1), $urandom_range(0, WIN - 1),
              $urandom_range(0, WIN - 1), 1'b1);
      end
      tot = (n_regular - n0[0]) + (n_redir_ent - n0[1]) + (n_redir_blk - n0[2]) + (n_lds - n0[3]);
      $display("%-9s occupancy %0d%% (%0d x %0d), defective entries %0d/256: writes %0d, regular %0d%%, to reliable entry %0d%%, to block %0d%% (in defective entry %0d%%), to LDS %0d%%, mispredicted %0d%%",
               sname[sc], 100 * NWF * WIN / 256, NWF, WIN, defective_entries, tot,
               100 * (n_regular - n0[0]) / tot, 100 * (n_redir_ent - n0[1]) / tot,
               100 * (n_redir_blk - n0[2]) / tot, 100 * (n_redir_def - n0[6]) / tot,
               100 * (n_lds - n0[3]) / tot, 100 * (n_misp - n0[4]) / tot);
      chk(n_overflow == n0[5], {sname[sc], ": a register was lost"});
      chk(n_faulty_wr == 0, {sname[sc], ": write to a faulty block"});
      chk(n_redir_def > n0[6], {sname[sc], ": no register placed in a defective entry"});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
