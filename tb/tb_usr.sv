// tb_usr: the redirection selection unit against a reference model.
// A random fault map (about a third of the entries defective) is loaded.
// Then, for thousands of cycles, locations offered by the encoders are
// allocated and random owned ones freed. Each cycle the three offers must
// equal the model's choice: lowest free block of a defective entry, else of a
// reliable entry already in use, else block 0 of a free reliable entry; the
// lowest fully free reliable entry; the lowest free spill slot. Faulty blocks
// must never be offered. The run drives the slice to exhaustion so the
// fall-back levels and the "nothing free" cases all occur.
module tb_usr;
  import rrcd_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic fmap_we; logic [7:0] fmap_entry; logic [3:0] fmap_bits;
  logic blk_valid, ent_valid, spl_valid, blk_in_def;
  loc_t blk_loc, ent_loc, spl_loc;
  logic alloc_en, free_en; loc_t alloc_loc, free_loc;
  logic [8:0] free_entries, defective_entries;

  logic [3:0] fault [256];
  logic [3:0] busy  [256];
  logic       sbusy [128];
  int checks = 0, failures = 0;
  int n_def = 0, n_shr = 0, n_new = 0, n_noblk = 0, n_noent = 0, n_nospl = 0;

  usr dut (.clk(clk), .rst_n(rst_n), .fmap_we(fmap_we), .fmap_entry(fmap_entry), .fmap_bits(fmap_bits),
    .blk_valid(blk_valid), .blk_loc(blk_loc), .blk_in_defective(blk_in_def),
    .ent_valid(ent_valid), .ent_loc(ent_loc), .spl_valid(spl_valid), .spl_loc(spl_loc),
    .alloc_en(alloc_en), .alloc_loc(alloc_loc), .free_en(free_en), .free_loc(free_loc),
    .free_entries(free_entries), .defective_entries(defective_entries));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  function automatic bit used(input int e);
    return (busy[e] != 0);
  endfunction

  initial begin
    int ebv, eb, ee, es, ndef, nfree, lvl;
    logic [1:0] bb;
    fmap_we = 0; fmap_entry = 0; fmap_bits = 0;
    alloc_en = 0; free_en = 0; alloc_loc = '0; free_loc = '0;
    ndef = 0;
    for (int e = 0; e < 256; e++) begin
      fault[e] = ($urandom_range(0, 99) < 35) ? 4'($urandom_range(1, 15)) : 4'b0;
      busy[e] = 0;
      if (fault[e] != 0) ndef++;
    end
    for (int s = 0; s < 128; s++) sbusy[s] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 256; e++) begin
      @(negedge clk);
      fmap_we = 1; fmap_entry = 8'(e); fmap_bits = fault[e];
    end
    @(negedge clk); fmap_we = 0;
    #1 chk(defective_entries == 9'(ndef), "defective count");

    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      alloc_en = 0; free_en = 0;
      // ---- model of the three encoders
      ebv = -1; lvl = 0;
      for (int e = 0; e < 256 && ebv < 0; e++)
        for (int b = 0; b < 4 && ebv < 0; b++)
          if (fault[e] != 0 && !busy[e][b] && !fault[e][b]) begin ebv = e*4+b; lvl = 1; end
      for (int e = 0; e < 256 && ebv < 0; e++)
        for (int b = 0; b < 4 && ebv < 0; b++)
          if (fault[e] == 0 && used(e) && !busy[e][b]) begin ebv = e*4+b; lvl = 2; end
      for (int e = 0; e < 256 && ebv < 0; e++)
        if (fault[e] == 0 && !used(e)) begin ebv = e*4; lvl = 3; end
      ee = -1; nfree = 0;
      for (int e = 255; e >= 0; e--) if (fault[e] == 0 && !used(e)) begin ee = e; nfree++; end
      es = -1;
      for (int s = 127; s >= 0; s--) if (!sbusy[s]) es = s;
      #1;
      chk(blk_valid == (ebv >= 0), "blk_valid");
      if (ebv >= 0) begin
        chk({blk_loc.entry, blk_loc.blq} == 10'(ebv), $sformatf("blk offer %0d vs %0d", {blk_loc.entry, blk_loc.blq}, ebv));
        chk(!fault[blk_loc.entry][blk_loc.blq], "faulty block offered");
        chk(blk_in_def == (lvl == 1), "blk_in_defective");
        if (lvl == 1) n_def++; else if (lvl == 2) n_shr++; else n_new++;
      end else n_noblk++;
      chk(ent_valid == (ee >= 0), "ent_valid");
      if (ee >= 0) chk(ent_loc.entry == 8'(ee), "ent offer"); else n_noent++;
      chk(spl_valid == (es >= 0), "spl_valid");
      if (es >= 0) chk(spl_loc.entry == 8'(es), "spl offer"); else n_nospl++;
      chk(free_entries == 9'(nfree), "free entry count");
      // ---- stimulus: mostly allocate in the first half, mostly free later
      if ($urandom_range(0, 99) < ((t % 2000) < 1200 ? 75 : 20)) begin
        case ($urandom_range(0, 2))
          0: if (blk_valid) begin alloc_en = 1; alloc_loc = blk_loc; end
          1: if (ent_valid) begin alloc_en = 1; alloc_loc = ent_loc; end
          default: if (spl_valid) begin alloc_en = 1; alloc_loc = spl_loc; end
        endcase
      end else begin
        // free something owned: a whole entry, a block or a slot
        eb = $urandom_range(0, 255); bb = 2'($urandom);
        case ($urandom_range(0, 2))
          0: if (fault[eb] == 0 && busy[eb] == 4'hf) begin
               free_en = 1; free_loc = '{kind: LOC_ENTRY, entry: 8'(eb), blq: 2'd0}; end
          1: if (busy[eb][bb] && !fault[eb][bb] && busy[eb] != 4'hf) begin
               free_en = 1; free_loc = '{kind: LOC_BLOCK, entry: 8'(eb), blq: bb}; end
          default: if (sbusy[eb % 128]) begin
               free_en = 1; free_loc = '{kind: LOC_SPILL, entry: 8'(eb % 128), blq: 2'd0}; end
        endcase
      end
      @(posedge clk);
      if (free_en) case (free_loc.kind)
        LOC_ENTRY: busy[free_loc.entry] = 0;
        LOC_BLOCK: busy[free_loc.entry][free_loc.blq] = 0;
        default:   sbusy[free_loc.entry] = 0;
      endcase
      if (alloc_en) case (alloc_loc.kind)
        LOC_ENTRY: busy[alloc_loc.entry] = 4'hf;
        LOC_BLOCK: busy[alloc_loc.entry][alloc_loc.blq] = 1;
        default:   sbusy[alloc_loc.entry] = 1;
      endcase
    end
    $display("offers: defective=%0d shared=%0d new-entry=%0d none: blk=%0d ent=%0d spill=%0d",
             n_def, n_shr, n_new, n_noblk, n_noent, n_nospl);
    chk(n_def > 0 && n_shr > 0 && n_new > 0 && n_noent > 0, "all offer levels seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
