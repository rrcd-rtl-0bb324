// tb_operand_read: the operand-read and decompression stages against slice
// and LDS models held in the testbench (one-cycle read latency). Source
// registers are placed uncompressed in an entry, compressed in one block, or
// spilled. Each instruction must deliver blocks 0..3 of both sources on
// op0/op1, block 0 two clock edges after start is taken, one per cycle, and a
// compressed source must cost exactly one slice read.
module tb_operand_read;
  import rrcd_pkg::*;
  import tb_patterns::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, ready;
  tr_row_t row_in [2];
  logic sl_rd_en [2]; logic [9:0] sl_rd_addr [2]; block_t sl_rd_data [2];
  logic lds_rd_en [2]; logic [8:0] lds_rd_addr [2]; block_t lds_rd_data [2];
  logic op_valid; logic [1:0] op_blk; block_t op [2];
  int checks = 0, failures = 0;
  int n_unc = 0, n_cmp = 0, n_spl = 0;

  operand_read dut (.*);

  always #5 clk = ~clk;

  block_t slice [1024];
  block_t lds   [512];
  int     sl_reads;
  always @(posedge clk) begin
    for (int s = 0; s < 2; s++) begin
      if (sl_rd_en[s])  begin sl_rd_data[s]  <= slice[sl_rd_addr[s]]; sl_reads++; end
      if (lds_rd_en[s]) lds_rd_data[s] <= lds[lds_rd_addr[s]];
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  // place register r at a random location of the given kind
  task automatic place(input int kind, input int idx, input reg64_t r, output tr_row_t row);
    int unsigned k; comp_t cw;
    row = '0; row.v = 1;
    if (kind == 0) begin
      row.entry = 8'(idx);
      for (int b = 0; b < 4; b++) slice[idx*4+b] = get_block(r, b);
    end else if (kind == 1) begin
      row.c = 1; row.entry = 8'(idx); row.blq = 2'($urandom);
      k = 64;
      for (int kc = 5; kc >= 0; kc--) begin
        // find the group size the generator used (largest that fits)
        reg64_t e; int kk; kk = 2 << kc;
        make_reg(kk, r[0], r[1] - r[0], r[kk % 64] - r[kk % 64 - 1], e);
        if (e == r && k == 64 && kc < 5) k = kk;
        if (e == r && kc == 5) k = 64;
      end
      cw.kcode = 3'($clog2(k) - 1); cw.base = r[0]; cw.d1 = r[1] - r[0];
      cw.dr = (k == 64) ? 32'd0 : r[k] - r[0];
      slice[idx*4 + row.blq] = BLK_W'(cw);
    end else begin
      row.m = 1; row.entry = 8'(idx % 128);
      for (int b = 0; b < 4; b++) lds[(idx % 128)*4+b] = get_block(r, b);
    end
  endtask

  initial begin
    reg64_t r [2]; int kind [2]; int unsigned k; int t0, reads0, exp_reads;
    start = 0; row_in[0] = '0; row_in[1] = '0; sl_reads = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      exp_reads = 0;
      for (int s = 0; s < 2; s++) begin
        kind[s] = $urandom_range(0, 2);
        if (kind[s] == 1) rand_comp_reg(r[s], k); else rand_reg(r[s]);
        place(kind[s], 2*(t % 100) + s, r[s], row_in[s]);
        exp_reads += (kind[s] == 0) ? 4 : (kind[s] == 1) ? 1 : 0;
        if (kind[s] == 0) n_unc++; else if (kind[s] == 1) n_cmp++; else n_spl++;
      end
      @(negedge clk);
      chk(ready, "ready when idle");
      start = 1; reads0 = sl_reads;
      @(posedge clk); t0 = $time;
      @(negedge clk); start = 0;
      for (int b = 0; b < 4; b++) begin
        while (!op_valid) @(negedge clk);
        if (b == 0) chk(($time - t0) / 10 == 2, $sformatf("latency %0d", ($time - t0) / 10));
        chk(op_blk == 2'(b), "block order");
        chk(op[0] == get_block(r[0], b), $sformatf("src0 kind %0d blk %0d", kind[0], b));
        chk(op[1] == get_block(r[1], b), $sformatf("src1 kind %0d blk %0d", kind[1], b));
        @(negedge clk);
      end
      chk(sl_reads - reads0 == exp_reads, $sformatf("slice reads %0d vs %0d", sl_reads - reads0, exp_reads));
    end
    // back-to-back issue: ready again in the cycle block 3 is read
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    repeat (2) @(negedge clk);
    chk(!ready, "busy while reading");
    @(negedge clk);
    chk(ready, "ready at block 3");
    $display("sources: uncompressed=%0d compressed=%0d spilled=%0d", n_unc, n_cmp, n_spl);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
