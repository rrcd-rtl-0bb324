// tb_compressor: checks the Com unit.
// Compressible registers of every group size must give c_first = 1 with
// block 0 and c_final = 1 with block 3, and the compressed word must expand
// (incremental reference) back to the register. Random registers must fail
// at block 0; registers regular in block 0 but broken later must give
// c_first = 1 and c_final = 0 (a misprediction).
module tb_compressor;
  import rrcd_pkg::*;
  import tb_patterns::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid;
  logic [1:0] in_blk;
  block_t in_data;
  logic c_first, c_final;
  comp_t cw;
  int checks = 0, failures = 0;
  int n_comp = 0, n_misp = 0, n_rand = 0;

  compressor dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_blk(in_blk),
                  .in_data(in_data), .c_first(c_first), .c_final(c_final), .comp_out(cw));

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("FAIL %s", what);
    end
  endtask

  // present the four blocks and return the flags seen
  task automatic send(input reg64_t r, output bit f0, output bit f3, output comp_t w);
    for (int b = 0; b < 4; b++) begin
      @(negedge clk);
      in_valid = 1; in_blk = 2'(b); in_data = get_block(r, b);
      #1;
      if (b == 0) f0 = c_first;
      if (b == 3) begin f3 = c_final; w = cw; end
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    reg64_t r, e;
    int unsigned k, kk;
    bit f0, f3;
    comp_t w;
    in_valid = 0; in_blk = 0; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      rand_comp_reg(r, k);
      send(r, f0, f3, w);
      check(f0 == 1, $sformatf("c_first k=%0d", k));
      check(f3 == 1, $sformatf("c_final k=%0d", k));
      kk = 2 << w.kcode;
      make_reg(kk, w.base, w.d1, w.dr - (kk - 1) * w.d1, e);
      check(e == r, $sformatf("round trip k=%0d kcode=%0d", k, w.kcode));
      n_comp++;
    end
    for (int t = 0; t < 100; t++) begin
      rand_reg(r);
      send(r, f0, f3, w);
      check(f0 == 0 && f3 == 0, "random register compressible");
      n_rand++;
    end
    for (int t = 0; t < 100; t++) begin
      rand_comp_reg(r, k);
      // K <= 8 patterns are fixed by block 0; break one component later on
      make_reg(2 << (t % 3), r[0], r[1] - r[0], $urandom, r);
      r[$urandom_range(16, 63)] ^= 32'h0001_0000;
      send(r, f0, f3, w);
      check(f0 == 1, "misprediction: c_first");
      check(f3 == 0, "misprediction: c_final");
      n_misp++;
    end
    $display("compressible=%0d random=%0d mispredicted=%0d", n_comp, n_rand, n_misp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
