// tb_decompressor: checks the Des unit against the incremental reference.
// Random compressed words of every group size are loaded; the four blocks
// must appear in the load cycle and the three cycles after it.
module tb_decompressor;
  import rrcd_pkg::*;
  import tb_patterns::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic load;
  comp_t cw;
  logic [1:0] blk;
  block_t out;
  int checks = 0, failures = 0;

  decompressor dut (.clk(clk), .rst_n(rst_n), .load(load), .comp_in(cw), .blk(blk), .out(out));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reg64_t r;
    int unsigned k;
    logic [31:0] d1, d2;
    load = 0; cw = '0; blk = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      k  = 2 << (t % 6);
      d1 = $urandom; d2 = $urandom;
      if (t % 7 == 0) d1 = 0;
      make_reg(k, $urandom, d1, d2, r);
      @(negedge clk);
      cw.kcode = 3'(t % 6);
      cw.base  = r[0];
      cw.d1    = d1;
      cw.dr    = r[k % 64] - r[0];      // step from one group start to the next
      if (k == 64) cw.dr = $urandom;    // unused with one group
      load = 1; blk = 0;
      #1;
      checks++;
      if (out !== get_block(r, 0)) begin
        failures++;
        if (failures < 5) $display("FAIL k=%0d blk0", k);
      end
      for (int b = 1; b < 4; b++) begin
        @(negedge clk);
        load = 0; blk = 2'(b);
        cw = '0;                        // input no longer used after load
        #1;
        checks++;
        if (out !== get_block(r, b)) begin
          failures++;
          if (failures < 5) $display("FAIL k=%0d blk%0d", k, b);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
