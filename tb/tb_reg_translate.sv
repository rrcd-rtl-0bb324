// tb_reg_translate: places wavefronts at random bases and checks that the
// physical numbers of both sources and the destination are base + index
// (mod 256), and that the release port returns the same base.
module tb_reg_translate;
  logic clk = 1'b0, rst_n = 1'b0;
  logic       alloc_we;
  logic [7:0] alloc_wf, alloc_base, wf_id, i0, i1, id, p0, p1, pd, rel_wf, rel_base;
  logic [7:0] model [256];
  int checks = 0, failures = 0;

  reg_translate dut (.clk(clk), .rst_n(rst_n), .alloc_we(alloc_we), .alloc_wf(alloc_wf),
    .alloc_base(alloc_base), .wf_id(wf_id), .idc_fnt0(i0), .idc_fnt1(i1), .idc_dest(id),
    .phys_fnt0(p0), .phys_fnt1(p1), .phys_dest(pd), .rel_wf(rel_wf), .rel_base(rel_base));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alloc_we = 0; alloc_wf = 0; alloc_base = 0; wf_id = 0; i0 = 0; i1 = 0; id = 0; rel_wf = 0;
    for (int w = 0; w < 256; w++) model[w] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if ($urandom_range(0, 2) == 0) begin
        alloc_we = 1; alloc_wf = 8'($urandom); alloc_base = 8'($urandom);
      end else alloc_we = 0;
      wf_id = 8'($urandom); i0 = 8'($urandom_range(0, 40)); i1 = 8'($urandom_range(0, 40));
      id = 8'($urandom_range(0, 40)); rel_wf = 8'($urandom);
      #1;
      checks++;
      if (p0 !== 8'((int'(model[wf_id]) + int'(i0)) % 256) ||
          p1 !== 8'((int'(model[wf_id]) + int'(i1)) % 256) ||
          pd !== 8'((int'(model[wf_id]) + int'(id)) % 256) ||
          rel_base !== model[rel_wf]) begin
        failures++;
        if (failures < 5) $display("FAIL wf=%0d base=%0d p0=%0d", wf_id, model[wf_id], p0);
      end
      @(posedge clk);
      if (alloc_we) model[alloc_wf] = alloc_base;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
