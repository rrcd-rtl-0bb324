// tb_ecp: the error-correcting pointer in front of a faulty memory.
// The testbench holds a 1024-block memory in which every entry with a pointer
// has one cell stuck at a random value. Random block writes and reads go
// through it; with the pointers loaded, every block read must equal what was
// last written. The test also confirms that the stuck cells do corrupt the
// raw data, so the corrections are real.
module tb_ecp;
  import rrcd_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we, cfg_valid; logic [7:0] cfg_entry; logic [10:0] cfg_pos;
  logic wr_en; logic [9:0] wr_addr; block_t wr_data;
  logic rd_en [2]; logic [9:0] rd_addr [2]; block_t rd_raw [2], rd_fixed [2];
  int checks = 0, failures = 0, n_corrupt = 0;

  ecp dut (.*);

  always #5 clk = ~clk;

  block_t     mem   [1024];
  block_t     model [1024];
  bit         has_f [256];
  logic [10:0] fpos [256];
  bit         fval  [256];

  // faulty memory: stuck cell forced on write; synchronous read
  always @(posedge clk) begin
    for (int p = 0; p < 2; p++) if (rd_en[p]) rd_raw[p] <= mem[rd_addr[p]];
    if (wr_en) begin
      block_t d; int e;
      d = wr_data; e = int'(wr_addr[9:2]);
      if (has_f[e] && fpos[e][10:9] == wr_addr[1:0]) d[fpos[e][8:0]] = fval[e];
      mem[wr_addr] <= d;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a [2];
    cfg_we = 0; cfg_valid = 0; cfg_entry = 0; cfg_pos = 0; wr_en = 0; wr_addr = 0; wr_data = '0;
    for (int p = 0; p < 2; p++) begin rd_en[p] = 0; rd_addr[p] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 256; e++) begin
      has_f[e] = ($urandom_range(0, 2) == 0);
      fpos[e]  = 11'($urandom);
      fval[e]  = 1'($urandom);
      @(negedge clk);
      cfg_we = 1; cfg_entry = 8'(e); cfg_valid = has_f[e]; cfg_pos = fpos[e];
    end
    @(negedge clk); cfg_we = 0;
    // initialise all blocks
    for (int b = 0; b < 1024; b++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 10'(b); wr_data = {16{32'($urandom)}};
      model[b] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        a[p] = $urandom_range(0, 1023); rd_en[p] = 1; rd_addr[p] = 10'(a[p]);
      end
      wr_en = ($urandom_range(0, 1) == 0);
      wr_addr = 10'($urandom_range(0, 1023));
      wr_data = {16{32'($urandom)}};
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        checks++;
        if (rd_fixed[p] !== model[a[p]]) begin
          failures++;
          if (failures < 5) $display("FAIL block %0d", a[p]);
        end
        if (rd_raw[p] !== model[a[p]]) n_corrupt++;
      end
      if (wr_en) model[wr_addr] = wr_data;
      wr_en = 0;
      for (int p = 0; p < 2; p++) rd_en[p] = 0;
    end
    $display("reads corrupted by stuck cells and corrected: %0d", n_corrupt);
    checks++;
    if (n_corrupt == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
