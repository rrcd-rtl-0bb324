// tb_redirection_table: random writes and four-port reads against a model;
// all rows must read invalid after reset.
module tb_redirection_table;
  import rrcd_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] ra [4];
  tr_row_t    rr [4];
  logic       we;
  logic [7:0] wa;
  tr_row_t    wr;
  tr_row_t    model [256];
  int checks = 0, failures = 0;

  redirection_table dut (.clk(clk), .rst_n(rst_n), .rd_addr(ra), .rd_row(rr),
                         .we(we), .waddr(wa), .wrow(wr));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wa = 0; wr = '0;
    for (int p = 0; p < 4; p++) ra[p] = 0;
    for (int i = 0; i < 256; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      ra[0] = 8'(i);
      #1;
      checks++;
      if (rr[0].v !== 1'b0) failures++;
    end
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      we = $urandom_range(0, 1);
      wa = 8'($urandom_range(0, 31));
      wr = tr_row_t'(13'($urandom));
      for (int p = 0; p < 4; p++) ra[p] = 8'($urandom_range(0, 31));
      #1;
      for (int p = 0; p < 4; p++) begin
        checks++;
        if (rr[p] !== model[ra[p]]) begin
          failures++;
          if (failures < 5) $display("FAIL port %0d row %0d", p, ra[p]);
        end
      end
      @(posedge clk);
      if (we) model[wa] = wr;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
