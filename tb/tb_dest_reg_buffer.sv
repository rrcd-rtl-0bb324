// tb_dest_reg_buffer: writes four blocks in random order and reads them back.
module tb_dest_reg_buffer;
  import rrcd_pkg::*;
  logic clk = 1'b0;
  logic we;
  logic [1:0] widx, ridx;
  block_t wdata, rdata;
  block_t model [4];
  int checks = 0, failures = 0;

  dest_reg_buffer dut (.clk(clk), .we(we), .widx(widx), .wdata(wdata), .ridx(ridx), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; widx = 0; ridx = 0; wdata = '0;
    for (int b = 0; b < 4; b++) begin
      @(negedge clk);
      we = 1; widx = 2'(b); wdata = {16{32'($urandom)}};
      model[b] = wdata;
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      we = $urandom_range(0, 1); widx = 2'($urandom); wdata = {16{32'($urandom)}};
      ridx = 2'($urandom);
      #1;
      checks++;
      if (rdata !== model[ridx]) failures++;
      @(posedge clk);
      if (we) model[widx] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
