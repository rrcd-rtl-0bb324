// tb_rf_slice: fills every block of the slice with a distinct pattern, then
// reads it back on both ports with random addresses and checks the one-cycle
// read latency, the read-enable hold and old-data-on-collision behaviour.
module tb_rf_slice;
  import rrcd_pkg::*;
  logic clk = 1'b0;
  logic         rd_en [2];
  logic [9:0]   rd_addr [2];
  block_t       rd_data [2];
  logic         we;
  logic [9:0]   waddr;
  block_t       wdata;
  int checks = 0, failures = 0;

  rf_slice dut (.clk(clk), .rd_en(rd_en), .rd_addr(rd_addr), .rd_data(rd_data),
                .we(we), .waddr(waddr), .wdata(wdata));

  always #5 clk = ~clk;

  function automatic block_t pat(input int a, input int gen);
    block_t b;
    for (int l = 0; l < 16; l++) b[l*32 +: 32] = 32'(a * 977 + l * 131 + gen * 7919);
    return b;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a0, a1;
    block_t hold0;
    we = 0; waddr = 0; wdata = '0;
    for (int p = 0; p < 2; p++) begin rd_en[p] = 0; rd_addr[p] = 0; end
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      we = 1; waddr = 10'(a); wdata = pat(a, 0);
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      a0 = $urandom_range(0, 1023); a1 = $urandom_range(0, 1023);
      rd_en[0] = 1; rd_addr[0] = 10'(a0);
      rd_en[1] = 1; rd_addr[1] = 10'(a1);
      @(negedge clk);
      rd_en[0] = 0; rd_en[1] = 0;
      checks += 2;
      if (rd_data[0] !== pat(a0, 0)) failures++;
      if (rd_data[1] !== pat(a1, 0)) failures++;
      // output holds while the port is not enabled
      hold0 = rd_data[0];
      rd_addr[0] = 10'(a1);
      @(negedge clk);
      checks++;
      if (rd_data[0] !== hold0) failures++;
    end
    // read and write of the same block in one cycle: read returns old data
    @(negedge clk);
    rd_en[0] = 1; rd_addr[0] = 10'd5; we = 1; waddr = 10'd5; wdata = pat(5, 1);
    @(negedge clk);
    rd_en[0] = 1; we = 0;
    checks++;
    if (rd_data[0] !== pat(5, 0)) failures++;
    @(negedge clk);
    checks++;
    if (rd_data[0] !== pat(5, 1)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
