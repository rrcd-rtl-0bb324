// operand_read: operand-read and decompression stages for the two sources.
//
// start hands in the redirection-table rows of source 0 (fnt0) and source 1
// (fnt1) of an issued instruction. Over the next four cycles (k = 0..3) each
// source is read block by block:
//   * uncompressed in the slice (c = 0, m = 0): block k of its entry;
//   * compressed (c = 1): only block blq of its entry, once, at k = 0 - the
//     single-block access that saves slice energy in the paper;
//   * spilled (m = 1): block k of its slot in the LDS spill partition.
// The slice and the LDS answer one cycle later. In that decompression stage a
// Des unit per source latches the compressed word and produces block k, and
// the c bit drives the 2:1 multiplexer between raw and decompressed blocks,
// as in the paper's figure. The selected blocks are registered and leave as
// op0/op1 with op_blk = k, one block per cycle; block 0 is valid after the
// second clock edge following the edge that accepts start.
// A new instruction may start in the cycle the previous one reads block 3
// (ready), so one instruction is accepted every four cycles.
module operand_read
  import rrcd_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  tr_row_t           row_in [2],
  output logic              ready,
  // slice read ports
  output logic              sl_rd_en   [2],
  output logic [ADDR_W-1:0] sl_rd_addr [2],
  input  block_t            sl_rd_data [2],
  // LDS spill-partition read ports (same one-cycle latency)
  output logic              lds_rd_en   [2],
  output logic [SLOT_W+BLQ_W-1:0] lds_rd_addr [2],
  input  block_t            lds_rd_data [2],
  // operands to the SIMD unit
  output logic              op_valid,
  output logic [BLQ_W-1:0]  op_blk,
  output block_t            op [2]
);
  // read stage
  logic             r_act_q;
  logic [BLQ_W-1:0] r_k_q;
  tr_row_t          r_row_q [2];
  // decompression stage
  logic             d_act_q;
  logic [BLQ_W-1:0] d_k_q;
  logic             d_c_q [2];
  logic             d_m_q [2];

  assign ready = ~r_act_q | (r_k_q == 2'd3);

  always_comb begin
    for (int s = 0; s < 2; s++) begin
      sl_rd_en[s]    = r_act_q & ~r_row_q[s].m & (~r_row_q[s].c | (r_k_q == 2'd0));
      sl_rd_addr[s]  = {r_row_q[s].entry, r_row_q[s].c ? r_row_q[s].blq : r_k_q};
      lds_rd_en[s]   = r_act_q & r_row_q[s].m;
      lds_rd_addr[s] = {r_row_q[s].entry[SLOT_W-1:0], r_k_q};
    end
  end

  block_t raw [2];
  block_t dec [2];
  block_t sel [2];

  for (genvar s = 0; s < 2; s++) begin : g_src
    assign raw[s] = d_m_q[s] ? lds_rd_data[s] : sl_rd_data[s];
    decompressor u_des (
      .clk(clk), .rst_n(rst_n),
      .load(d_act_q & d_c_q[s] & (d_k_q == 2'd0)),
      .comp_in(raw[s][COMPW_BITS-1:0]),
      .blk(d_k_q), .out(dec[s])
    );
    assign sel[s] = d_c_q[s] ? dec[s] : raw[s];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_act_q  <= 1'b0;
      r_k_q    <= '0;
      d_act_q  <= 1'b0;
      d_k_q    <= '0;
      op_valid <= 1'b0;
      op_blk   <= '0;
      for (int s = 0; s < 2; s++) begin
        r_row_q[s] <= '0;
        d_c_q[s]   <= 1'b0;
        d_m_q[s]   <= 1'b0;
        op[s]      <= '0;
      end
    end else begin
      // read stage
      if (start && ready) begin
        r_act_q <= 1'b1;
        r_k_q   <= '0;
        for (int s = 0; s < 2; s++) r_row_q[s] <= row_in[s];
      end else if (r_act_q) begin
        r_k_q <= r_k_q + 2'd1;
        if (r_k_q == 2'd3) r_act_q <= 1'b0;
      end
      // decompression stage
      d_act_q <= r_act_q;
      d_k_q   <= r_k_q;
      for (int s = 0; s < 2; s++) begin
        d_c_q[s] <= r_row_q[s].c & ~r_row_q[s].m;
        d_m_q[s] <= r_row_q[s].m;
      end
      // output register
      op_valid <= d_act_q;
      op_blk   <= d_k_q;
      for (int s = 0; s < 2; s++) op[s] <= sel[s];
    end
  end
endmodule
