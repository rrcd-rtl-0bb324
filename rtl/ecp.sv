// ecp: Error-Correcting Pointer with one replacement bit per slice entry.
//
// The reliability model counts an entry with a single faulty bit as
// reliable, because one spare cell per entry, addressed by a pointer to the
// faulty bit, stands in for it (ECP at entry granularity, as in the paper).
// The pointer table holds, per entry, a valid bit and an 11-bit position
// {block, bit-in-block} and is loaded at start-up from the post-fabrication
// test (cfg_*). The unit watches the slice write port: when the block that
// holds the faulty bit is written, the bit's value is also stored in the
// spare cell. On the two read ports it registers, with the slice's read
// request, whether the block read holds the faulty bit; one cycle later, as
// the slice data arrives, that bit is replaced by the spare. A read and a
// write of the same block in one cycle see the old spare, like the slice.
// Pointer width and timing follow from the slice organisation; the table
// layout and load port are this design's choice.
module ecp
  import rrcd_pkg::*;
#(
  parameter int unsigned ENTRIES = NUM_ENTRIES
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // pointer load
  input  logic                       cfg_we,
  input  logic [$clog2(ENTRIES)-1:0] cfg_entry,
  input  logic                       cfg_valid,
  input  logic [BLQ_W+8:0]           cfg_pos,
  // slice write port (observed)
  input  logic                       wr_en,
  input  logic [$clog2(ENTRIES)+BLQ_W-1:0] wr_addr,
  input  block_t                     wr_data,
  // slice read ports: request side and data side
  input  logic                       rd_en   [2],
  input  logic [$clog2(ENTRIES)+BLQ_W-1:0] rd_addr [2],
  input  block_t                     rd_raw  [2],
  output block_t                     rd_fixed [2]
);
  localparam int unsigned EW = $clog2(ENTRIES);

  logic             pv_q    [ENTRIES];
  logic [BLQ_W+8:0] pos_q   [ENTRIES];
  logic             spare_q [ENTRIES];

  logic [EW-1:0] we_entry;
  assign we_entry = wr_addr[EW+BLQ_W-1:BLQ_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) begin
        pv_q[e]    <= 1'b0;
        pos_q[e]   <= '0;
        spare_q[e] <= 1'b0;
      end
    end else begin
      if (cfg_we) begin
        pv_q[cfg_entry]  <= cfg_valid;
        pos_q[cfg_entry] <= cfg_pos;
      end
      if (wr_en && pv_q[we_entry] && pos_q[we_entry][BLQ_W+8:9] == wr_addr[BLQ_W-1:0])
        spare_q[we_entry] <= wr_data[pos_q[we_entry][8:0]];
    end
  end

  // read side: decide at request time, patch when the data arrives
  logic       hit_q   [2];
  logic [8:0] bit_q   [2];
  logic       val_q   [2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < 2; p++) begin
        hit_q[p] <= 1'b0;
        bit_q[p] <= '0;
        val_q[p] <= 1'b0;
      end
    end else begin
      for (int p = 0; p < 2; p++) begin
        if (rd_en[p]) begin
          hit_q[p] <= pv_q[rd_addr[p][EW+BLQ_W-1:BLQ_W]] &&
                      pos_q[rd_addr[p][EW+BLQ_W-1:BLQ_W]][BLQ_W+8:9] == rd_addr[p][BLQ_W-1:0];
          bit_q[p] <= pos_q[rd_addr[p][EW+BLQ_W-1:BLQ_W]][8:0];
          val_q[p] <= spare_q[rd_addr[p][EW+BLQ_W-1:BLQ_W]];
        end
      end
    end
  end

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      rd_fixed[p] = rd_raw[p];
      if (hit_q[p]) rd_fixed[p][bit_q[p]] = val_q[p];
    end
  end
endmodule
