// redirection_table: the Redirection Table (TR).
//
// One 13-bit row per physical register (256 rows, 416 bytes), telling where
// the register currently lives: valid bit v, compressed bit c, spill bit m,
// block blq (for a compressed register) and the slice entry, or the spill-slot
// offset when m = 1. Layout and size follow the paper. Read ports NRD are
// combinational (the paper fits the table in the translation stage); port
// order used by the top is fnt0, fnt1, dest, release. The single write port is
// driven by the redirection selection unit when a redirection changes or a
// window is released. All rows reset to invalid (this design's choice).
module redirection_table
  import rrcd_pkg::*;
#(
  parameter int unsigned ROWS = NUM_ENTRIES,
  parameter int unsigned NRD  = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [$clog2(ROWS)-1:0] rd_addr [NRD],
  output tr_row_t                 rd_row  [NRD],
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] waddr,
  input  tr_row_t                 wrow
);
  tr_row_t rows_q [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++) rows_q[i] <= '0;
    end else if (we) begin
      rows_q[waddr] <= wrow;
    end
  end

  always_comb begin
    for (int p = 0; p < NRD; p++) rd_row[p] = rows_q[rd_addr[p]];
  end
endmodule
