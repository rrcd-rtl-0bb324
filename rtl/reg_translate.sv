// reg_translate: register translation stage (base register table + adders).
//
// Each wavefront owns a window of contiguous physical registers. When the
// wavefront is placed on the SIMD unit its base register is written into the
// base table (alloc_*). An instruction's logical indices (idc) for its two
// sources and its destination are added to the base read with its wavefront
// id, giving the physical register numbers that index the redirection table.
// Following the paper: the table indexed by WF id, three adders, 256 rows as
// printed in its pipeline figures. This design's choices: combinational read
// (translation and the redirection-table read share one stage), additions
// wrap modulo the slice size, a fourth read port (rel_*) gives the base of a
// wavefront whose window is being released, and the table resets to zero.
module reg_translate
  import rrcd_pkg::*;
#(
  parameter int unsigned NUM_WF = 256,
  parameter int unsigned EW     = ENTRY_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // wavefront placement
  input  logic                      alloc_we,
  input  logic [$clog2(NUM_WF)-1:0] alloc_wf,
  input  logic [EW-1:0]             alloc_base,
  // instruction
  input  logic [$clog2(NUM_WF)-1:0] wf_id,
  input  logic [EW-1:0]             idc_fnt0,
  input  logic [EW-1:0]             idc_fnt1,
  input  logic [EW-1:0]             idc_dest,
  output logic [EW-1:0]             phys_fnt0,
  output logic [EW-1:0]             phys_fnt1,
  output logic [EW-1:0]             phys_dest,
  // window release
  input  logic [$clog2(NUM_WF)-1:0] rel_wf,
  output logic [EW-1:0]             rel_base
);
  logic [EW-1:0] base_q [NUM_WF];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_WF; i++) base_q[i] <= '0;
    end else if (alloc_we) begin
      base_q[alloc_wf] <= alloc_base;
    end
  end

  logic [EW-1:0] base;
  assign base      = base_q[wf_id];
  assign phys_fnt0 = base + idc_fnt0;
  assign phys_fnt1 = base + idc_fnt1;
  assign phys_dest = base + idc_dest;
  assign rel_base  = base_q[rel_wf];
endmodule
