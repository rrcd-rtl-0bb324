// compressor: Com unit of the compression stage.
//
// Receives the four uncompressed result blocks of a destination register from
// the SIMD unit, one per cycle (in_blk = 0..3). It tests six candidate
// patterns at once: component i equals base + (i mod K)*d1 + (i div K)*dr
// for K = 2, 4, 8, 16, 32 or 64. base and d1 come from components 0 and 1;
// dr (the step between groups) from component K, which lies in block 0 for
// K <= 8, block 1 for K = 16 and block 2 for K = 32. A candidate stays alive
// while every component seen so far matches it.
//   c_first : valid with block 0; some candidate fits block 0 (the paper's
//             speculative c_compr, reported in the first cycle).
//   c_final : valid with block 3; some candidate fits all 64 components.
//   comp_out: valid with block 3 when c_final; the compressed word, taking
//             the largest surviving K.
// Timing and the speculative/final split follow the paper; the exact
// pattern set and encoding are this design's reading of its three patterns.
module compressor
  import rrcd_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [BLQ_W-1:0] in_blk,
  input  block_t           in_data,
  output logic             c_first,
  output logic             c_final,
  output comp_t            comp_out
);
  localparam int NC = 6;

  logic [COMP_W-1:0] base_q, d1_q;
  logic [COMP_W-1:0] dr_q   [NC];
  logic [NC-1:0]     alive_q;

  logic [COMP_W-1:0] comp   [LANES];
  logic [COMP_W-1:0] base_e, d1_e;
  logic [COMP_W-1:0] dr_e   [NC];
  logic [NC-1:0]     match, alive_n;

  always_comb begin
    for (int l = 0; l < LANES; l++) comp[l] = in_data[l*COMP_W +: COMP_W];
    base_e = (in_blk == 2'd0) ? comp[0] : base_q;
    d1_e   = (in_blk == 2'd0) ? comp[1] - comp[0] : d1_q;
    for (int c = 0; c < NC; c++) begin
      dr_e[c] = dr_q[c];
      if (c < 3 && in_blk == 2'd0)      dr_e[c] = comp[2 << c] - comp[0];
      else if (c == 3 && in_blk == 2'd1) dr_e[c] = comp[0] - base_q;
      else if (c == 4 && in_blk == 2'd2) dr_e[c] = comp[0] - base_q;
      else if (c == 5)                   dr_e[c] = '0;
    end
    for (int c = 0; c < NC; c++) begin
      match[c] = 1'b1;
      for (int l = 0; l < LANES; l++) begin
        logic [5:0] i, col, row;
        i   = {in_blk, 4'(l)};
        col = i & 6'((2 << c) - 1);
        row = i >> (c + 1);
        if (comp[l] != base_e + d1_e * COMP_W'(col) + dr_e[c] * COMP_W'(row))
          match[c] = 1'b0;
      end
      alive_n[c] = match[c] & ((in_blk == 2'd0) ? 1'b1 : alive_q[c]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q  <= '0;
      d1_q    <= '0;
      alive_q <= '0;
      for (int c = 0; c < NC; c++) dr_q[c] <= '0;
    end else if (in_valid) begin
      base_q  <= base_e;
      d1_q    <= d1_e;
      alive_q <= alive_n;
      for (int c = 0; c < NC; c++) dr_q[c] <= dr_e[c];
    end
  end

  assign c_first = |alive_n;
  assign c_final = |alive_n;

  always_comb begin
    comp_out = '0;
    for (int c = 0; c < NC; c++) begin
      if (alive_n[c]) begin
        comp_out.kcode = 3'(c);
        comp_out.base  = base_e;
        comp_out.d1    = d1_e;
        comp_out.dr    = dr_e[c];
      end
    end
  end
endmodule
