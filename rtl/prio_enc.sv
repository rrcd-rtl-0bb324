// prio_enc: lowest-index-first priority encoder.
//
// Returns the index of the lowest set bit of req and whether any bit is set.
// Purely combinational. Used by the redirection selection unit for its
// 1024-input (free block) and 256-input (free reliable entry) encoders, and
// for the spill-slot allocator.
module prio_enc #(
  parameter int unsigned N  = 256,
  parameter int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0]  req,
  output logic          valid,
  output logic [IW-1:0] idx
);
  always_comb begin
    idx = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (req[i]) idx = IW'(i);
    end
  end
  assign valid = |req;
endmodule
