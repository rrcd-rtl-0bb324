// rrcd_pkg: sizes, types and constants shared by the RRCD register-file path.
//
// One register-file slice serves one SIMD unit: 256 vector register entries of
// 64 components x 4 bytes, accessed as four 64-byte blocks (16 lanes x 32 bit)
// over four cycles. These numbers, and the redirection-table row layout
// {v, c, m, blq, entrada} = 1+1+1+2+8 bits, follow the paper. The compressed
// word layout (comp_t) and the spill-slot count are this design's choices.
package rrcd_pkg;

  localparam int unsigned NUM_ENTRIES = 256;            // entries per slice
  localparam int unsigned NUM_BLK     = 4;              // blocks per entry
  localparam int unsigned LANES       = 16;             // components per block
  localparam int unsigned COMP_W      = 32;             // bits per component
  localparam int unsigned BLK_W       = LANES * COMP_W; // 512 bits = 64 B
  localparam int unsigned ENTRY_W     = 8;              // log2(NUM_ENTRIES)
  localparam int unsigned BLQ_W       = 2;              // log2(NUM_BLK)
  localparam int unsigned ADDR_W      = ENTRY_W + BLQ_W;// block address in the slice
  localparam int unsigned WF_W        = 8;              // wavefront id width
  // Spill partition: half of the 64 KB LDS, in 256 B register slots.
  localparam int unsigned SPILL_SLOTS = 128;
  localparam int unsigned SLOT_W      = 7;

  typedef logic [BLK_W-1:0] block_t;

  // Redirection-table row (13 bits, 256 rows = 416 bytes).
  typedef struct packed {
    logic               v;      // row holds a valid redirection
    logic               c;      // register stored compressed
    logic               m;      // register lives in the LDS spill partition
    logic [BLQ_W-1:0]   blq;    // block inside the entry (compressed only)
    logic [ENTRY_W-1:0] entry;  // slice entry, or spill slot when m = 1
  } tr_row_t;

  // Compressed register. Component i (0..63) of the register is
  //   base + (i mod K) * d1 + (i div K) * dr,   K = 2 << kcode (2..64).
  // kcode = 5 (K = 64) is a plain stride; d1 = 0 as well gives a uniform value.
  typedef struct packed {
    logic [2:0]        kcode;
    logic [COMP_W-1:0] base;
    logic [COMP_W-1:0] d1;
    logic [COMP_W-1:0] dr;
  } comp_t;
  localparam int unsigned COMPW_BITS = $bits(comp_t); // 99 bits

  // Kind of a location handed out by the redirection selection unit.
  typedef enum logic [1:0] {
    LOC_ENTRY = 2'd0,   // a whole reliable entry (uncompressed register)
    LOC_BLOCK = 2'd1,   // one block of an entry (compressed register)
    LOC_SPILL = 2'd2    // a slot of the LDS spill partition
  } loc_kind_t;

  typedef struct packed {
    loc_kind_t          kind;
    logic [ENTRY_W-1:0] entry;  // entry, or spill slot in the low bits
    logic [BLQ_W-1:0]   blq;
  } loc_t;

  // One-cycle event pulses, raised when a register write completes.
  typedef struct packed {
    logic regular;      // written in place, no new redirection
    logic redir_entry;  // new redirection to a reliable entry
    logic redir_block;  // new redirection to a block (compressed)
    logic lds;          // register written to the LDS spill partition
    logic misp;         // compression misprediction (BRD drained)
    logic overflow;     // no slice location and no spill slot left
  } wb_event_t;

endpackage
