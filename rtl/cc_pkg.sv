// cc_pkg: types and constants shared by the Chameleon Cache modules.
//
// A cache line is addressed by its line address (physical address without
// the byte offset). Every RSC way and every victim-cache slot holds a
// line_t: the full line address as tag (the skewed divisions use different
// set indices, so the tag must be the whole line address, as in the Lookup
// algorithm where a way hits when its tag equals the address), a valid bit,
// a dirty bit and the line data.
//
// The physical address width (48 bits), the line size (64 bytes) and the
// 64-bit division keys are this design's choices; the source design does not
// give them.
package cc_pkg;

  localparam int unsigned PADDR_W     = 48;
  localparam int unsigned OFFSET_W    = 6;                    // 64-byte lines
  localparam int unsigned LINE_ADDR_W = PADDR_W - OFFSET_W;   // 42
  localparam int unsigned LINE_BITS   = 512;
  localparam int unsigned KEY_W       = 64;

  typedef logic [LINE_ADDR_W-1:0] line_addr_t;
  typedef logic [LINE_BITS-1:0]   line_data_t;
  typedef logic [KEY_W-1:0]       key_t;

  typedef struct packed {
    logic       valid;
    logic       dirty;
    line_addr_t tag;
    line_data_t data;
  } line_t;

  localparam line_t INVALID_LINE = '0;

  // One-cycle event pulses of the cache controller, for performance
  // counters and for tests.
  typedef struct packed {
    logic rsc_hit;        // request hit in the RSC
    logic vc_hit;         // request hit in the victim cache (line swapped back)
    logic miss;           // request missed in both
    logic rsc_evict;      // RSC Insert moved a valid line into the VC
    logic vc_evict;       // a valid line left the VC (to memory)
    logic writeback;      // a dirty evicted line was handed to memory
    logic auto_reinsert;  // Automatic RSC Reinsert swapped a VC line back
  } cc_events_t;

endpackage
