// mirage_pkg: types and constants shared by the Mirage last-level cache.
//
// Mirage stores, for every line, a tag entry in one of two skews of a
// skewed tag-store and a data entry anywhere in a global data-store; the two
// are linked by a forward pointer (FPTR, tag -> data) and a reverse pointer
// (RPTR, data -> tag). The field widths below are those of the 16 MB,
// 64-byte-line configuration: a 40-bit line address kept in full as the tag
// (so write-backs can rebuild the address), a valid and a dirty bit, an
// 18-bit FPTR and an 8-bit security-domain ID (SDID); each data entry holds
// 512 data bits and a 19-bit RPTR. The request/response encodings and the
// RPTR "invalid" code are this design's own choices.
package mirage_pkg;

  localparam int unsigned LINE_ADDR_W = 40;   // full physical line address (46-bit PA, 64 B lines)
  localparam int unsigned SDID_W      = 8;    // security-domain ID, up to 256 domains
  localparam int unsigned LINE_W      = 512;  // 64-byte line
  localparam int unsigned NUM_SKEWS   = 2;    // two skews in the tag-store

  typedef logic [LINE_ADDR_W-1:0] line_addr_t;
  typedef logic [SDID_W-1:0]      sdid_t;
  typedef logic [LINE_W-1:0]      line_t;

  // Requests accepted by the cache.
  typedef enum logic [1:0] {
    OP_READ  = 2'd0,   // read a line (fill from memory on a miss)
    OP_WRITE = 2'd1,   // write a full line (write-back from an upper level)
    OP_FLUSH = 2'd2    // flush a line of this domain (clflush): write back if dirty, invalidate
  } op_e;

  // Kind of eviction made to free room for an install.
  typedef enum logic [1:0] {
    EV_NONE = 2'd0,    // a free data entry was available
    EV_GLE  = 2'd1,    // global eviction: random data entry from the whole data-store
    EV_SAE  = 2'd2,    // set-associative eviction: both indexed sets were full
    EV_FLUSH = 2'd3    // line removed by a flush request
  } evict_e;

endpackage
