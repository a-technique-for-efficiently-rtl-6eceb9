// llc_pkg: constants, types and helper functions shared by the SRAM-PCM
// hybrid last-level cache.
//
// The cache is an 8 MB, 8-way set-associative L2 with 64-byte blocks, split
// into 8 independent banks. In every set the first N_FAST = 2 physical ways
// are built from SRAM (the "fast" region) and the other 6 from phase-change
// memory (the "slow" region). Replacement follows the dead-fast-block (DFB)
// policy. The block size, associativity, fast-way count, bank count, the
// Z interval and the initial Z follow the paper; the 48-bit physical address,
// the request/response structures and the request id width are choices of
// this design.
package llc_pkg;

  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned LINE_BITS   = LINE_BYTES * 8;
  localparam int unsigned OFFSET_BITS = $clog2(LINE_BYTES);
  localparam int unsigned ADDR_BITS   = 48;
  localparam int unsigned LADDR_BITS  = ADDR_BITS - OFFSET_BITS;  // line address
  localparam int unsigned ID_BITS     = 8;

  typedef logic [LINE_BITS-1:0]  line_t;
  typedef logic [ADDR_BITS-1:0]  addr_t;
  typedef logic [LADDR_BITS-1:0] laddr_t;
  typedef logic [ID_BITS-1:0]    id_t;

  // Request from the L1 side: a full-line read (fill) or a full-line write
  // (L1 writeback).
  typedef struct packed {
    logic  we;
    addr_t addr;
    id_t   id;
    line_t wdata;
  } llc_req_t;

  // Response: read data for reads, an acknowledgement for writes.
  typedef struct packed {
    id_t   id;
    logic  we;
    logic  hit;
    line_t rdata;
  } llc_resp_t;

  // Request to main memory: line read (fill) or line write (dirty eviction).
  // src names the bank so that the read data can be sent back to it.
  typedef struct packed {
    logic        we;
    laddr_t      laddr;
    logic [3:0]  src;
    line_t       wdata;
  } mem_req_t;

  typedef struct packed {
    logic [3:0] src;
    line_t      rdata;
  } mem_resp_t;

endpackage
