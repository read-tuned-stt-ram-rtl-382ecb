// rrap_pkg -- types and constants shared by the RRAP cache hierarchy.
//
// The hierarchy moves whole 64-byte cache lines. Addresses are line
// addresses (the byte address with the 6 offset bits removed) of an 8 GB
// physical space, so 27 bits. The 64-byte line follows the paper; the
// address width is derived from its 8 GB main memory. The opcode encodings
// and the struct layouts are this design's own choice.
package rrap_pkg;

  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned LINE_BITS  = LINE_BYTES * 8;
  localparam int unsigned OFFSET_W   = $clog2(LINE_BYTES);
  localparam int unsigned PADDR_W    = 33;                 // 8 GB
  localparam int unsigned LADDR_W    = PADDR_W - OFFSET_W; // line address

  typedef logic [LINE_BITS-1:0]  line_t;
  typedef logic [LINE_BYTES-1:0] bmask_t;
  typedef logic [LADDR_W-1:0]    laddr_t;

  // Request from the L1 side into a private L2.
  typedef enum logic {
    L1_READ  = 1'b0,   // read miss of L1: return the whole line
    L1_WRITE = 1'b1    // store / L1 write-back: bytes under the mask
  } l1_op_e;

  typedef struct packed {
    l1_op_e op;
    laddr_t addr;
    bmask_t mask;
    line_t  data;
  } l1_req_t;

  // Request from a private L2 into the shared LLC.
  typedef enum logic [1:0] {
    LLC_READ  = 2'd0,  // L2 read miss: fetch line, may be marked for HRSC
    LLC_RFO   = 2'd1,  // L2 write miss: fetch line for a write (sets WC)
    LLC_WBACK = 2'd2   // dirty LRSC victim written back (sets WC)
  } llc_op_e;

  typedef struct packed {
    llc_op_e op;
    laddr_t  addr;
    line_t   data;
  } llc_req_t;

  typedef struct packed {
    logic   to_hrsc;   // line is an IRRA block: place it in HRSC
    line_t  data;
  } llc_resp_t;

  // Request from the LLC to main memory.
  typedef struct packed {
    logic   write;
    laddr_t addr;
    line_t  data;
  } mem_req_t;

  // One-cycle event pulses of a private L2, for statistics and tests.
  typedef struct packed {
    logic lrsc_hit;      // L1 request hit the LRSC
    logic hrsc_hit;      // L1 read hit the HRSC
    logic l2_miss;       // request went to the LLC
    logic hrsc_fill;     // IRRA line placed in the HRSC
    logic hrsc_evict;    // HRSC fill replaced a valid line (LRU)
    logic hrsc_to_lrsc;  // core write moved a line from HRSC to LRSC
    logic writeback;     // dirty LRSC victim sent to the LLC
    logic refresh;       // one LRSC line refreshed
    logic refresh_stall; // a request waited for a refresh
  } l2_events_t;

  // Byte-masked merge of a write into a line.
  function automatic line_t merge_line(line_t old_l, line_t new_l, bmask_t m);
    line_t r;
    for (int b = 0; b < LINE_BYTES; b++)
      r[b*8 +: 8] = m[b] ? new_l[b*8 +: 8] : old_l[b*8 +: 8];
    return r;
  endfunction

endpackage
