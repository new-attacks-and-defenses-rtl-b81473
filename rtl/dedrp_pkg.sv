// dedrp_pkg: constants and types shared by the DE+DRP randomized last-level
// cache bank.
//
// The bank stores 64-byte lines of a 64-bit physical address space, so a line
// address is 58 bits and a line is 512 bits. Because the set of a line is
// chosen at random through the indirection table (iTable), no address bit is
// implied by the set index: the tag kept per way is the whole line address.
// Each way also remembers the iTable entry that placed it (16 bits, enough for
// the 2^15-entry table), which the replacement policy groups lines by.
//
// The sizes here (58, 512, 16) follow the paper; the request, memory and event
// structures are this design's own interface choices.
package dedrp_pkg;

  localparam int unsigned LINE_ADDR_W = 58;   // 64-bit address, 6 offset bits
  localparam int unsigned LINE_W      = 512;  // 64-byte line
  localparam int unsigned WAY_IDX_W   = 16;   // stored iTable index per line
  localparam int unsigned KEY_W       = 64;   // encryption key width

  typedef logic [LINE_ADDR_W-1:0] line_addr_t;
  typedef logic [LINE_W-1:0]      line_t;
  typedef logic [KEY_W-1:0]       key_t;
  typedef logic [WAY_IDX_W-1:0]   way_idx_t;

  // Metadata of one way of one set.
  typedef struct packed {
    logic       valid;
    logic       dirty;
    line_addr_t tag;    // full line address
    way_idx_t   idx;    // iTable entry that maps this line
  } way_meta_t;

  // Request from the cores' side: one whole line, read or write.
  typedef struct packed {
    logic       we;
    line_addr_t addr;
    line_t      wdata;
  } llc_req_t;

  // Response: read data (or write acknowledge) and where the line was found.
  typedef struct packed {
    line_t rdata;
    logic  hit;      // found in the cache or the victim buffer
    logic  vb_hit;   // found in the victim buffer
  } llc_resp_t;

  // Request to main memory: read a line, or write one back.
  typedef struct packed {
    logic       we;
    line_addr_t addr;
    line_t      wdata;
  } mem_req_t;

  // One-cycle event pulses, for counters and for testing.
  typedef struct packed {
    logic hit;            // cache hit in the selected set
    logic vb_hit;         // hit in the victim buffer
    logic miss;           // miss, line fetched or allocated
    logic used_target;    // precedence logic rejected entry i, used entry j
    logic free_fill;      // miss filled an invalid way, nothing evicted
    logic multi_evict;    // one replacement evicted two or more lines
    logic refresh;        // an iTable entry got a new set mapping
    logic oversub;        // oversubscribed entry, line sent to the victim buffer
    logic vb_full_evict;  // victim buffer full, oldest slot written back
    logic vb_drain;       // buffered line dropped because its entry was refreshed
    logic writeback;      // dirty line written to memory
    logic clean_step;     // cleaner examined one iTable entry
    logic clean_evict;    // cleaner transitioned an untransitioned entry
    logic key_swap;       // epoch ended, keys swapped
  } llc_events_t;

endpackage
