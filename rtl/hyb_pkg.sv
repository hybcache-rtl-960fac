// hyb_pkg: widths, types and operation codes shared by every HybCache block.
//
// A request carries a byte address, the Isolation-Domain ID (IDID) of the
// process that issued it, an operation and, for writes, one 64-bit word.
// IDID 0 is the non-isolated domain; any other value names one of 15
// isolated domains. The 46-bit address, the 6-bit line offset (64-byte
// lines), the 40-bit extended tag and the 4-bit IDID follow the paper. The
// word width, the response format and the operation set are choices of this
// design.
package hyb_pkg;

  localparam int unsigned ADDR_W   = 46;                 // physical byte address
  localparam int unsigned OFFSET_W = 6;                  // 64-byte lines
  localparam int unsigned LADDR_W  = ADDR_W - OFFSET_W;  // line address = extended tag (40)
  localparam int unsigned LINE_W   = 512;                // bits per line
  localparam int unsigned WORD_W   = 64;                 // bits per write
  localparam int unsigned WORDS    = LINE_W / WORD_W;    // words per line
  localparam int unsigned IDID_W   = 4;                  // 16 domains, 0 = non-isolated

  typedef logic [ADDR_W-1:0]  addr_t;
  typedef logic [LADDR_W-1:0] laddr_t;
  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [WORD_W-1:0]  word_t;
  typedef logic [IDID_W-1:0]  idid_t;

  localparam idid_t IDID_NID = '0;

  // READ        : return the whole line holding addr
  // WRITE       : write-through of one word (addr[5:3] selects it)
  // FLUSH       : invalidate the line the requester could hit on (clflush)
  // FLUSH_DOMAIN: invalidate every line owned by domain idid
  typedef enum logic [1:0] {
    OP_READ      = 2'd0,
    OP_WRITE     = 2'd1,
    OP_FLUSH     = 2'd2,
    OP_FLUSH_DOM = 2'd3
  } op_e;

  typedef struct packed {
    op_e   op;
    addr_t addr;
    idid_t idid;
    word_t wdata;
  } req_t;

  typedef struct packed {
    line_t rdata;  // line contents for READ, don't care otherwise
    logic  hit;    // this level found the line (status only)
  } rsp_t;

  // One-cycle event pulses of a cache level, for performance counters and
  // for checking which controller paths were taken.
  typedef struct packed {
    logic nid_hit;       // non-isolated hit (B-C-D-E yes)
    logic nid_miss;      // non-isolated read miss, LRU fill (F)
    logic nid_refused;   // tag matched a line owned by an isolated domain (E no)
    logic nid_fill_sub;  // LRU placed a non-isolated line in a subcache way
    logic iso_hit;       // isolated hit (G-H-I yes)
    logic iso_miss;      // isolated read miss, random fill (J)
    logic iso_refused;   // tag matched but line-IDID differs (I no)
    logic iso_evict_nid; // random fill evicted a valid non-isolated line
    logic iso_evict_oth; // random fill evicted a line of another isolated domain
    logic flush_line;    // FLUSH invalidated a line
    logic flush_dom;     // FLUSH_DOMAIN invalidated at least one line
  } ev_t;

  function automatic laddr_t line_addr(addr_t a);
    return a[ADDR_W-1:OFFSET_W];
  endfunction

endpackage
