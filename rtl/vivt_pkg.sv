// vivt_pkg: sizes, address fields and message types shared by the VIVT
// direct-mapped cache, the reverse lookup table (RLUT) and the MMU sequencer.
//
// The default configuration is a 32 KB direct-mapped cache with 64-byte
// lines, 32-bit virtual and 36-bit physical addresses and 4 KB minimum pages,
// and a 1-synonym-safe RLUT (at most one cached virtual alias per physical
// line). Everything else is derived from these five numbers:
//   cache lines      = CACHE_BYTES / LINE_BYTES               (512)
//   cache index      = VA[14:6], cache tag = VA[31:15]        (17 bits)
//   RLUT sets        = PAGE_BYTES / LINE_BYTES                (64, index PA[11:6])
//   RLUT tag         = PA[35:12]                              (24 bits)
//   RLUT data        = VA[14:12], the synonym's page colour   (3 bits)
//   RLUT ways        = 2**RLUT_DATA_W                         (8)
// Changing CACHE_BYTES (at least 8 KB, so that the RLUT is needed) resizes
// the whole subsystem consistently.
package vivt_pkg;

  localparam int unsigned VA_W        = 32;
  localparam int unsigned PA_W        = 36;
  localparam int unsigned CACHE_BYTES = 32 * 1024;
  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned PAGE_BYTES  = 4096;

  localparam int unsigned WORD_W      = 32;
  localparam int unsigned BE_W        = WORD_W / 8;
  localparam int unsigned LINE_W      = LINE_BYTES * 8;                 // 512
  localparam int unsigned WORDS       = LINE_BYTES / BE_W;              // 16
  localparam int unsigned OFF_W       = $clog2(LINE_BYTES);             // 6
  localparam int unsigned WSEL_W      = $clog2(WORDS);                  // 4
  localparam int unsigned LINES       = CACHE_BYTES / LINE_BYTES;       // 512
  localparam int unsigned IDX_W       = $clog2(LINES);                  // 9
  localparam int unsigned CTAG_W      = VA_W - IDX_W - OFF_W;           // 17
  localparam int unsigned PGOFF_W     = $clog2(PAGE_BYTES);             // 12

  localparam int unsigned RLUT_SETS   = PAGE_BYTES / LINE_BYTES;        // 64
  localparam int unsigned RSET_W      = PGOFF_W - OFF_W;                // 6
  localparam int unsigned RTAG_W      = PA_W - PGOFF_W;                 // 24
  localparam int unsigned RDATA_W     = IDX_W + OFF_W - PGOFF_W;        // 3
  localparam int unsigned RLUT_WAYS   = 1 << RDATA_W;                   // 8

  typedef logic [VA_W-1:0]   vaddr_t;
  typedef logic [PA_W-1:0]   paddr_t;
  typedef logic [WORD_W-1:0] word_t;
  typedef logic [BE_W-1:0]   be_t;
  typedef logic [LINE_W-1:0] line_t;
  typedef logic [IDX_W-1:0]  cidx_t;     // cache line index VA[14:6]
  typedef logic [CTAG_W-1:0] ctag_t;     // cache tag VA[31:15]
  typedef logic [RSET_W-1:0] rset_t;     // RLUT set PA[11:6]
  typedef logic [RTAG_W-1:0] rtag_t;     // RLUT tag PA[35:12]
  typedef logic [RDATA_W-1:0] rdata_t;   // RLUT data VA[14:12]

  // One RLUT way: valid bit, physical tag, virtual page colour.
  typedef struct packed {
    logic   valid;
    rtag_t  tag;
    rdata_t va;
  } rlut_entry_t;

  // CPU -> cache request (one word).
  typedef struct packed {
    logic   write;
    vaddr_t addr;
    word_t  wdata;
    be_t    be;
  } cpu_req_t;

  typedef struct packed {
    word_t rdata;
    logic  error;
  } cpu_resp_t;

  // Cache -> MMU request. miss=1: fetch the line (a write miss also writes
  // the word through first). miss=0: write-through of a write hit.
  typedef struct packed {
    logic   miss;
    logic   write;
    vaddr_t vaddr;
    word_t  wdata;
    be_t    be;
  } mmu_req_t;

  // MMU -> cache line response for a miss.
  typedef struct packed {
    line_t line;
    logic  error;
  } line_resp_t;

  // RLUT -> cache invalidate: the cache line index {VA[14:12], PA[11:6]}.
  // For the synonym message of a lookup+insert, inval=0 means no synonym.
  typedef struct packed {
    logic  inval;
    cidx_t index;
  } inval_msg_t;

  // MMU -> translation unit, and back.
  typedef struct packed {
    vaddr_t vaddr;
    logic   write;
  } xlate_req_t;

  typedef struct packed {
    paddr_t paddr;
    logic   error;
  } xlate_resp_t;

  // MMU -> physical memory. Writes are posted; reads return one line_resp_t.
  typedef struct packed {
    logic   write;
    paddr_t paddr;
    word_t  wdata;
    be_t    be;
  } mem_req_t;

  // RLUT lookup+insert request from the MMU: the (P, V) pair of a miss.
  typedef struct packed {
    paddr_t paddr;
    vaddr_t vaddr;
  } rlut_ins_t;

endpackage
