// muontrap_pkg: types and constants shared by the speculative filter caches,
// the filter TLB, the coherence controller and the commit-trained prefetcher.
//
// Line size (64 B), filter-cache geometry (2 KiB, 4-way, 4 MSHRs) and the
// TLB size (64 entries) follow the evaluated configuration. Address widths
// (48-bit virtual, 40-bit physical), the 4 KiB page and the 64-bit CPU word
// are this design's own choices.
package muontrap_pkg;

  localparam int unsigned VA_W       = 48;   // virtual address bits
  localparam int unsigned PA_W       = 40;   // physical address bits
  localparam int unsigned PAGE_BITS  = 12;   // 4 KiB pages
  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned OFF_BITS   = $clog2(LINE_BYTES);
  localparam int unsigned LINE_BITS  = LINE_BYTES * 8;
  localparam int unsigned WORD_BITS  = 64;
  localparam int unsigned WORDS      = LINE_BITS / WORD_BITS;
  localparam int unsigned WSEL_BITS  = $clog2(WORDS);
  localparam int unsigned ID_W       = 6;    // load/store queue tag (32 LQ + 32 SQ)
  localparam int unsigned VPN_W      = VA_W - PAGE_BITS;
  localparam int unsigned PPN_W      = PA_W - PAGE_BITS;
  localparam int unsigned ASID_W     = 16;
  localparam int unsigned VLINE_W    = VA_W - OFF_BITS;
  localparam int unsigned PLINE_W    = PA_W - OFF_BITS;

  typedef logic [VA_W-1:0]      vaddr_t;
  typedef logic [PA_W-1:0]      paddr_t;
  typedef logic [LINE_BITS-1:0] line_t;
  typedef logic [WORD_BITS-1:0] word_t;
  typedef logic [VPN_W-1:0]     vpn_t;
  typedef logic [PPN_W-1:0]     ppn_t;
  typedef logic [ASID_W-1:0]    asid_t;
  typedef logic [PLINE_W-1:0]   pline_t;

  // CPU-side operations on a filter cache.
  typedef enum logic [1:0] {
    FC_LOAD   = 2'd0,  // load or instruction fetch (speculative or not)
    FC_COMMIT = 2'd1,  // a load / fetch that used this line has committed
    FC_STORE  = 2'd2   // a store commits: write word, write through, upgrade
  } fc_op_e;

  // Level of the non-speculative hierarchy a line was filled from.
  typedef enum logic [1:0] {
    LVL_L1  = 2'd0,
    LVL_L2  = 2'd1,
    LVL_MEM = 2'd2
  } level_e;

  // Filter-cache line state. Only S is visible to the coherence protocol;
  // SE additionally requests an asynchronous upgrade to E when it commits.
  typedef enum logic [0:0] {
    FC_S  = 1'b0,
    FC_SE = 1'b1
  } fc_state_e;

  typedef enum logic [1:0] {
    MESI_I = 2'd0,
    MESI_S = 2'd1,
    MESI_E = 2'd2,
    MESI_M = 2'd3
  } mesi_e;

  typedef struct packed {
    fc_op_e              op;
    logic                spec;   // issued under speculation
    vaddr_t              vaddr;
    paddr_t              paddr;  // translation, used on misses and commits
    logic [ID_W-1:0]     id;
    word_t               wdata;
    logic [7:0]          wmask;
  } fc_req_t;

  typedef struct packed {
    logic [ID_W-1:0]     id;
    word_t               data;
    logic                hit;    // 1: L0 hit, 0: returned by a fill
    logic                nack;   // request refused by the coherence rules; retry when non-speculative
  } fc_resp_t;

  // Write-through from the filter cache to its L1 at commit.
  typedef struct packed {
    paddr_t              paddr;    // line address (offset bits zero)
    line_t               data;     // whole line, valid unless refetch
    logic                refetch;  // line had left L0: L1 must fetch it itself
    logic                store;    // carries a committed store
    logic [WSEL_BITS-1:0] wsel;
    word_t               wdata;
    logic [7:0]          wmask;
  } fc_wt_t;

  typedef struct packed {
    line_t               data;
    level_e              level;
    fc_state_e           grant;
    logic                nack;
  } fc_fill_t;

  typedef struct packed {
    vpn_t                vpn;
    ppn_t                ppn;
    logic [2:0]          perm;   // read / write / execute
  } xlate_t;

endpackage
