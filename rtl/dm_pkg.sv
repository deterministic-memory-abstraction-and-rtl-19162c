// dm_pkg: types and constants shared by the deterministic-memory-aware
// memory hierarchy (per-core TLB, shared bus, last-level cache, DRAM
// controller).
//
// Every request that leaves a core's TLB carries one extra bit, dm, which
// says whether the page it touches is deterministic memory (dm=1) or
// best-effort memory (dm=0). The bit travels with the request through the
// bus, the LLC and into the DRAM controller, which all use it to choose
// their allocation and scheduling policy.
//
// Sizes follow the evaluated system: four cores, 32-bit ARMv7 physical
// addresses, 4 KiB small pages, 8 DRAM banks. The 64-byte line size and the
// physical-address-to-DRAM mapping are this design's own choices.
package dm_pkg;

  localparam int unsigned NUM_CORES  = 4;
  localparam int unsigned CORE_W     = $clog2(NUM_CORES);
  localparam int unsigned PADDR_W    = 32;
  localparam int unsigned VADDR_W    = 32;
  localparam int unsigned PAGE_OFF_W = 12;                  // 4 KiB small page
  localparam int unsigned VPN_W      = VADDR_W - PAGE_OFF_W;  // 20
  localparam int unsigned PPN_W      = PADDR_W - PAGE_OFF_W;  // 20
  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned LINE_W     = LINE_BYTES * 8;        // 512
  localparam int unsigned OFF_W      = $clog2(LINE_BYTES);    // 6

  // DRAM address mapping (physical address bits):
  //   [11:6]  column (line within a 4 KiB DRAM row)
  //   [14:12] bank   (so one 4 KiB page lies in one bank: the OS picks the
  //                   bank of a page by picking its frame number)
  //   [31:15] row
  localparam int unsigned NUM_BANKS  = 8;
  localparam int unsigned BANK_W     = $clog2(NUM_BANKS);
  localparam int unsigned COL_W      = PAGE_OFF_W - OFF_W;              // 6
  localparam int unsigned ROW_W      = PADDR_W - PAGE_OFF_W - BANK_W;   // 17

  // Request from a core (after translation) to the shared LLC.
  typedef struct packed {
    logic [CORE_W-1:0]  core;   // requesting core
    logic               we;     // 1: full-line write (L1 write-back), 0: line read
    logic               dm;     // deterministic-memory bit from the TLB
    logic [PADDR_W-1:0] addr;   // physical address
    logic [LINE_W-1:0]  wdata;  // line data for writes
  } llc_req_t;

  // Response from the LLC to a core.
  typedef struct packed {
    logic [CORE_W-1:0]  core;
    logic               we;     // 1: acknowledgement of a write
    logic [PADDR_W-1:0] addr;
    logic [LINE_W-1:0]  rdata;
  } llc_resp_t;

  // Request from the LLC to the DRAM controller. id is echoed on the read
  // response so that out-of-order (FR-FCFS) completion can be matched.
  localparam int unsigned MC_ID_W = 8;
  typedef struct packed {
    logic [MC_ID_W-1:0] id;
    logic               we;
    logic               dm;
    logic [PADDR_W-1:0] addr;
    logic [LINE_W-1:0]  wdata;
  } mc_req_t;

  typedef struct packed {
    logic [MC_ID_W-1:0] id;
    logic [LINE_W-1:0]  rdata;
  } mc_resp_t;

  // DRAM command bus.
  typedef enum logic [2:0] {
    DCMD_NOP = 3'd0,
    DCMD_ACT = 3'd1,
    DCMD_PRE = 3'd2,
    DCMD_RD  = 3'd3,
    DCMD_WR  = 3'd4
  } dram_cmd_e;

  typedef struct packed {
    dram_cmd_e          cmd;
    logic               ap;     // auto-precharge with RD/WR
    logic [BANK_W-1:0]  bank;
    logic [ROW_W-1:0]   row;
    logic [COL_W-1:0]   col;
  } dram_cmd_t;

  // Event strobes of the memory hierarchy, one bit per mechanism.
  typedef struct packed {
    logic llc_hit;
    logic llc_miss;
    logic llc_dm_evict_be;
    logic llc_dm_evict_dm;
    logic llc_be_fill;
    logic llc_no_alloc;
    logic llc_mshr_stall;
    logic mc_dm_issue;
    logic mc_be_issue;
    logic mc_forced_be;
    logic mc_row_hit;
    logic mc_row_conflict;
    logic mc_auto_pre;
    logic mc_fwd;
    logic mc_wr_merge;
  } soc_ev_t;

  function automatic logic [BANK_W-1:0] addr_bank(input logic [PADDR_W-1:0] a);
    return a[PAGE_OFF_W +: BANK_W];
  endfunction

  function automatic logic [ROW_W-1:0] addr_row(input logic [PADDR_W-1:0] a);
    return a[PADDR_W-1 -: ROW_W];
  endfunction

  function automatic logic [COL_W-1:0] addr_col(input logic [PADDR_W-1:0] a);
    return a[OFF_W +: COL_W];
  endfunction

endpackage
