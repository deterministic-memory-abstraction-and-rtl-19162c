// dm_soc: deterministic-memory-aware memory hierarchy of a four-core system.
//
// Path of a request (line-sized, as it leaves a core's private L1 cache):
//   core port -> dm_tlb (virtual -> physical, DM bit from the page's memory
//   type) -> dm_bus_arb (round-robin, DM bit carried) -> dm_llc (shared L2,
//   DM-aware replacement and way partitioning, DM cleanup) -> dm_mc (DRAM
//   controller, two-level DM/BE scheduling) -> DRAM command bus.
// Responses return from the LLC to the requesting core.
//
// Outside this module: the cores and their L1 caches (core_* ports), the
// page-table walker's memory reads (ptw_* ports, one per core; the OS writes
// the DM memory type into the page table entries), the OS configuration
// registers (dm_memtype, way partitions, cleanup, TLB flush) and the DRAM
// device (dram_* ports).
//
// A request whose page-table entry is not a valid small page is not sent
// to the cache; core_fault[c] pulses instead.
//
// Timing: a TLB hit adds one clock; an LLC hit answers HIT_LAT clocks after
// the LLC takes the request; misses add the DRAM controller's latency.
// All blocks share one clock (this design's choice; the evaluated system
// runs the cores at 2 GHz and the DRAM at 533 MHz).
module dm_soc
  import dm_pkg::*;
#(
  parameter int unsigned TLB_ENTRIES = 64,
  parameter int unsigned SETS        = 2048,
  parameter int unsigned WAYS        = 16,
  parameter int unsigned MSHRS       = 56,
  parameter int unsigned HIT_LAT     = 12,
  parameter int unsigned RD_BUF      = 64,
  parameter int unsigned WR_BUF      = 64,
  parameter int unsigned MAX_DM      = 30,
  parameter int unsigned T_RCD       = 10,
  parameter int unsigned T_RP        = 10,
  parameter int unsigned T_RL        = 8,
  parameter int unsigned T_WL        = 4,
  parameter int unsigned T_BURST     = 8
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // OS-visible configuration
  input  logic [2:0]                        dm_memtype,
  input  logic [NUM_CORES-1:0]              tlb_flush,
  input  logic                              cfg_we,
  input  logic [CORE_W-1:0]                 cfg_core,
  input  logic [WAYS-1:0]                   cfg_mask,
  input  logic                              cln_req,
  input  logic [CORE_W-1:0]                 cln_core,
  output logic                              cln_ready,
  output logic                              cln_done,
  output logic [$clog2(SETS*WAYS+1)-1:0]    cln_count,
  // cores (L1 miss / write-back ports)
  input  logic [NUM_CORES-1:0]              core_req_valid,
  output logic [NUM_CORES-1:0]              core_req_ready,
  input  logic [NUM_CORES-1:0][VADDR_W-1:0] core_req_vaddr,
  input  logic [NUM_CORES-1:0]              core_req_we,
  input  logic [NUM_CORES-1:0][LINE_W-1:0]  core_req_wdata,
  output logic [NUM_CORES-1:0]              core_resp_valid,
  output llc_resp_t                         core_resp,
  output logic [NUM_CORES-1:0]              core_fault,
  // page-table walk, one port per core
  output logic [NUM_CORES-1:0]              ptw_req_valid,
  output logic [NUM_CORES-1:0][VPN_W-1:0]   ptw_req_vpn,
  input  logic [NUM_CORES-1:0]              ptw_resp_valid,
  output logic [NUM_CORES-1:0]              ptw_resp_ready,
  input  logic [NUM_CORES-1:0][31:0]        ptw_resp_pte,
  // DRAM device
  output dram_cmd_t                         dram_cmd,
  output logic [LINE_W-1:0]                 dram_wdata,
  input  logic                              dram_rvalid,
  input  logic [LINE_W-1:0]                 dram_rdata,
  // mechanism strobes
  output soc_ev_t                           ev
);

  // ---------------------------------------------------------------- TLBs
  logic     [NUM_CORES-1:0] t_valid, t_ready, t_fault;
  llc_req_t [NUM_CORES-1:0] t_req;
  logic     [NUM_CORES-1:0] b_in_valid, b_in_ready;

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    dm_tlb #(.ENTRIES(TLB_ENTRIES), .CORE_ID(CORE_W'(c))) u_tlb (
      .clk, .rst_n,
      .dm_memtype    (dm_memtype),
      .flush         (tlb_flush[c]),
      .req_valid     (core_req_valid[c]),
      .req_ready     (core_req_ready[c]),
      .req_vaddr     (core_req_vaddr[c]),
      .req_we        (core_req_we[c]),
      .req_wdata     (core_req_wdata[c]),
      .out_valid     (t_valid[c]),
      .out_ready     (t_ready[c]),
      .out_req       (t_req[c]),
      .out_fault     (t_fault[c]),
      .ptw_req_valid (ptw_req_valid[c]),
      .ptw_req_vpn   (ptw_req_vpn[c]),
      .ptw_resp_valid(ptw_resp_valid[c]),
      .ptw_resp_ready(ptw_resp_ready[c]),
      .ptw_resp_pte  (ptw_resp_pte[c])
    );
    // faulting translations are dropped here and reported to the core
    assign b_in_valid[c] = t_valid[c] && !t_fault[c];
    assign t_ready[c]    = t_fault[c] ? 1'b1 : b_in_ready[c];
    assign core_fault[c] = t_valid[c] && t_fault[c];
  end

  // ---------------------------------------------------------------- bus
  logic      l_req_valid, l_req_ready;
  llc_req_t  l_req;
  logic      l_resp_valid;

  dm_bus_arb #(.N(NUM_CORES)) u_bus (
    .clk, .rst_n,
    .in_valid       (b_in_valid),
    .in_ready       (b_in_ready),
    .in_req         (t_req),
    .out_valid      (l_req_valid),
    .out_ready      (l_req_ready),
    .out_req        (l_req),
    .resp_valid     (l_resp_valid),
    .resp           (core_resp),
    .core_resp_valid(core_resp_valid)
  );

  // ---------------------------------------------------------------- LLC
  logic     m_req_valid, m_req_ready, m_resp_valid, m_resp_ready;
  mc_req_t  m_req;
  mc_resp_t m_resp;

  dm_llc #(.SETS(SETS), .WAYS(WAYS), .MSHRS(MSHRS), .HIT_LAT(HIT_LAT)) u_llc (
    .clk, .rst_n,
    .cfg_we, .cfg_core, .cfg_mask,
    .cln_req, .cln_core, .cln_ready, .cln_done, .cln_count,
    .req_valid     (l_req_valid),
    .req_ready     (l_req_ready),
    .req           (l_req),
    .resp_valid    (l_resp_valid),
    .resp          (core_resp),
    .mem_req_valid (m_req_valid),
    .mem_req_ready (m_req_ready),
    .mem_req       (m_req),
    .mem_resp_valid(m_resp_valid),
    .mem_resp_ready(m_resp_ready),
    .mem_resp      (m_resp),
    .ev_hit        (ev.llc_hit),
    .ev_miss       (ev.llc_miss),
    .ev_dm_evict_be(ev.llc_dm_evict_be),
    .ev_dm_evict_dm(ev.llc_dm_evict_dm),
    .ev_be_fill    (ev.llc_be_fill),
    .ev_no_alloc   (ev.llc_no_alloc),
    .ev_mshr_stall (ev.llc_mshr_stall)
  );

  // ---------------------------------------------------------------- DRAM controller
  dm_mc #(.RD_BUF(RD_BUF), .WR_BUF(WR_BUF), .MAX_DM(MAX_DM), .T_RCD(T_RCD),
          .T_RP(T_RP), .T_RL(T_RL), .T_WL(T_WL), .T_BURST(T_BURST)) u_mc (
    .clk, .rst_n,
    .req_valid      (m_req_valid),
    .req_ready      (m_req_ready),
    .req            (m_req),
    .resp_valid     (m_resp_valid),
    .resp_ready     (m_resp_ready),
    .resp           (m_resp),
    .dram_cmd       (dram_cmd),
    .dram_wdata     (dram_wdata),
    .dram_rvalid    (dram_rvalid),
    .dram_rdata     (dram_rdata),
    .ev_dm_issue    (ev.mc_dm_issue),
    .ev_be_issue    (ev.mc_be_issue),
    .ev_forced_be   (ev.mc_forced_be),
    .ev_row_hit     (ev.mc_row_hit),
    .ev_row_conflict(ev.mc_row_conflict),
    .ev_auto_pre    (ev.mc_auto_pre),
    .ev_fwd         (ev.mc_fwd),
    .ev_wr_merge    (ev.mc_wr_merge)
  );

endmodule
