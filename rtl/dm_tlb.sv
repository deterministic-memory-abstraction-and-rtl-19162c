// dm_tlb: per-core MMU/TLB that translates a virtual line request into a
// physical one and attaches the deterministic-memory (DM) bit.
//
// Each TLB entry holds, besides the virtual and physical page numbers, one
// DM bit. On a miss the TLB asks the page-table-walk port for the ARMv7
// second-level small-page descriptor of the page and decodes it:
//   PA[31:12] = pte[31:12], TEX[2:0] = pte[8:6], C = pte[3], B = pte[2],
//   pte[1] = 1 marks a small page.
// With TEX remapping the three bits {TEX[0], C, B} index one of eight memory
// types; the OS reserves one otherwise unused type for deterministic memory,
// and the TLB sets DM when the index equals dm_memtype (a programmable
// register input). The DM bit is then carried in the request to the LLC.
//
// Design choices: fully associative, ENTRIES entries, round-robin refill;
// one walk outstanding; a descriptor with pte[1] = 0 is a translation fault,
// reported on the response (fault=1) and not cached. flush invalidates all
// entries. The walk itself (reading the tables) is outside, behind the
// ptw_* port.
//
// Walk port: ptw_req_valid/ptw_req_vpn stay up until the descriptor is taken
// with ptw_resp_valid && ptw_resp_ready.
//
// Timing: a hit is presented on out_* the cycle after the request is taken;
// a miss adds the walk latency. req_ready is low while a walk is pending or
// the output register is full and not being taken.
module dm_tlb
  import dm_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  parameter logic [CORE_W-1:0] CORE_ID = '0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [2:0]           dm_memtype,
  input  logic                 flush,
  // core side
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic [VADDR_W-1:0]   req_vaddr,
  input  logic                 req_we,
  input  logic [LINE_W-1:0]    req_wdata,
  // translated request toward the bus
  output logic                 out_valid,
  input  logic                 out_ready,
  output llc_req_t             out_req,
  output logic                 out_fault,
  // page table walk
  output logic                 ptw_req_valid,
  output logic [VPN_W-1:0]     ptw_req_vpn,
  input  logic                 ptw_resp_valid,
  output logic                 ptw_resp_ready,
  input  logic [31:0]          ptw_resp_pte
);

  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  typedef struct packed {
    logic             valid;
    logic [VPN_W-1:0] vpn;
    logic [PPN_W-1:0] ppn;
    logic             dm;
  } tlb_entry_t;

  tlb_entry_t         tlb [ENTRIES];
  logic [IDX_W-1:0]   rr_ptr;

  // pending request while walking
  logic               walking;
  logic [VADDR_W-1:0] p_vaddr;
  logic               p_we;
  logic [LINE_W-1:0]  p_wdata;

  logic               out_free;
  assign out_free = !out_valid || out_ready;

  // lookup
  logic             hit;
  logic [PPN_W-1:0] hit_ppn;
  logic             hit_dm;
  always_comb begin
    hit     = 1'b0;
    hit_ppn = '0;
    hit_dm  = 1'b0;
    for (int e = 0; e < ENTRIES; e++) begin
      if (tlb[e].valid && tlb[e].vpn == req_vaddr[VADDR_W-1:PAGE_OFF_W]) begin
        hit     = 1'b1;
        hit_ppn = tlb[e].ppn;
        hit_dm  = tlb[e].dm;
      end
    end
  end

  assign req_ready     = !walking && out_free;
  assign ptw_req_valid = walking;
  assign ptw_req_vpn   = p_vaddr[VADDR_W-1:PAGE_OFF_W];
  assign ptw_resp_ready = walking && out_free;

  // descriptor decode
  logic       pte_ok;
  logic       pte_dm;
  always_comb begin
    pte_ok = ptw_resp_pte[1];
    pte_dm = ({ptw_resp_pte[6], ptw_resp_pte[3], ptw_resp_pte[2]} == dm_memtype);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) tlb[e] <= '0;
      rr_ptr    <= '0;
      walking   <= 1'b0;
      p_vaddr   <= '0;
      p_we      <= 1'b0;
      p_wdata   <= '0;
      out_valid <= 1'b0;
      out_req   <= '0;
      out_fault <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;

      if (flush) begin
        for (int e = 0; e < ENTRIES; e++) tlb[e].valid <= 1'b0;
      end

      if (req_valid && req_ready) begin
        if (hit && !flush) begin
          out_valid     <= 1'b1;
          out_fault     <= 1'b0;
          out_req.core  <= CORE_ID;
          out_req.we    <= req_we;
          out_req.dm    <= hit_dm;
          out_req.addr  <= {hit_ppn, req_vaddr[PAGE_OFF_W-1:0]};
          out_req.wdata <= req_wdata;
        end else begin
          walking <= 1'b1;
          p_vaddr <= req_vaddr;
          p_we    <= req_we;
          p_wdata <= req_wdata;
        end
      end

      if (ptw_resp_valid && ptw_resp_ready) begin
        walking       <= 1'b0;
        out_valid     <= 1'b1;
        out_fault     <= !pte_ok;
        out_req.core  <= CORE_ID;
        out_req.we    <= p_we;
        out_req.dm    <= pte_dm;
        out_req.addr  <= {ptw_resp_pte[31:PAGE_OFF_W], p_vaddr[PAGE_OFF_W-1:0]};
        out_req.wdata <= p_wdata;
        if (pte_ok && !flush) begin
          tlb[rr_ptr] <= '{valid: 1'b1,
                           vpn:   p_vaddr[VADDR_W-1:PAGE_OFF_W],
                           ppn:   ptw_resp_pte[31:PAGE_OFF_W],
                           dm:    pte_dm};
          rr_ptr <= (rr_ptr == IDX_W'(ENTRIES-1)) ? '0 : rr_ptr + 1'b1;
        end
      end
    end
  end

endmodule
