// tb_dm_soc: end-to-end test of the deterministic-memory system at its
// default (full) size: four TLBs of 64 entries, the shared bus, a 2 MiB
// 16-way LLC with 56 MSHRs and 12-clock hits, and the DRAM controller with
// 64-entry read and write buffers, in front of a behavioural LPDDR2 model.
//
// Each core model keeps up to MAX_OUT requests in flight. Its addresses are
// its own (core number in the top virtual address bits), so per-line order
// is the core's order and read data can be checked against a golden copy
// taken when the request is sent. A page-table model answers walks: the
// physical page is the virtual page with a fixed XOR, and a page is
// deterministic (memory type = dm_memtype in {TEX[0],C,B}) when virtual
// address bit 20 is set. Page 0xBAD is not mapped.
//
// Phases: mixed traffic over few sets (evictions, write-backs, DM and BE
// fills, row conflicts), a DM flood from three cores against a BE stream
// from the fourth (the controller's 30-request DM limit), filling one set
// with DM lines of every core (no-allocate), a cleanup of one partition, a
// page fault and a TLB flush.
//
// Every mechanism strobe of the system is counted; a mechanism that never
// happens is a failure. Read data, the DRAM protocol and the cleanup count
// are checked, and the first LLC hit's latency (request accepted by the LLC
// to response) must be 12 clocks.
module tb_dm_soc;
  import dm_pkg::*;

  localparam int MAX_OUT = 12;
  localparam logic [2:0] DM_MT = 3'b101;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [2:0]                        dm_memtype;
  logic [NUM_CORES-1:0]              tlb_flush;
  logic                              cfg_we;
  logic [CORE_W-1:0]                 cfg_core;
  logic [15:0]                       cfg_mask;
  logic                              cln_req, cln_ready, cln_done;
  logic [CORE_W-1:0]                 cln_core;
  logic [$clog2(2048*16+1)-1:0]      cln_count;
  logic [NUM_CORES-1:0]              core_req_valid, core_req_ready, core_req_we;
  logic [NUM_CORES-1:0][VADDR_W-1:0] core_req_vaddr;
  logic [NUM_CORES-1:0][LINE_W-1:0]  core_req_wdata;
  logic [NUM_CORES-1:0]              core_resp_valid, core_fault;
  llc_resp_t                         core_resp;
  logic [NUM_CORES-1:0]              ptw_req_valid, ptw_resp_valid, ptw_resp_ready;
  logic [NUM_CORES-1:0][VPN_W-1:0]   ptw_req_vpn;
  logic [NUM_CORES-1:0][31:0]        ptw_resp_pte;
  dram_cmd_t                         dram_cmd;
  logic [LINE_W-1:0]                 dram_wdata, dram_rdata;
  logic                              dram_rvalid;
  soc_ev_t                           ev;
  int derr, n_act, n_pre, n_rd, n_wr;

  dm_soc dut (.*);

  lpddr2_model u_dram (.clk, .cmd(dram_cmd), .wdata(dram_wdata), .rvalid(dram_rvalid),
                       .rdata(dram_rdata), .errors(derr), .n_act, .n_pre, .n_rd, .n_wr);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  longint cyc = 0;
  always @(posedge clk) cyc++;

  // ---------------------------------------------------------------- page-table model
  function automatic logic [31:0] pte_of(input logic [VPN_W-1:0] vpn);
    logic [31:0] p;
    logic [2:0]  mt;
    mt = vpn[8] ? dm_memtype : 3'b011;     // VA bit 20
    p = '0;
    p[31:12] = vpn ^ 20'h00300;
    p[6] = mt[2]; p[3] = mt[1]; p[2] = mt[0];
    p[1] = (vpn != 20'hBAD);
    return p;
  endfunction

  int wcnt [NUM_CORES];
  int n_walk = 0;
  always @(posedge clk) begin
    for (int c = 0; c < NUM_CORES; c++) begin
      if (!rst_n) begin
        ptw_resp_valid[c] <= 1'b0; wcnt[c] <= 0;
      end else if (ptw_resp_valid[c] && ptw_resp_ready[c]) begin
        ptw_resp_valid[c] <= 1'b0; wcnt[c] <= 0; n_walk++;
      end else if (ptw_req_valid[c] && !ptw_resp_valid[c]) begin
        wcnt[c] <= wcnt[c] + 1;
        if (wcnt[c] == 3) begin
          ptw_resp_valid[c] <= 1'b1;
          ptw_resp_pte[c]   <= pte_of(ptw_req_vpn[c]);
        end
      end
    end
  end

  // ---------------------------------------------------------------- golden data, outstanding list
  logic [LINE_W-1:0] golden [logic [25:0]];       // by physical line
  typedef struct { logic [25:0] pline; bit we; logic [LINE_W-1:0] exp; } out_t;
  out_t outl [NUM_CORES][$];
  int   n_fault = 0, n_resp = 0;

  function automatic logic [25:0] pline_of(input logic [31:0] va);
    return {va[31:12] ^ 20'h00300, va[11:6]};
  endfunction

  function automatic logic [LINE_W-1:0] dram_init(input logic [25:0] pl);
    logic [31:0] pa;
    pa = {pl, 6'd0};
    return {16{32'({pa[14:12], pa[31:15], pa[11:6]}) ^ 32'hC0DE_0000}};
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NUM_CORES; c++) begin
      if (core_resp_valid[c]) begin
        int k;
        k = -1;
        check(core_resp.core == 2'(c), "response steered to its core");
        for (int i = 0; i < outl[c].size(); i++)
          if (outl[c][i].pline == core_resp.addr[31:6] && outl[c][i].we == core_resp.we) begin k = i; break; end
        check(k >= 0, $sformatf("core %0d response for %h was expected", c, core_resp.addr));
        if (k >= 0) begin
          if (!core_resp.we)
            check(core_resp.rdata == outl[c][k].exp, $sformatf("core %0d read data %h", c, core_resp.addr));
          outl[c].delete(k);
        end
        n_resp++;
      end
      if (core_fault[c]) n_fault++;
    end
  end

  // ---------------------------------------------------------------- mechanism counters
  int c_ev [15];
  int n_cln = 0;
  always @(posedge clk) if (rst_n) begin
    logic [14:0] v;
    v = ev;
    for (int i = 0; i < 15; i++) c_ev[i] += int'(v[14 - i]);
    if (cln_done) n_cln++;
  end
  string ev_name [15] = '{"llc_hit", "llc_miss", "llc_dm_evict_be", "llc_dm_evict_dm", "llc_be_fill",
                          "llc_no_alloc", "llc_mshr_stall", "mc_dm_issue", "mc_be_issue", "mc_forced_be",
                          "mc_row_hit", "mc_row_conflict", "mc_auto_pre", "mc_fwd", "mc_wr_merge"};

  // first LLC hit: clocks from the LLC taking the request to its response
  // (armed once the system is idle, so the next response is this hit's)
  int hit_cnt = -1, hit_lat = -1;
  bit measure = 0;
  always @(posedge clk) if (rst_n) begin
    if (hit_cnt >= 0) hit_cnt++;
    if (hit_lat < 0 && hit_cnt > 0 && |core_resp_valid) hit_lat = hit_cnt;
    if (measure && ev.llc_hit && hit_cnt < 0) hit_cnt = 0;
  end

  // ---------------------------------------------------------------- core driver
  task automatic send(input int c, input logic [31:0] va, input bit we);
    logic [25:0] pl;
    while (outl[c].size() >= MAX_OUT) @(negedge clk);
    @(negedge clk);
    core_req_valid[c] = 1; core_req_vaddr[c] = va; core_req_we[c] = we;
    core_req_wdata[c] = {16{$urandom}};
    #1;
    while (!core_req_ready[c]) begin @(negedge clk); #1; end
    pl = pline_of(va);
    if (va[31:12] != 20'hBAD) begin
      out_t o;
      if (we) golden[pl] = core_req_wdata[c];
      o.pline = pl; o.we = we;
      o.exp = golden.exists(pl) ? golden[pl] : dram_init(pl);
      outl[c].push_back(o);
    end
    @(posedge clk); #1;
    core_req_valid[c] = 0;
  endtask

  // virtual address of core c: tag selects a 128 KiB-aligned region (same
  // LLC set for the same set index), dm sets VA bit 20
  function automatic logic [31:0] va_of(input int c, input int tag, input bit dm, input int set);
    logic [31:0] v;
    v = {4'(c + 1), 7'(tag), 1'b0, 3'd0, 11'(set), 6'd0};   // [31:28] core, [27:21] tag, [20] dm, [16:6] set
    v[20] = dm;
    return v;
  endfunction

  task automatic drain();
    int g = 0;
    while ((outl[0].size() + outl[1].size() + outl[2].size() + outl[3].size()) != 0 && g < 100000) begin
      @(negedge clk); g++;
    end
    check(g < 100000, "all requests answered");
    repeat (20) @(negedge clk);
  endtask

  initial begin
    dm_memtype = DM_MT; tlb_flush = '0; cfg_we = 0; cfg_core = 0; cfg_mask = '0;
    cln_req = 0; cln_core = 0;
    core_req_valid = '0; core_req_vaddr = '0; core_req_we = '0; core_req_wdata = '0;
    ptw_resp_pte = '0;
    for (int i = 0; i < 15; i++) c_ev[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (cln_ready);

    // ---- phase 1: mixed traffic over 4 sets, 24 tags per core, DM and BE
    $display("%0d: %s", cyc, "phase 1");
    for (int c = 0; c < NUM_CORES; c++) begin
      automatic int cc = c;
      fork
        for (int i = 0; i < 300; i++)
          send(cc, va_of(cc, $urandom % 24, 1'($urandom % 2), $urandom % 4), 1'($urandom % 3 == 0));
      join_none
    end
    wait fork;
    drain();

    // ---- phase 2: DM flood from cores 0-2, BE stream from core 3
    $display("%0d: %s", cyc, "phase 2");
    for (int c = 0; c < 3; c++) begin
      automatic int cc = c;
      fork
        for (int i = 0; i < 150; i++) send(cc, va_of(cc, 40 + i / 64, 1, 16 + i % 64), 0);
      join_none
    end
    fork
      for (int i = 0; i < 100; i++) send(3, va_of(3, 40 + i / 64, 0, 16 + i % 64), 0);
    join_none
    wait fork;
    drain();

    // ---- phase 3: every core fills LLC set 200 with DM lines, then BE lines arrive
    $display("%0d: %s", cyc, "phase 3");
    for (int c = 0; c < NUM_CORES; c++)
      for (int t = 0; t < 6; t++) send(c, va_of(c, 60 + t, 1, 200), 1'(t % 2));
    drain();
    for (int t = 0; t < 4; t++) send(1, va_of(1, 70 + t, 0, 200), 0);
    drain();

    // ---- phase 4: cleanup of core 2's partition
    $display("%0d: %s", cyc, "phase 4");
    begin
      int exp;
      exp = 0;
      for (int s = 0; s < 2048; s++)
        for (int w = 8; w < 12; w++)
          if (dut.u_llc.valid_arr[s][w] && dut.u_llc.dm_arr[s][w]) exp++;
      @(negedge clk); cln_core = 2; cln_req = 1; @(negedge clk); cln_req = 0;
      wait (cln_done); @(negedge clk);
      check(int'(cln_count) == exp && exp > 0, $sformatf("cleanup count %0d exp %0d", cln_count, exp));
    end
    for (int t = 0; t < 4; t++) send(1, va_of(1, 80 + t, 0, 200), 0);
    drain();

    // ---- phase 5: page fault, memory-type change with TLB flush
    $display("%0d: %s", cyc, "phase 5");
    send(0, {20'hBAD, 12'h040}, 0);
    repeat (10) @(negedge clk);
    check(n_fault == 1, "page fault reported once");
    dm_memtype = 3'b110;
    @(negedge clk); tlb_flush = '1; @(negedge clk); tlb_flush = '0;
    for (int c = 0; c < NUM_CORES; c++) send(c, va_of(c, 1, 1, 1), 0);
    drain();
    measure = 1;
    send(2, va_of(2, 1, 1, 1), 0);
    drain();

    // ---- results
    check(derr == 0, $sformatf("DRAM protocol errors: %0d", derr));
    check(hit_lat == 12, $sformatf("LLC hit latency %0d", hit_lat));
    for (int i = 0; i < 15; i++) begin
      $display("  %-16s %0d", ev_name[i], c_ev[i]);
      check(c_ev[i] > 0, $sformatf("mechanism %s happened", ev_name[i]));
    end
    $display("  tlb_walks        %0d", n_walk);
    $display("  page_faults      %0d", n_fault);
    $display("  cleanups         %0d", n_cln);
    $display("  dram act/pre/rd/wr %0d/%0d/%0d/%0d, responses %0d", n_act, n_pre, n_rd, n_wr, n_resp);
    check(n_walk > 0, "mechanism tlb_walk happened");
    check(n_cln == 1, "mechanism cleanup happened");
    check(n_act > 0 && n_pre > 0 && n_rd > 0 && n_wr > 0, "DRAM ACT/PRE/RD/WR all used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
