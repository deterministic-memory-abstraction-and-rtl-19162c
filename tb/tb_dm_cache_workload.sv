// tb_dm_cache_workload: the shared-cache isolation experiment, scaled down.
//
// A real-time task on core 3 reads its working set over and over, while
// three "Bandwidth"-style co-runners on cores 0-2 write sequentially over
// best-effort buffers whose sizes add up to the whole LLC. The system is run
// twice from reset:
//  - DM:  the real-time pages carry the deterministic memory type, so their
//         lines live in core 3's 4-way partition and cannot be evicted;
//  - NoP: the deterministic memory type is set to a value no page uses, so
//         every fill is best-effort and the cache behaves as an unpartitioned
//         LRU cache shared by all cores.
// The LLC hit rate of the real-time task after its first (cold) pass is
// measured in both runs (the task computes for RT_GAP clocks between its
// accesses, so the co-runners issue far more requests; each co-runner
// makes three passes over its buffer). Checks: DM hit rate is at least 99%, and above the
// NoP hit rate, and in DM mode co-runner lines occupy the part of core 3's
// partition that the real-time task leaves unused.
//
// The DRAM model is not reset between the runs, so it reports activates to
// banks it still believes open at the start of the second run; only the
// first run's protocol check counts.
//
// Scaling: the LLC has 64 sets instead of 2048 (128 KiB instead of 2 MiB);
// all other parameters are the defaults. The real-time working set is 12 KiB,
// which fits in its 16 KiB partition; each co-runner writes over 128/3 KiB.
module tb_dm_cache_workload;
  import dm_pkg::*;

  localparam int SETS    = 64;
  localparam int RT_LINES = 192;                       // 12 KiB
  localparam int BW_LINES = SETS * 16 / 3;             // one third of the LLC each
  localparam int MAX_OUT = 8;
  localparam int PASSES  = 2;
  localparam int RT_GAP  = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [2:0]                        dm_memtype;
  logic [NUM_CORES-1:0]              tlb_flush;
  logic                              cfg_we, cln_req, cln_ready, cln_done;
  logic [CORE_W-1:0]                 cfg_core, cln_core;
  logic [15:0]                       cfg_mask;
  logic [$clog2(SETS*16+1)-1:0]      cln_count;
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

  dm_soc #(.SETS(SETS)) dut (.*);

  lpddr2_model u_dram (.clk, .cmd(dram_cmd), .wdata(dram_wdata), .rvalid(dram_rvalid),
                       .rdata(dram_rdata), .errors(derr), .n_act, .n_pre, .n_rd, .n_wr);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // page tables: identity mapping; pages with VA bit 31 set (the real-time
  // task's) get memory type 3'b101, the others 3'b011
  always @(posedge clk) begin
    for (int c = 0; c < NUM_CORES; c++) begin
      if (!rst_n) ptw_resp_valid[c] <= 1'b0;
      else if (ptw_resp_valid[c] && ptw_resp_ready[c]) ptw_resp_valid[c] <= 1'b0;
      else if (ptw_req_valid[c]) begin
        logic [31:0] p;
        logic [2:0]  mt;
        mt = ptw_req_vpn[c][19] ? 3'b101 : 3'b011;
        p = '0;
        p[31:12] = ptw_req_vpn[c];
        p[6] = mt[2]; p[3] = mt[1]; p[2] = mt[0]; p[1] = 1'b1;
        ptw_resp_valid[c] <= 1'b1;
        ptw_resp_pte[c]   <= p;
      end
    end
  end

  // outstanding requests per core
  int outc [NUM_CORES];
  always @(posedge clk) if (rst_n) for (int c = 0; c < NUM_CORES; c++) if (core_resp_valid[c]) outc[c]--;

  // real-time task LLC hits (counted when the LLC takes a core-3 request)
  bit counting = 0;
  int rt_acc = 0, rt_hit = 0, bw_acc = 0, bw_hit = 0;
  always @(posedge clk) if (rst_n && counting && dut.l_req_valid && dut.l_req_ready) begin
    if (dut.l_req.core == 2'd3) begin rt_acc++; rt_hit += int'(dut.u_llc.l_hit); end
    else begin bw_acc++; bw_hit += int'(dut.u_llc.l_hit); end
  end

  task automatic send(input int c, input logic [31:0] va, input bit we);
    while (outc[c] >= MAX_OUT) @(negedge clk);
    @(negedge clk);
    core_req_valid[c] = 1; core_req_vaddr[c] = va; core_req_we[c] = we;
    core_req_wdata[c] = {16{va}};
    #1;
    while (!core_req_ready[c]) begin @(negedge clk); #1; end
    outc[c]++;
    @(posedge clk); #1;
    core_req_valid[c] = 0;
  endtask

  bit rt_done;
  int shared;

  task automatic run(input logic [2:0] mt, output real rate, output real bw_rate);
    rst_n = 0; dm_memtype = mt; counting = 0; rt_done = 0;
    rt_acc = 0; rt_hit = 0; bw_acc = 0; bw_hit = 0;
    for (int c = 0; c < NUM_CORES; c++) outc[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (cln_ready);
    // cold pass of the real-time task alone
    for (int i = 0; i < RT_LINES; i++) send(3, {4'h8, 16'h0, 12'h0} + 32'(i * 64), 0);
    wait (outc[3] == 0);
    counting = 1;
    fork
      begin
        for (int p = 0; p < PASSES; p++)
          for (int i = 0; i < RT_LINES; i++) begin
            send(3, {4'h8, 16'h0, 12'h0} + 32'(i * 64), 0);
            repeat (RT_GAP) @(negedge clk);      // computation between accesses
          end
        rt_done = 1;
      end
      for (int c = 0; c < 3; c++) begin
        automatic int cc = c;
        fork
          for (int p = 0; p < 3; p++)
            for (int i = 0; i < BW_LINES; i++) send(cc, {4'(1 + cc), 28'(i * 64)}, 1);
        join_none
      end
    join
    wait fork;
    repeat (200) @(posedge clk);
    counting = 0;
    // best-effort lines held in core 3's partition (ways 12-15)
    shared = 0;
    for (int s = 0; s < SETS; s++)
      for (int w = 12; w < 16; w++)
        if (dut.u_llc.valid_arr[s][w] && !dut.u_llc.dm_arr[s][w]) shared++;
    rate    = 100.0 * rt_hit / rt_acc;
    bw_rate = 100.0 * bw_hit / bw_acc;
  endtask

  initial begin
    real dm_rate, nop_rate, dm_bw, nop_bw;
    int  derr_dm, dm_shared;
    tlb_flush = '0; cfg_we = 0; cfg_core = 0; cfg_mask = '0; cln_req = 0; cln_core = 0;
    core_req_valid = '0; core_req_vaddr = '0; core_req_we = '0; core_req_wdata = '0;
    ptw_resp_pte = '0; dm_memtype = 3'b101;
    run(3'b101, dm_rate, dm_bw);
    $display("DM : real-time LLC hit rate %0.1f%% (%0d accesses), co-runners %0.1f%%", dm_rate, rt_acc, dm_bw);
    dm_shared = shared;
    $display("DM : best-effort lines in core 3's partition: %0d of %0d", shared, SETS * 4);
    derr_dm = derr;   // the DRAM model is not reset between the runs
    run(3'b111, nop_rate, nop_bw);
    $display("NoP: real-time LLC hit rate %0.1f%% (%0d accesses), co-runners %0.1f%%", nop_rate, rt_acc, nop_bw);
    check(dm_rate >= 99.0, "DM: real-time lines are protected");
    check(dm_rate > nop_rate, "DM beats the unpartitioned cache for the real-time task");
    check(dm_shared > 0, "co-runner lines use the unused part of core 3's partition");
    check(derr_dm == 0, "DRAM protocol (DM run)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
