// tb_dm_tlb: self-checking test of the DM-aware TLB.
//
// A page-table model in the testbench answers walks with small-page
// descriptors whose {TEX[0], C, B} memory type is chosen per page. The test
// checks the physical address, the DM bit (set exactly when the memory type
// equals dm_memtype), one-clock hit latency, that hits do not walk, fault
// reporting for an invalid descriptor, flush, and round-robin refill once
// more pages than entries have been touched.
module tb_dm_tlb;
  import dm_pkg::*;

  localparam int ENTRIES = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [2:0]         dm_memtype;
  logic               flush;
  logic               req_valid, req_ready, req_we;
  logic [VADDR_W-1:0] req_vaddr;
  logic [LINE_W-1:0]  req_wdata;
  logic               out_valid, out_ready, out_fault;
  llc_req_t           out_req;
  logic               ptw_req_valid, ptw_resp_valid, ptw_resp_ready;
  logic [VPN_W-1:0]   ptw_req_vpn;
  logic [31:0]        ptw_resp_pte;

  dm_tlb #(.ENTRIES(ENTRIES), .CORE_ID(2'd2)) dut (.*);

  int checks = 0, failures = 0, walks = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // page table: ppn = vpn ^ 20'h5A5A5, memory type = vpn[2:0], invalid if vpn == 20'hBAD
  function automatic logic [31:0] pte_of(input logic [VPN_W-1:0] vpn);
    logic [2:0] mt;
    logic [31:0] p;
    mt = vpn[2:0];
    p = '0;
    p[31:12] = vpn ^ 20'h5A5A5;
    p[6] = mt[2]; p[3] = mt[1]; p[2] = mt[0];
    p[1] = (vpn != 20'hBAD);
    return p;
  endfunction

  // walker model: answers 3 clocks after the request
  int wcnt = 0;
  always @(posedge clk) begin
    if (ptw_resp_valid && ptw_resp_ready) begin
      ptw_resp_valid <= 1'b0;
      wcnt <= 0;
    end else if (ptw_req_valid && !ptw_resp_valid) begin
      wcnt <= wcnt + 1;
      if (wcnt == 2) begin
        ptw_resp_valid <= 1'b1;
        ptw_resp_pte   <= pte_of(ptw_req_vpn);
        walks++;
      end
    end
  end

  // send one request and wait for its output; returns the clocks taken
  task automatic access(input logic [VADDR_W-1:0] va, input bit we, output int lat);
    @(negedge clk);
    req_valid = 1; req_vaddr = va; req_we = we; req_wdata = {16{va}};
    while (!req_ready) @(negedge clk);
    @(posedge clk); #1;
    req_valid = 0;
    lat = 1;
    while (!out_valid) begin @(posedge clk); #1; lat++; end
    // check output
    if (!out_fault) begin
      check(out_req.addr == {va[31:12] ^ 20'h5A5A5, va[11:0]}, $sformatf("paddr for %h", va));
      check(out_req.dm == (va[14:12] == dm_memtype), $sformatf("dm for %h", va));
      check(out_req.core == 2'd2 && out_req.we == we, "core/we");
      check(out_req.wdata == {16{va}}, "wdata");
    end
    check(out_fault == (va[31:12] == 20'hBAD), $sformatf("fault for %h", va));
    @(negedge clk);
  endtask

  initial begin
    int lat, w0;
    dm_memtype = 3'b101; flush = 0; req_valid = 0; req_we = 0; req_vaddr = '0; req_wdata = '0;
    out_ready = 1; ptw_resp_valid = 0; ptw_resp_pte = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // miss then hit on each memory type
    for (int mt = 0; mt < 8; mt++) begin
      w0 = walks;
      access({17'h1000 + 17'(mt), 3'(mt), 12'h040}, 0, lat);
      check(walks == w0 + 1, "miss walks once");
      w0 = walks;
      access({17'h1000 + 17'(mt), 3'(mt), 12'h080}, 1, lat);
      check(walks == w0, "hit does not walk");
      check(lat == 1, $sformatf("hit latency %0d", lat));
    end
    // that was 8 pages = ENTRIES; one more evicts the first (round-robin)
    access({17'h2000, 3'b101, 12'h0}, 0, lat);
    w0 = walks;
    access({17'h1000, 3'd0, 12'h0}, 0, lat);
    check(walks == w0 + 1, "round-robin evicted the oldest entry");
    w0 = walks;
    access({17'h1000 + 17'd7, 3'd7, 12'h0}, 0, lat);
    check(walks == w0, "newer entry still present");

    // fault
    access({20'hBAD, 12'h0}, 0, lat);
    w0 = walks;
    access({20'hBAD, 12'h0}, 0, lat);
    check(walks == w0 + 1, "faulting page not cached");

    // DM memtype change + flush
    dm_memtype = 3'b011;
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    w0 = walks;
    access({17'h1000 + 17'd3, 3'd3, 12'h0}, 0, lat);
    check(walks == w0 + 1, "flush forces a walk");

    // back-pressure: output held while out_ready is low
    out_ready = 0;
    @(negedge clk);
    req_valid = 1; req_vaddr = {17'h1000 + 17'd3, 3'd3, 12'h100}; req_we = 0;
    @(negedge clk); req_valid = 0;
    repeat (3) begin @(negedge clk); check(out_valid && !req_ready, "held under back-pressure"); end
    out_ready = 1; @(negedge clk);
    check(!out_valid, "taken after ready");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
