// tb_dm_llc: self-checking test of the DM-aware shared last-level cache.
//
// A small cache (16 sets, 16 ways, 4 MSHRs) is driven by one request at a
// time (plus a directed pair for the MSHR conflict). A memory model behind
// it answers reads after MEM_DELAY clocks and applies writes at once, in
// arrival order. A golden copy of every line's latest data is kept here.
//
// Checks:
//  - data: every read returns the latest data written to that line;
//  - hit latency: a hit answers exactly HIT_LAT = 12 clocks after it is
//    accepted (the paper's L2 hit latency);
//  - isolation: core 0's deterministic lines in a set survive a flood of
//    best-effort and deterministic fills from the other cores;
//  - best-effort lines may use every way that holds no deterministic line;
//  - cleanup: cln_count equals the number of deterministic lines in the
//    partition, after which those lines can be evicted by others;
//  - no allocation: a best-effort fill into a set that is all deterministic
//    is passed through without allocating;
//  - a second miss to a line with an MSHR waits (ev_mshr_stall);
//  - random traffic with data checking.
module tb_dm_llc;
  import dm_pkg::*;

  localparam int SETS = 16, WAYS = 16, MSHRS = 4, HIT_LAT = 12, MEM_DELAY = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              cfg_we;
  logic [CORE_W-1:0] cfg_core;
  logic [WAYS-1:0]   cfg_mask;
  logic              cln_req, cln_ready, cln_done;
  logic [CORE_W-1:0] cln_core;
  logic [$clog2(SETS*WAYS+1)-1:0] cln_count;
  logic              req_valid, req_ready, resp_valid;
  llc_req_t          req;
  llc_resp_t         resp;
  logic              mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  mc_req_t           mem_req;
  mc_resp_t          mem_resp;
  logic ev_hit, ev_miss, ev_dm_evict_be, ev_dm_evict_dm, ev_be_fill, ev_no_alloc, ev_mshr_stall;

  dm_llc #(.SETS(SETS), .WAYS(WAYS), .MSHRS(MSHRS), .HIT_LAT(HIT_LAT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ---------------------------------------------------------------- memory model
  logic [LINE_W-1:0] mem [logic [25:0]];
  logic [LINE_W-1:0] golden [logic [25:0]];
  longint cyc = 0;
  mc_resp_t rsp_q [$];
  longint   rsp_t [$];
  int n_mem_rd = 0, n_mem_wr = 0;

  function automatic logic [LINE_W-1:0] init_line(input logic [25:0] la);
    return {16{32'(la) ^ 32'h1234_0000}};
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (rst_n && mem_req_valid && mem_req_ready) begin
      logic [25:0] la;
      la = mem_req.addr[31:6];
      if (mem_req.we) begin
        mem[la] = mem_req.wdata;
        n_mem_wr++;
      end else begin
        mc_resp_t r;
        r.id = mem_req.id;
        r.rdata = mem.exists(la) ? mem[la] : init_line(la);
        rsp_q.push_back(r);
        rsp_t.push_back(cyc + MEM_DELAY);
        n_mem_rd++;
      end
    end
    if (mem_resp_valid && mem_resp_ready) begin
      void'(rsp_q.pop_front());
      void'(rsp_t.pop_front());
    end
    // drive the head of the response queue for the next clock
    mem_resp_valid <= (rsp_q.size() > 0) && (rsp_t[0] <= cyc + 1);
    mem_resp       <= (rsp_q.size() > 0) ? rsp_q[0] : '0;
  end

  // ---------------------------------------------------------------- event counters
  int c_hit = 0, c_miss = 0, c_ebe = 0, c_edm = 0, c_befill = 0, c_noalloc = 0, c_stall = 0;
  always @(posedge clk) if (rst_n) begin
    c_hit += int'(ev_hit); c_miss += int'(ev_miss); c_ebe += int'(ev_dm_evict_be);
    c_edm += int'(ev_dm_evict_dm); c_befill += int'(ev_be_fill);
    c_noalloc += int'(ev_no_alloc); c_stall += int'(ev_mshr_stall);
  end

  // ---------------------------------------------------------------- response capture
  llc_resp_t got_q [$];
  longint    got_t [$];
  always @(posedge clk) if (rst_n && resp_valid) begin
    got_q.push_back(resp);
    got_t.push_back(cyc);
  end

  function automatic logic [31:0] la2a(input int tag, input int set);
    return {22'(tag), 4'(set), 6'd0};
  endfunction

  // one request, waits for its response; returns latency and whether it hit
  task automatic access(input int core, input bit we, input bit dm, input logic [31:0] addr,
                        output int lat, output bit hit);
    longint t0;
    logic [25:0] la;
    la = addr[31:6];
    @(negedge clk);
    req_valid = 1; req.core = 2'(core); req.we = we; req.dm = dm; req.addr = addr;
    req.wdata = {16{$urandom}};
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    hit = ev_hit;
    @(posedge clk); t0 = cyc;
    if (we) golden[la] = req.wdata;
    #1 req_valid = 0;
    while (got_q.size() == 0) @(posedge clk);
    #1;
    lat = int'(got_t[0] - t0);
    check(got_q[0].core == 2'(core) && got_q[0].we == we && got_q[0].addr[31:6] == la,
          $sformatf("response fields for %h", addr));
    if (!we) check(got_q[0].rdata == (golden.exists(la) ? golden[la] : init_line(la)),
                   $sformatf("read data %h", addr));
    void'(got_q.pop_front()); void'(got_t.pop_front());
  endtask

  int lat; bit hit;

  initial begin
    int n0, nhit;
    cfg_we = 0; cfg_core = 0; cfg_mask = 0; cln_req = 0; cln_core = 0;
    req_valid = 0; req = '0; mem_req_ready = 1; mem_resp_valid = 0; mem_resp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (cln_ready);
    repeat (2) @(posedge clk);

    // ---- miss then hit; hit latency
    access(0, 0, 0, la2a(1, 3), lat, hit);
    check(!hit, "first access misses");
    check(lat == 1 + MEM_DELAY + HIT_LAT, $sformatf("miss latency %0d", lat));
    access(0, 0, 0, la2a(1, 3), lat, hit);
    check(hit && lat == HIT_LAT, $sformatf("hit latency %0d", lat));
    access(1, 1, 0, la2a(1, 3), lat, hit);
    check(hit && lat == HIT_LAT, $sformatf("write hit latency %0d", lat));
    access(2, 0, 0, la2a(1, 3), lat, hit);

    // ---- isolation: core 0 puts 4 DM lines in set 5 (its partition has 4 ways)
    for (int t = 0; t < 4; t++) access(0, 0, 1, la2a(100 + t, 5), lat, hit);
    // other cores flood set 5 with 40 BE lines and 20 DM lines
    for (int t = 0; t < 40; t++) access(1 + t % 3, t % 2, 0, la2a(200 + t, 5), lat, hit);
    for (int t = 0; t < 20; t++) access(1 + t % 3, 0, 1, la2a(300 + t, 5), lat, hit);
    nhit = 0;
    for (int t = 0; t < 4; t++) begin access(0, 0, 1, la2a(100 + t, 5), lat, hit); nhit += int'(hit); end
    check(nhit == 4, $sformatf("core 0 DM lines survived: %0d of 4", nhit));

    // ---- best-effort lines use every non-DM way: set 7, 16 BE lines all fit
    for (int t = 0; t < 16; t++) access(t % 4, 0, 0, la2a(400 + t, 7), lat, hit);
    nhit = 0;
    for (int t = 0; t < 16; t++) begin access((t + 1) % 4, 0, 0, la2a(400 + t, 7), lat, hit); nhit += int'(hit); end
    check(nhit == 16, $sformatf("16 BE lines share all 16 ways: %0d hits", nhit));

    // ---- no allocation: set 9 all DM (4 per core), then a BE read and write
    for (int c = 0; c < 4; c++) for (int t = 0; t < 4; t++) access(c, t % 2, 1, la2a(500 + c * 8 + t, 9), lat, hit);
    n0 = c_noalloc;
    access(1, 0, 0, la2a(600, 9), lat, hit);
    access(1, 0, 0, la2a(600, 9), lat, hit);
    check(!hit, "BE line was not allocated in an all-DM set");
    access(2, 1, 0, la2a(601, 9), lat, hit);
    access(3, 0, 0, la2a(601, 9), lat, hit);   // data written through to memory
    check(c_noalloc - n0 >= 3, "no-allocate fills counted");

    // ---- cleanup of core 2's partition: 4 DM lines in set 9 plus core 0's none
    // set 5 holds core 1..3 DM lines too; count what the cache holds for core 2
    begin
      int exp;
      exp = 0;
      for (int s = 0; s < SETS; s++)
        for (int w = 8; w < 12; w++)
          if (dut.valid_arr[s][w] && dut.dm_arr[s][w]) exp++;
      @(negedge clk); cln_core = 2; cln_req = 1; @(negedge clk); cln_req = 0;
      n0 = int'(cyc);
      wait (cln_done); @(negedge clk);
      check(int'(cln_count) == exp && exp >= 4, $sformatf("cleanup count %0d exp %0d", cln_count, exp));
      check(int'(cyc) - n0 == SETS, $sformatf("cleanup takes one clock per set: %0d", int'(cyc) - n0));
    end
    // now a BE fill in set 9 may replace one of core 2's former DM lines
    n0 = c_befill;
    access(1, 0, 0, la2a(602, 9), lat, hit);
    check(c_befill == n0 + 1, "BE fill allocated after cleanup");
    nhit = 0;
    for (int t = 0; t < 4; t++) begin access(0, 0, 1, la2a(500 + t, 9), lat, hit); nhit += int'(hit); end
    check(nhit == 4, "core 0 DM lines untouched by core 2 cleanup");

    // ---- MSHR conflict: two reads of the same missing line back to back
    n0 = c_stall;
    // directed stall: hold a request to a line whose MSHR is busy
    @(negedge clk);
    req_valid = 1; req.core = 0; req.we = 0; req.dm = 0; req.addr = la2a(710, 12);
    #1; while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    req.core = 1;                                   // same line, other core
    // held until the fill is installed, then accepted as a hit
    #1; while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 req_valid = 0;
    check(c_stall > n0 + 3, "second miss to the same line stalls on the MSHR");
    repeat (2) begin
      while (got_q.size() == 0) @(posedge clk);
      #1; void'(got_q.pop_front()); void'(got_t.pop_front());
    end

    // ---- random traffic on 6 sets, 40 tags, random DM, with partition change
    @(negedge clk); cfg_we = 1; cfg_core = 3; cfg_mask = 16'hF000; @(negedge clk); cfg_we = 0;
    for (int i = 0; i < 1500; i++)
      access($urandom % 4, 1'($urandom % 3 == 0), 1'($urandom % 3 == 0),
             la2a(800 + $urandom % 40, $urandom % 6), lat, hit);

    check(c_hit > 0 && c_miss > 0, "hits and misses");
    check(c_ebe > 0, "DM fill replaced a BE line of its partition");
    check(c_edm > 0, "DM fill replaced a DM line of its partition");
    check(n_mem_wr > 0, "dirty write-backs");
    $display("hit=%0d miss=%0d dm_evict_be=%0d dm_evict_dm=%0d be_fill=%0d no_alloc=%0d stall=%0d memrd=%0d memwr=%0d",
             c_hit, c_miss, c_ebe, c_edm, c_befill, c_noalloc, c_stall, n_mem_rd, n_mem_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
