// tb_dm_mc: self-checking test of the DM-aware DRAM controller with a
// behavioural DRAM model.
//
// Checks:
//  - data: every read returns the latest data written to that line (a
//    shadow memory in the testbench, updated when a write is accepted);
//  - protocol: the DRAM model reports no ACT/PRE/RD/WR timing or state error;
//  - latency: a read to a closed bank and a read that hits the open row take
//    the clock counts derived from T_RCD, T_RL and T_BURST;
//  - two-level scheduling: with 40 DM and 8 BE requests queued together,
//    exactly 30 DM requests are issued before the first BE request;
//  - open-adaptive page policy, read-after-write forwarding and write
//    merging each occur.
module tb_dm_mc;
  import dm_pkg::*;

  localparam int T_RCD = 10, T_RP = 10, T_RL = 8, T_WL = 4, T_BURST = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              req_valid, req_ready, resp_valid, resp_ready;
  mc_req_t           req;
  mc_resp_t          resp;
  dram_cmd_t         dram_cmd;
  logic [LINE_W-1:0] dram_wdata, dram_rdata;
  logic              dram_rvalid;
  logic ev_dm_issue, ev_be_issue, ev_forced_be, ev_row_hit, ev_row_conflict, ev_auto_pre, ev_fwd, ev_wr_merge;
  int   derr, n_act, n_pre, n_rd, n_wr;

  dm_mc dut (.*);

  lpddr2_model #(.T_RCD(T_RCD), .T_RP(T_RP), .T_RL(T_RL), .T_WL(T_WL), .T_BURST(T_BURST)) u_dram (
    .clk, .cmd(dram_cmd), .wdata(dram_wdata), .rvalid(dram_rvalid), .rdata(dram_rdata),
    .errors(derr), .n_act, .n_pre, .n_rd, .n_wr);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // shadow memory and outstanding reads
  logic [LINE_W-1:0] shadow [logic [25:0]];
  logic [LINE_W-1:0] expect_d [256];
  bit                outstanding [256];
  longint            t_sent [256];
  longint            cyc = 0;
  int                n_resp = 0, last_lat = 0;
  int                c_fwd = 0, c_merge = 0, c_ap = 0, c_conf = 0, c_hit = 0;
  string             issue_seq = "";

  function automatic logic [LINE_W-1:0] line_init(input logic [31:0] a);
    // same formula as the DRAM model: bank, row, column of the line
    return {16{32'({a[14:12], a[31:15], a[11:6]}) ^ 32'hC0DE_0000}};
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (rst_n && resp_valid && resp_ready) begin
      check(outstanding[resp.id], $sformatf("response id %0d expected", resp.id));
      if (resp.rdata != expect_d[resp.id]) $display("  id %0d got %h exp %h", resp.id, resp.rdata[31:0], expect_d[resp.id][31:0]);
      check(resp.rdata == expect_d[resp.id], $sformatf("read data id %0d", resp.id));
      outstanding[resp.id] = 0;
      last_lat = int'(cyc - t_sent[resp.id]);
      n_resp++;
    end
    if (ev_fwd) c_fwd++;
    if (ev_wr_merge) c_merge++;
    if (ev_auto_pre) c_ap++;
    if (ev_row_conflict) c_conf++;
    if (ev_row_hit) c_hit++;
    if (ev_dm_issue) issue_seq = {issue_seq, "D"};
    if (ev_be_issue) issue_seq = {issue_seq, "B"};
  end

  task automatic send(input bit we, input bit dm, input logic [31:0] addr, input logic [7:0] id);
    @(negedge clk);
    req_valid = 1; req.we = we; req.dm = dm; req.addr = addr; req.id = id;
    req.wdata = {16{addr ^ 32'(id) ^ 32'(cyc)}};
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    if (we) shadow[addr[31:6]] = req.wdata;
    else begin
      expect_d[id]    = shadow.exists(addr[31:6]) ? shadow[addr[31:6]] : line_init(addr);
      outstanding[id] = 1;
      t_sent[id]      = cyc + 1;
    end
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic drain();
    int guard = 0;
    forever begin
      bit any = 0;
      foreach (outstanding[i]) if (outstanding[i]) any = 1;
      if (!any || guard > 20000) break;
      @(negedge clk); guard++;
    end
    repeat (60) @(negedge clk);
  endtask

  function automatic logic [31:0] mk(input int bank, input int row, input int col);
    return {17'(row), 3'(bank), 6'(col), 6'd0};
  endfunction

  initial begin
    int first_be;
    req_valid = 0; req = '0; resp_ready = 1;
    foreach (outstanding[i]) outstanding[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- latency: read to a closed bank, then a read hitting the open row
    send(0, 0, mk(3, 5, 1), 8'd1); drain();
    check(last_lat == 2 + T_RCD + T_RL + T_BURST + 2, $sformatf("closed-bank read latency %0d", last_lat));
    send(0, 0, mk(3, 5, 2), 8'd2); drain();
    check(last_lat == 2 + T_RL + T_BURST + 2, $sformatf("row-hit read latency %0d", last_lat));

    // ---- write, forward, merge
    send(1, 0, mk(2, 7, 3), 8'd0);
    send(0, 0, mk(2, 7, 3), 8'd3);           // answered from the queued write
    send(1, 1, mk(4, 1, 1), 8'd0);
    send(1, 1, mk(4, 1, 1), 8'd0);           // merged if the first is still queued
    drain();
    send(0, 1, mk(4, 1, 1), 8'd4);  drain();  // must see the second write's data
    send(0, 0, mk(2, 7, 3), 8'd5);  drain();

    // ---- two-level scheduling: hold the controller busy, then queue 40 DM + 8 BE
    issue_seq = "";
    for (int i = 0; i < 40; i++) send(0, 1, mk(i % 4, 100 + i, i % 64), 8'(10 + i));
    for (int i = 0; i < 8; i++)  send(0, 0, mk(4 + (i % 4), 200 + i, i), 8'(60 + i));
    drain();
    first_be = -1;
    for (int i = 0; i < issue_seq.len(); i++) if (issue_seq[i] == "B") begin first_be = i; break; end
    $display("issue order: %s", issue_seq);
    // the first DM request is issued before the rest arrive; 30 consecutive DM
    // issues are allowed once a BE request waits
    check(first_be >= 30 && first_be <= 31, $sformatf("DM issued before the first BE: %0d", first_be));

    // ---- random traffic
    for (int i = 0; i < 600; i++) begin
      int b, r;
      logic [7:0] id;
      b = $urandom % 8; r = $urandom % 3;
      id = 8'(70 + (i % 150));
      while (outstanding[id]) @(negedge clk);
      send(1'($urandom % 3 == 0), 1'(b < 4), mk(b, r, $urandom % 4), id);
    end
    drain();

    check(derr == 0, $sformatf("DRAM protocol errors: %0d", derr));
    check(c_fwd > 0, "read-after-write forwarding happened");
    check(c_merge > 0, "write merging happened");
    check(c_ap > 0, "open-adaptive auto-precharge happened");
    check(c_conf > 0, "row conflict happened");
    check(c_hit > 0, "row hit happened");
    $display("resp=%0d fwd=%0d merge=%0d autopre=%0d conflicts=%0d hits=%0d act=%0d rd=%0d wr=%0d",
             n_resp, c_fwd, c_merge, c_ap, c_conf, c_hit, n_act, n_rd, n_wr);
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
