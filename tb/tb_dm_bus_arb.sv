// tb_dm_bus_arb: self-checking test of the shared request bus.
//
// Four masters raise requests at random; the slave side accepts at random.
// The test checks that every request is delivered once and unchanged
// (including its DM bit), that grants rotate round-robin among the masters
// that are waiting, that a request is never dropped while out_ready is low,
// and that responses are steered to the core named in them.
module tb_dm_bus_arb;
  import dm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     [3:0] in_valid, in_ready, core_resp_valid;
  llc_req_t [3:0] in_req;
  logic           out_valid, out_ready, resp_valid;
  llc_req_t       out_req;
  llc_resp_t      resp;

  dm_bus_arb #(.N(4)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  int sent[4], got[4];
  int last_grant = 3;

  // masters: each sends requests numbered by addr = {core, seq}
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 4; c++) begin
      if (in_valid[c] && in_ready[c]) begin
        sent[c]++;
        in_valid[c] <= 1'b0;
      end else if (!in_valid[c] && ($urandom % 3 == 0) && sent[c] < 200) begin
        in_valid[c]      <= 1'b1;
        in_req[c].core   <= 2'(c);
        in_req[c].addr   <= {8'(c), 24'(sent[c])};
        in_req[c].dm     <= 1'(sent[c] % 2);
        in_req[c].we     <= 1'(c % 2);
        in_req[c].wdata  <= {16{32'(c * 1000 + sent[c])}};
      end
    end
    out_ready <= ($urandom % 4 != 0);
  end

  // slave: check order and round-robin fairness
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int c;
    c = int'(out_req.core);
    check(out_req.addr == {8'(c), 24'(got[c])}, $sformatf("in-order delivery core %0d", c));
    check(out_req.dm == 1'(got[c] % 2), "DM bit carried");
    check(out_req.wdata == {16{32'(c * 1000 + got[c])}}, "data carried");
    // no waiting master between last_grant and c was skipped
    for (int k = 1; k < 4; k++) begin
      int m;
      m = (last_grant + k) % 4;
      if (m == c) break;
      check(!in_valid[m], $sformatf("round-robin skipped core %0d", m));
    end
    got[c]++;
    last_grant = c;
  end

  initial begin
    in_valid = '0; in_req = '0; out_ready = 0; resp_valid = 0; resp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // response steering
    for (int c = 0; c < 4; c++) begin
      @(negedge clk); resp_valid = 1; resp.core = 2'(c); #1;
      check(core_resp_valid == 4'(1 << c), "response steering");
    end
    @(negedge clk); resp_valid = 0; #1;
    check(core_resp_valid == 0, "no response");
    wait (got[0] == 200 && got[1] == 200 && got[2] == 200 && got[3] == 200);
    for (int c = 0; c < 4; c++) check(sent[c] == got[c], "all delivered");
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
