// tb_dm_mc_sched: self-checking test of the two-level DRAM scheduler.
//
// The testbench keeps a request buffer of its own, issues the scheduler's
// pick every clock, removes it and refills the buffer at random. Each pick
// is compared with a reference computed here: DM before BE unless 30 DM
// requests have been served in a row while a BE request waited; DM by
// round-robin over banks (oldest within the bank); BE by FR-FCFS.
// A directed phase keeps DM requests always present next to one waiting BE
// request and checks that exactly 30 DM requests pass before the BE one.
module tb_dm_mc_sched;
  import dm_pkg::*;

  localparam int N  = 32;
  localparam int NB = 8;
  localparam int MAXDM = 30;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0]              valid, dm;
  logic [N-1:0][2:0]         bank;
  logic [N-1:0][ROW_W-1:0]   row;
  logic [N-1:0][31:0]        stamp;
  logic [NB-1:0]             open_v;
  logic [NB-1:0][ROW_W-1:0]  open_row;
  logic                      issue;
  logic                      pick_valid, pick_dm, pick_row_hit, pick_forced_be;
  logic [4:0]                pick_idx;

  dm_mc_sched #(.N(N), .NB(NB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  int unsigned next_stamp = 0;
  int ref_rr = 0, ref_consec = 0;
  int n_forced = 0, n_dm = 0, n_be = 0, n_hit = 0;

  function automatic int ref_pick(output bit is_dm);
    int best; int unsigned bs;
    bit dm_any, be_any;
    dm_any = 0; be_any = 0;
    for (int e = 0; e < N; e++) if (valid[e]) begin
      if (dm[e]) dm_any = 1; else be_any = 1;
    end
    is_dm = dm_any && !(be_any && ref_consec >= MAXDM);
    best = -1; bs = 0;
    if (is_dm) begin
      for (int k = 0; k < NB; k++) begin
        int b;
        b = (ref_rr + k) % NB;
        for (int e = 0; e < N; e++)
          if (valid[e] && dm[e] && bank[e] == 3'(b) && (best < 0 || stamp[e] < bs)) begin
            best = e; bs = stamp[e];
          end
        if (best >= 0) return best;
      end
      return -1;
    end
    for (int e = 0; e < N; e++)
      if (valid[e] && !dm[e] && open_v[bank[e]] && open_row[bank[e]] == row[e] &&
          (best < 0 || stamp[e] < bs)) begin best = e; bs = stamp[e]; end
    if (best >= 0) return best;
    for (int e = 0; e < N; e++)
      if (valid[e] && !dm[e] && (best < 0 || stamp[e] < bs)) begin best = e; bs = stamp[e]; end
    return best;
  endfunction

  task automatic add(input int e, input bit d, input int b, input int r);
    valid[e] = 1; dm[e] = d; bank[e] = 3'(b); row[e] = ROW_W'(r);
    stamp[e] = next_stamp; next_stamp++;
  endtask

  // one scheduling step: compare, issue, remove
  task automatic step();
    int exp; bit edm;
    #1;
    exp = ref_pick(edm);
    check(pick_valid == (exp >= 0), "pick_valid");
    if (exp >= 0) begin
      check(int'(pick_idx) == exp && pick_dm == edm,
            $sformatf("pick got %0d/%0d exp %0d/%0d", pick_idx, pick_dm, exp, edm));
      if (pick_forced_be) n_forced++;
      if (pick_dm) n_dm++; else n_be++;
      if (pick_row_hit) n_hit++;
      if (edm) begin ref_rr = (int'(bank[exp]) + 1) % NB; ref_consec = (ref_consec < MAXDM) ? ref_consec + 1 : MAXDM; end
      else ref_consec = 0;
      issue = 1;
      @(posedge clk); #1;
      issue = 0;
      valid[exp] = 0;
      // the issued row is now open in its bank
      open_v[bank[exp]] = 1; open_row[bank[exp]] = row[exp];
    end else begin
      @(posedge clk); #1;
    end
  endtask

  initial begin
    int dm_before;
    valid = '0; dm = '0; bank = '0; row = '0; stamp = '0; open_v = '0; open_row = '0; issue = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- directed: starvation limit. Slots 0..7 are DM slots (bank = slot), slot 31 is one BE request.
    add(31, 0, 5, 77);
    for (int e = 0; e < 8; e++) add(e, 1, e, 1);
    dm_before = 0;
    for (int t = 0; t < 40; t++) begin
      int exp; bit edm;
      #1; exp = ref_pick(edm);
      if (!valid[31]) break;
      if (pick_dm) dm_before++;
      step();
      for (int e = 0; e < 8; e++) if (!valid[e]) add(e, 1, e, 1);
    end
    check(dm_before == MAXDM, $sformatf("DM requests served before the waiting BE one: %0d", dm_before));
    check(n_forced == 1, "one forced BE pick");
    valid = '0;

    // ---- directed: round-robin over banks 1, 4, 6 with two requests each

    begin
      int order[$];
      add(0, 1, 6, 1); add(1, 1, 4, 1); add(2, 1, 1, 1);
      add(3, 1, 6, 2); add(4, 1, 4, 2); add(5, 1, 1, 2);
      // the round-robin pointer continues from the last directed phase
      for (int t = 0; t < 6; t++) begin #1; order.push_back(int'(bank[pick_idx])); step(); end
      for (int t = 0; t + 1 < 6; t++) check(order[t] != order[t+1], "consecutive DM picks rotate banks");
    end

    // ---- directed: FR-FCFS, older row miss loses to younger row hit
    open_v = '0;
    open_v[2] = 1; open_row[2] = 9;
    add(0, 0, 2, 3);   // older, row miss
    add(1, 0, 2, 9);   // younger, row hit
    #1; check(pick_idx == 1 && pick_row_hit, "FR-FCFS: row hit first");
    step(); step();

    // ---- random
    for (int t = 0; t < 4000; t++) begin
      for (int e = 0; e < N; e++)
        if (!valid[e] && ($urandom % 6 == 0)) add(e, 1'($urandom % 3 == 0), int'($urandom % NB), int'($urandom % 4));
      step();
    end
    check(n_dm > 100 && n_be > 100 && n_hit > 50, "random mix covered DM, BE and row hits");
    $display("dm=%0d be=%0d forced=%0d hits=%0d", n_dm, n_be, n_forced, n_hit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
