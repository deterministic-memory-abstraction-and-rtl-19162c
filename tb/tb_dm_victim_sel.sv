// tb_dm_victim_sel: self-checking test of the DM-aware victim selection.
//
// Directed cases reproduce the example cache of a 5-way, 2-core cache
// (core 0 owns ways 0-1, core 1 ways 2-3, way 4 shared); random cases on a
// 16-way set compare the block against a reference written here from the
// replacement rules: a DM fill takes the LRU best-effort way of the core's
// partition, else the LRU way of the partition; a BE fill takes the LRU way
// holding no DM line; invalid ways go first.
module tb_dm_victim_sel;
  localparam int W  = 16;
  localparam int WW = 4;

  logic                 dm;
  logic [W-1:0]         part, det, vld;
  logic [W-1:0][WW-1:0] age;
  logic [WW-1:0]        victim;
  logic                 ok;
  logic [W-1:0]         det_next;

  dm_victim_sel #(.WAYS(W)) dut (
    .dm(dm), .part_mask(part), .det_mask(det), .valid(vld), .age(age),
    .victim(victim), .victim_ok(ok), .det_mask_next(det_next));

  // 5-way instance for the directed example
  logic                 dm5;
  logic [4:0]           part5, det5, vld5;
  logic [4:0][2:0]      age5;
  logic [2:0]           victim5;
  logic                 ok5;
  logic [4:0]           det_next5;
  dm_victim_sel #(.WAYS(5)) dut5 (
    .dm(dm5), .part_mask(part5), .det_mask(det5), .valid(vld5), .age(age5),
    .victim(victim5), .victim_ok(ok5), .det_mask_next(det_next5));

  int checks = 0, failures = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // reference
  function automatic void ref_pick(input logic d, input logic [W-1:0] p, input logic [W-1:0] dt,
                                   input logic [W-1:0] v, input logic [W-1:0][WW-1:0] a,
                                   output int vic, output bit rok);
    logic [W-1:0] c;
    int best;
    if (d) c = ((p & ~dt) != 0) ? (p & ~dt) : p;
    else   c = ~dt;
    rok = (c != 0);
    vic = 0;
    best = -1;
    for (int w = 0; w < W; w++) if (c[w] && !v[w]) begin vic = w; return; end
    for (int w = 0; w < W; w++) if (c[w] && int'(a[w]) > best) begin best = int'(a[w]); vic = w; end
  endfunction

  initial begin
    int rv; bit rok;
    // ---- directed: the 5-way example, all lines valid
    vld5 = '1;
    age5 = {3'd0, 3'd1, 3'd2, 3'd3, 3'd4};   // way0 oldest (age 4) ... way4 newest
    // set 0: only way 2 deterministic (core 1)
    det5 = 5'b00100;
    // core 0 DM fill: partition ways 0-1 both best-effort -> LRU is way 0
    dm5 = 1; part5 = 5'b00011; #1;
    check(ok5 && victim5 == 0 && det_next5 == 5'b00101, "set0 core0 DM fill");
    // BE fill: any way but 2 -> oldest among {0,1,3,4} is way 0
    dm5 = 0; #1;
    check(ok5 && victim5 == 0 && det_next5 == 5'b00100, "set0 BE fill");
    // set 1: ways 0-3 deterministic, only way 4 best-effort
    det5 = 5'b01111;
    dm5 = 0; #1;
    check(ok5 && victim5 == 4, "set1 BE fill must take way 4");
    // core 1 DM fill with its partition full of DM lines -> LRU of ways 2,3 = way 2
    dm5 = 1; part5 = 5'b01100; #1;
    check(ok5 && victim5 == 2 && det_next5 == 5'b01111, "set1 core1 DM fill replaces DM line");
    // all ways deterministic: a BE fill may not allocate
    det5 = 5'b11111; dm5 = 0; #1;
    check(!ok5, "BE fill into all-DM set has no victim");

    // ---- random 16-way
    for (int t = 0; t < 5000; t++) begin
      int perm[W];
      for (int w = 0; w < W; w++) perm[w] = w;
      perm.shuffle();
      for (int w = 0; w < W; w++) age[w] = WW'(perm[w]);
      dm   = 1'($urandom);
      part = 16'hF << (4 * ($urandom % 4));
      det  = W'($urandom) & W'($urandom);
      vld  = (($urandom % 4) == 0) ? W'($urandom) : '1;
      if (($urandom % 8) == 0) det = '1;
      #1;
      ref_pick(dm, part, det, vld, age, rv, rok);
      check(ok == rok, $sformatf("ok t=%0d", t));
      if (rok) begin
        check(int'(victim) == rv, $sformatf("victim t=%0d dm=%0d part=%h det=%h got %0d exp %0d",
                                            t, dm, part, det, victim, rv));
        check(det_next == (dm ? (det | (W'(1) << rv)) : (det & ~(W'(1) << rv))),
              $sformatf("det_next t=%0d", t));
        // isolation: a DM fill never leaves its partition, a BE fill never takes a DM line
        if (dm) check(part[victim], "DM victim inside partition");
        else    check(!det[victim], "BE victim is best-effort");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
