// dm_victim_sel: deterministic-memory-aware victim selection for one cache
// set (combinational).
//
// A deterministic (dm=1) fill from core i may only replace a way in that
// core's partition, part_mask. It first takes the least recently used
// best-effort line of the partition (part_mask & ~det_mask) and marks the
// chosen way deterministic; only if every way of the partition already holds
// a deterministic line does it replace the LRU deterministic line of the
// partition. A best-effort (dm=0) fill may replace any way that does not hold
// a deterministic line (~det_mask), whichever partition it lies in, so unused
// space in a core's partition serves all cores. This is the replacement
// algorithm of the deterministic-memory-aware shared cache.
//
// Design choices beyond that algorithm: an invalid way inside the allowed
// mask is taken before any valid way (lowest index first); "LRU" is the way
// with the largest age, age 0 being most recently used; if the allowed mask
// is empty (a best-effort fill into a set whose ways are all deterministic,
// or a core with no partition) victim_ok is 0 and the caller must not
// allocate.
//
// Ports: dm, part_mask, det_mask, valid, age in; victim (way index),
// victim_ok and det_mask_next (det_mask after the fill) out. No clock.
module dm_victim_sel #(
  parameter int unsigned WAYS  = 16,
  parameter int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic                  dm,
  input  logic [WAYS-1:0]       part_mask,
  input  logic [WAYS-1:0]       det_mask,
  input  logic [WAYS-1:0]       valid,
  input  logic [WAYS-1:0][WAY_W-1:0] age,
  output logic [WAY_W-1:0]      victim,
  output logic                  victim_ok,
  output logic [WAYS-1:0]       det_mask_next
);

  logic [WAYS-1:0] be_in_part;
  logic [WAYS-1:0] cand;

  always_comb begin
    be_in_part = part_mask & ~det_mask;
    if (dm) begin
      if (be_in_part != '0) cand = be_in_part;   // evict a best-effort line first
      else                  cand = part_mask;    // evict a deterministic line
    end else begin
      cand = ~det_mask;                          // evict a best-effort line
    end
  end

  // LRU(cand): first invalid candidate, else the candidate with the oldest age.
  logic             found_inv;
  logic [WAY_W-1:0] inv_way;
  logic             found_any;
  logic [WAY_W-1:0] old_way;
  logic [WAY_W-1:0] old_age;

  always_comb begin
    found_inv = 1'b0;
    inv_way   = '0;
    found_any = 1'b0;
    old_way   = '0;
    old_age   = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (cand[w] && !valid[w] && !found_inv) begin
        found_inv = 1'b1;
        inv_way   = WAY_W'(w);
      end
      if (cand[w] && (!found_any || age[w] > old_age)) begin
        found_any = 1'b1;
        old_way   = WAY_W'(w);
        old_age   = age[w];
      end
    end
    victim    = found_inv ? inv_way : old_way;
    victim_ok = found_any;
    det_mask_next = det_mask;
    if (found_any) begin
      if (dm) det_mask_next[victim] = 1'b1;
      else    det_mask_next[victim] = 1'b0;
    end
  end

endmodule
