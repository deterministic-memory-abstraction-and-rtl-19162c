// dm_mc_sched: two-level request scheduler of the deterministic-memory-aware
// DRAM controller.
//
// Level 1 decides between the two memory types: if any deterministic (DM)
// request is queued, a DM request is served, unless MAX_DM DM requests have
// already been served back to back while a best-effort (BE) request was
// waiting; then one BE request is served, which bounds the delay of
// best-effort memory.
// Level 2 picks the request within the type:
//  - DM: round-robin over the banks (each core's DM pages live in that
//    core's private bank, so this is round-robin over cores), starting at
//    the bank after the one served last; inside a bank, the oldest request.
//  - BE: FR-FCFS: the oldest request that hits an open row, else the oldest.
//
// The controller keeps the requests in one buffer; the bank field of each
// entry forms the per-bank queues. "Oldest" is by the arrival stamp.
//
// Interface: the request buffer (valid, dm, bank, row, stamp per entry) and
// the open row of each bank in; pick_* out (combinational). issue is pulsed
// by the controller in the cycle it takes pick_idx; the round-robin pointer
// and the consecutive-DM counter advance on it.
//
// From the paper: the type priority, round-robin for DM, FR-FCFS for BE,
// and the limit of 30. This design's choices: round-robin granularity (the
// bank), FCFS inside a bank, and the counter rule (it counts DM issues since
// the last BE issue, saturating, and forces a BE pick once it has reached
// MAX_DM while a BE request is queued).
module dm_mc_sched
  import dm_pkg::*;
#(
  parameter int unsigned N       = 128,
  parameter int unsigned NB      = NUM_BANKS,
  parameter int unsigned MAX_DM  = 30,
  parameter int unsigned STAMP_W = 32,
  parameter int unsigned IDX_W   = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned BW      = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N-1:0]                 valid,
  input  logic [N-1:0]                 dm,
  input  logic [N-1:0][BW-1:0]         bank,
  input  logic [N-1:0][ROW_W-1:0]      row,
  input  logic [N-1:0][STAMP_W-1:0]    stamp,
  input  logic [NB-1:0]                open_v,
  input  logic [NB-1:0][ROW_W-1:0]     open_row,
  input  logic                         issue,
  output logic                         pick_valid,
  output logic [IDX_W-1:0]             pick_idx,
  output logic                         pick_dm,
  output logic                         pick_row_hit,
  output logic                         pick_forced_be
);

  localparam int unsigned CW = $clog2(MAX_DM + 1);

  logic [BW-1:0] rr_bank;     // bank the DM round-robin search starts at
  logic [CW-1:0] dm_consec;   // DM issues since the last BE issue (saturating)

  // ---- DM: oldest DM entry per bank, then round-robin over banks
  logic [NB-1:0]            b_has;
  logic [NB-1:0][IDX_W-1:0] b_idx;
  logic [STAMP_W-1:0]       b_st [NB];

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      b_has[b] = 1'b0;
      b_idx[b] = '0;
      b_st[b]  = '0;
      for (int e = 0; e < N; e++) begin
        if (valid[e] && dm[e] && int'(bank[e]) == b &&
            (!b_has[b] || stamp[e] < b_st[b])) begin
          b_has[b] = 1'b1;
          b_idx[b] = IDX_W'(e);
          b_st[b]  = stamp[e];
        end
      end
    end
  end

  logic             dm_any;
  logic [IDX_W-1:0] dm_pick;
  always_comb begin
    dm_any  = 1'b0;
    dm_pick = '0;
    for (int k = 0; k < NB; k++) begin
      int unsigned b;
      b = (int'(rr_bank) + k) % NB;
      if (!dm_any && b_has[b]) begin
        dm_any  = 1'b1;
        dm_pick = b_idx[b];
      end
    end
  end

  // ---- BE: FR-FCFS
  logic               be_any, hit_any;
  logic [IDX_W-1:0]   be_old, be_hit;
  logic [STAMP_W-1:0] st_old, st_hit;
  always_comb begin
    be_any  = 1'b0;
    hit_any = 1'b0;
    be_old  = '0;
    be_hit  = '0;
    st_old  = '0;
    st_hit  = '0;
    for (int e = 0; e < N; e++) begin
      if (valid[e] && !dm[e]) begin
        if (!be_any || stamp[e] < st_old) begin
          be_any = 1'b1;
          be_old = IDX_W'(e);
          st_old = stamp[e];
        end
        if (open_v[bank[e]] && open_row[bank[e]] == row[e] &&
            (!hit_any || stamp[e] < st_hit)) begin
          hit_any = 1'b1;
          be_hit  = IDX_W'(e);
          st_hit  = stamp[e];
        end
      end
    end
  end

  // ---- level 1
  logic force_be;
  always_comb begin
    force_be       = be_any && (dm_consec >= CW'(MAX_DM));
    pick_valid     = dm_any || be_any;
    pick_dm        = dm_any && !force_be;
    pick_forced_be = dm_any && force_be;
    if (pick_dm)      pick_idx = dm_pick;
    else if (hit_any) pick_idx = be_hit;
    else              pick_idx = be_old;
    pick_row_hit   = open_v[bank[pick_idx]] && open_row[bank[pick_idx]] == row[pick_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_bank   <= '0;
      dm_consec <= '0;
    end else if (issue && pick_valid) begin
      if (pick_dm) begin
        rr_bank <= (int'(bank[pick_idx]) == NB-1) ? '0 : bank[pick_idx] + 1'b1;
        if (dm_consec != CW'(MAX_DM)) dm_consec <= dm_consec + 1'b1;
      end else begin
        dm_consec <= '0;
      end
    end
  end

  // A forced best-effort pick only happens after MAX_DM DM issues.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (issue && pick_forced_be) |-> dm_consec == CW'(MAX_DM));

endmodule
