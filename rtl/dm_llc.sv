// dm_llc: shared last-level cache with deterministic-memory-aware
// replacement, way partitioning and a DM cleanup sweep.
//
// Every line holds, next to its tag, a DM bit saying whether it was brought
// in (or last touched) by a deterministic-memory access. Each core has a way
// partition (part_mask, programmable). Victims are chosen by dm_victim_sel:
// a deterministic fill stays inside the requesting core's partition and
// prefers a best-effort line there, and a best-effort fill may use any way
// of any partition that does not hold a deterministic line. A core's
// deterministic lines therefore can never be evicted by another core, while
// the unused part of its partition still serves everyone's best-effort data.
//
// Cleanup: a pulse on cln_req (issued by the OS at a context switch) sweeps
// every set, one set per clock, and clears the DM bit of every line in core
// cln_core's partition, turning them into best-effort lines. The number of
// lines cleared is reported on cln_count with cln_done. A deterministic
// access that later hits such a line in its own partition marks it
// deterministic again without refetching it.
//
// Organisation (defaults from the evaluated system): 2 MiB, 16 ways, 64-byte
// lines, so 2048 sets; true LRU kept as per-way ages; 56 MSHRs; hit latency
// 12 clocks. Requests are full lines: a read returns the line, a write (an
// L1 write-back) writes the whole line and is acknowledged. The cache is
// write-back and write-allocate; dirty victims go to memory with the
// victim's own DM bit, fills carry the requester's DM bit.
//
// Pipeline: a request is looked up in the cycle it is accepted.
//  - hit: the response leaves resp_* exactly HIT_LAT clocks later;
//  - read miss: an MSHR is allocated and a read is queued to memory; the
//    victim is chosen when the line returns (mem_resp), the line installed
//    and the response sent HIT_LAT clocks after that;
//  - write miss: the line is allocated at once (no fetch is needed for a
//    full-line write) and acknowledged HIT_LAT clocks later;
//  - a request to a line that already has an MSHR waits (req_ready low).
// If no way may be used (a best-effort fill into a set whose ways are all
// deterministic) the line is not allocated: read data is passed through,
// write data is written straight to memory.
// After reset the arrays are cleared by a sweep of SETS clocks with
// req_ready low. resp_* has no back-pressure.
//
// Choices of this design where the paper gives none: line size, the MSHR
// behaviour for a second miss to the same line (stall), the request/response
// handshake, the reset partition (core c owns ways [c*WAYS/4 +: WAYS/4], as
// in the evaluated "1/4 of the ways per core" setup) and a DM hit outside
// the core's own partition leaving the line best-effort.
module dm_llc
  import dm_pkg::*;
#(
  parameter int unsigned SETS    = 2048,
  parameter int unsigned WAYS    = 16,
  parameter int unsigned MSHRS   = 56,
  parameter int unsigned HIT_LAT = 12,
  parameter int unsigned OUTQ    = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration: way partition of each core
  input  logic                 cfg_we,
  input  logic [CORE_W-1:0]    cfg_core,
  input  logic [WAYS-1:0]      cfg_mask,
  // DM cleanup
  input  logic                 cln_req,
  input  logic [CORE_W-1:0]    cln_core,
  output logic                 cln_ready,
  output logic                 cln_done,
  output logic [$clog2(SETS*WAYS+1)-1:0] cln_count,
  // requests from the bus
  input  logic                 req_valid,
  output logic                 req_ready,
  input  llc_req_t             req,
  output logic                 resp_valid,
  output llc_resp_t            resp,
  // memory side
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output mc_req_t              mem_req,
  input  logic                 mem_resp_valid,
  output logic                 mem_resp_ready,
  input  mc_resp_t             mem_resp,
  // event strobes (for statistics)
  output logic                 ev_hit,
  output logic                 ev_miss,
  output logic                 ev_dm_evict_be,   // DM fill took a best-effort line of its partition
  output logic                 ev_dm_evict_dm,   // DM fill had to replace a DM line
  output logic                 ev_be_fill,       // best-effort fill allocated
  output logic                 ev_no_alloc,      // fill could not allocate
  output logic                 ev_mshr_stall     // request held by an MSHR conflict or lack of MSHRs
);

  localparam int unsigned IDX_W  = $clog2(SETS);
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W  = PADDR_W - OFF_W - IDX_W;
  localparam int unsigned LA_W   = PADDR_W - OFF_W;      // line address
  localparam int unsigned MI_W   = (MSHRS > 1) ? $clog2(MSHRS) : 1;
  localparam int unsigned CNT_W  = $clog2(SETS*WAYS+1);
  localparam int unsigned OQ_W   = $clog2(OUTQ+1);

  typedef enum logic [1:0] {S_INIT, S_RUN, S_CLEAN} state_e;
  state_e state;

  // ---------------------------------------------------------------- arrays
  logic [WAYS-1:0][TAG_W-1:0] tag_arr   [SETS];
  logic [WAYS-1:0]            valid_arr [SETS];
  logic [WAYS-1:0]            dirty_arr [SETS];
  logic [WAYS-1:0]            dm_arr    [SETS];
  logic [WAYS-1:0][WAY_W-1:0] age_arr   [SETS];
  logic [LINE_W-1:0]          data_arr  [SETS*WAYS];

  logic [WAYS-1:0] part_mask [NUM_CORES];

  // ---------------------------------------------------------------- MSHRs
  logic [MSHRS-1:0]  mshr_v;
  logic [LA_W-1:0]   mshr_line [MSHRS];
  logic [CORE_W-1:0] mshr_core [MSHRS];
  logic              mshr_dm   [MSHRS];

  // ---------------------------------------------------------------- out queue
  mc_req_t         oq [OUTQ];
  logic [OQ_W-1:0] oq_cnt;
  logic            oq_push;
  mc_req_t         oq_in;
  logic            oq_pop;

  assign mem_req_valid = (oq_cnt != '0);
  assign mem_req       = oq[0];
  assign oq_pop        = mem_req_valid && mem_req_ready;

  // ---------------------------------------------------------------- response pipe
  logic      pipe_v [HIT_LAT];
  llc_resp_t pipe_d [HIT_LAT];
  logic      pipe_push;
  llc_resp_t pipe_in;

  assign resp_valid = pipe_v[HIT_LAT-1];
  assign resp       = pipe_d[HIT_LAT-1];

  // ---------------------------------------------------------------- helpers
  function automatic logic [WAYS-1:0][WAY_W-1:0] lru_touch(
      input logic [WAYS-1:0][WAY_W-1:0] a, input logic [WAY_W-1:0] w);
    logic [WAYS-1:0][WAY_W-1:0] r;
    r = a;
    for (int k = 0; k < WAYS; k++)
      if (a[k] < a[w]) r[k] = a[k] + 1'b1;
    r[w] = '0;
    return r;
  endfunction

  function automatic logic [CNT_W-1:0] popcnt(input logic [WAYS-1:0] m);
    logic [CNT_W-1:0] c;
    c = '0;
    for (int k = 0; k < WAYS; k++) c += CNT_W'(m[k]);
    return c;
  endfunction

  // ---------------------------------------------------------------- lookup (request side)
  logic [IDX_W-1:0] l_idx;
  logic [TAG_W-1:0] l_tag;
  logic             l_hit;
  logic [WAY_W-1:0] l_way;
  logic             l_mshr_match;
  logic             l_mshr_free;
  logic [MI_W-1:0]  l_mshr_idx;

  assign l_idx = req.addr[OFF_W +: IDX_W];
  assign l_tag = req.addr[PADDR_W-1 -: TAG_W];

  always_comb begin
    l_hit = 1'b0;
    l_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (valid_arr[l_idx][w] && tag_arr[l_idx][w] == l_tag) begin
        l_hit = 1'b1;
        l_way = WAY_W'(w);
      end
    l_mshr_match = 1'b0;
    l_mshr_free  = 1'b0;
    l_mshr_idx   = '0;
    for (int m = 0; m < MSHRS; m++) begin
      if (mshr_v[m] && mshr_line[m] == req.addr[PADDR_W-1:OFF_W]) l_mshr_match = 1'b1;
      if (!mshr_v[m] && !l_mshr_free) begin
        l_mshr_free = 1'b1;
        l_mshr_idx  = MI_W'(m);
      end
    end
  end

  // victim selection for a write miss allocated at lookup
  logic [WAY_W-1:0] l_vic;
  logic             l_vic_ok;
  logic [WAYS-1:0]  l_det_next;

  dm_victim_sel #(.WAYS(WAYS), .WAY_W(WAY_W)) u_vsel_l (
    .dm           (req.dm),
    .part_mask    (part_mask[req.core]),
    .det_mask     (dm_arr[l_idx]),
    .valid        (valid_arr[l_idx]),
    .age          (age_arr[l_idx]),
    .victim       (l_vic),
    .victim_ok    (l_vic_ok),
    .det_mask_next(l_det_next)
  );

  // ---------------------------------------------------------------- install (memory response side)
  logic [LA_W-1:0]  i_line;
  logic [IDX_W-1:0] i_idx;
  logic [MI_W-1:0]  i_id;
  logic [WAY_W-1:0] i_vic;
  logic             i_vic_ok;
  logic [WAYS-1:0]  i_det_next;
  logic             i_wb;      // install needs a write-back slot

  assign i_id   = mem_resp.id[MI_W-1:0];
  assign i_line = mshr_line[i_id];
  assign i_idx  = i_line[IDX_W-1:0];

  dm_victim_sel #(.WAYS(WAYS), .WAY_W(WAY_W)) u_vsel_i (
    .dm           (mshr_dm[i_id]),
    .part_mask    (part_mask[mshr_core[i_id]]),
    .det_mask     (dm_arr[i_idx]),
    .valid        (valid_arr[i_idx]),
    .age          (age_arr[i_idx]),
    .victim       (i_vic),
    .victim_ok    (i_vic_ok),
    .det_mask_next(i_det_next)
  );

  assign i_wb = i_vic_ok && valid_arr[i_idx][i_vic] && dirty_arr[i_idx][i_vic];

  logic oq_space;
  assign oq_space = (oq_cnt < OQ_W'(OUTQ)) || oq_pop;

  logic install_fire;
  assign install_fire   = (state == S_RUN) && mem_resp_valid && (!i_wb || oq_space);
  assign mem_resp_ready = install_fire;

  // request acceptance
  logic l_can;
  always_comb begin
    if (l_hit)             l_can = 1'b1;
    else if (l_mshr_match) l_can = 1'b0;
    else if (req.we)       l_can = oq_space;
    else                   l_can = l_mshr_free && oq_space;
  end
  assign req_ready = (state == S_RUN) && !install_fire && l_can;

  logic req_fire;
  assign req_fire = req_valid && req_ready;

  assign cln_ready = (state == S_RUN);

  // ---------------------------------------------------------------- sequential
  logic [IDX_W-1:0]  sweep;
  logic [CORE_W-1:0] c_core;

  always_comb begin
    oq_push   = 1'b0;
    oq_in     = '0;
    pipe_push = 1'b0;
    pipe_in   = '0;
    if (install_fire) begin
      pipe_push     = 1'b1;
      pipe_in.core  = mshr_core[i_id];
      pipe_in.we    = 1'b0;
      pipe_in.addr  = {i_line, {OFF_W{1'b0}}};
      pipe_in.rdata = mem_resp.rdata;
      if (i_wb) begin
        oq_push     = 1'b1;
        oq_in.we    = 1'b1;
        oq_in.dm    = dm_arr[i_idx][i_vic];
        oq_in.addr  = {tag_arr[i_idx][i_vic], i_idx, {OFF_W{1'b0}}};
        oq_in.wdata = data_arr[{i_idx, i_vic}];
      end
    end else if (req_fire) begin
      pipe_push     = 1'b1;
      pipe_in.core  = req.core;
      pipe_in.we    = req.we;
      pipe_in.addr  = req.addr;
      pipe_in.rdata = l_hit ? data_arr[{l_idx, l_way}] : '0;
      if (!l_hit && !req.we) begin
        pipe_push   = 1'b0;                 // answered when the fill returns
        oq_push     = 1'b1;
        oq_in.id    = MC_ID_W'(l_mshr_idx);
        oq_in.we    = 1'b0;
        oq_in.dm    = req.dm;
        oq_in.addr  = {req.addr[PADDR_W-1:OFF_W], {OFF_W{1'b0}}};
      end else if (!l_hit && req.we) begin
        if (!l_vic_ok) begin                // no way may be used: write through
          oq_push     = 1'b1;
          oq_in.we    = 1'b1;
          oq_in.dm    = req.dm;
          oq_in.addr  = req.addr;
          oq_in.wdata = req.wdata;
        end else if (valid_arr[l_idx][l_vic] && dirty_arr[l_idx][l_vic]) begin
          oq_push     = 1'b1;
          oq_in.we    = 1'b1;
          oq_in.dm    = dm_arr[l_idx][l_vic];
          oq_in.addr  = {tag_arr[l_idx][l_vic], l_idx, {OFF_W{1'b0}}};
          oq_in.wdata = data_arr[{l_idx, l_vic}];
        end
      end
    end
  end

  // event strobes
  always_comb begin
    ev_hit         = req_fire && l_hit;
    ev_miss        = req_fire && !l_hit;
    ev_dm_evict_be = 1'b0;
    ev_dm_evict_dm = 1'b0;
    ev_be_fill     = 1'b0;
    ev_no_alloc    = 1'b0;
    ev_mshr_stall  = (state == S_RUN) && req_valid && !install_fire && !l_can;
    if (install_fire) begin
      if (!i_vic_ok)                                ev_no_alloc = 1'b1;
      else if (!mshr_dm[i_id])                      ev_be_fill  = 1'b1;
      else if (dm_arr[i_idx][i_vic] && valid_arr[i_idx][i_vic]) ev_dm_evict_dm = 1'b1;
      else                                          ev_dm_evict_be = 1'b1;
    end else if (req_fire && !l_hit && req.we) begin
      if (!l_vic_ok)                                ev_no_alloc = 1'b1;
      else if (!req.dm)                             ev_be_fill  = 1'b1;
      else if (dm_arr[l_idx][l_vic] && valid_arr[l_idx][l_vic]) ev_dm_evict_dm = 1'b1;
      else                                          ev_dm_evict_be = 1'b1;
    end
  end

  // control state and MSHRs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_INIT;
      sweep     <= '0;
      c_core    <= '0;
      cln_done  <= 1'b0;
      cln_count <= '0;
      mshr_v    <= '0;
      for (int c = 0; c < NUM_CORES; c++)
        part_mask[c] <= WAYS'(((1 << (WAYS/NUM_CORES)) - 1) << (c*(WAYS/NUM_CORES)));
    end else begin
      cln_done <= 1'b0;
      if (cfg_we) part_mask[cfg_core] <= cfg_mask;

      unique case (state)
        S_INIT: begin
          sweep <= sweep + 1'b1;
          if (sweep == IDX_W'(SETS-1)) state <= S_RUN;
        end

        S_CLEAN: begin
          cln_count <= cln_count + popcnt(dm_arr[sweep] & valid_arr[sweep] & part_mask[c_core]);
          sweep     <= sweep + 1'b1;
          if (sweep == IDX_W'(SETS-1)) begin
            state    <= S_RUN;
            cln_done <= 1'b1;
          end
        end

        default: begin // S_RUN
          if (cln_req) begin
            state     <= S_CLEAN;
            sweep     <= '0;
            c_core    <= cln_core;
            cln_count <= '0;
          end
          if (install_fire) begin
            mshr_v[i_id] <= 1'b0;
          end else if (req_fire && !l_hit && !req.we) begin
            mshr_v[l_mshr_idx] <= 1'b1;
          end
        end
      endcase
    end
  end

  // MSHR contents (no reset: qualified by mshr_v)
  always_ff @(posedge clk) begin
    if (state == S_RUN && !install_fire && req_fire && !l_hit && !req.we) begin
      mshr_line[l_mshr_idx] <= req.addr[PADDR_W-1:OFF_W];
      mshr_core[l_mshr_idx] <= req.core;
      mshr_dm[l_mshr_idx]   <= req.dm;
    end
  end

  // tag/state arrays (no reset: cleared by the S_INIT sweep)
  always_ff @(posedge clk) begin
    unique case (state)
      S_INIT: begin
        valid_arr[sweep] <= '0;
        dirty_arr[sweep] <= '0;
        dm_arr[sweep]    <= '0;
        for (int w = 0; w < WAYS; w++) age_arr[sweep][w] <= WAY_W'(w);
      end
      S_CLEAN: begin
        dm_arr[sweep] <= dm_arr[sweep] & ~part_mask[c_core];
      end
      default: begin
        if (install_fire) begin
          if (i_vic_ok) begin
            tag_arr[i_idx][i_vic]   <= i_line[LA_W-1 -: TAG_W];
            valid_arr[i_idx][i_vic] <= 1'b1;
            dirty_arr[i_idx][i_vic] <= 1'b0;
            dm_arr[i_idx]           <= i_det_next;
            age_arr[i_idx]          <= lru_touch(age_arr[i_idx], i_vic);
          end
        end else if (req_fire) begin
          if (l_hit) begin
            age_arr[l_idx] <= lru_touch(age_arr[l_idx], l_way);
            if (req.dm && part_mask[req.core][l_way]) dm_arr[l_idx][l_way] <= 1'b1;
            if (req.we) dirty_arr[l_idx][l_way] <= 1'b1;
          end else if (req.we && l_vic_ok) begin
            tag_arr[l_idx][l_vic]   <= l_tag;
            valid_arr[l_idx][l_vic] <= 1'b1;
            dirty_arr[l_idx][l_vic] <= 1'b1;
            dm_arr[l_idx]           <= l_det_next;
            age_arr[l_idx]          <= lru_touch(age_arr[l_idx], l_vic);
          end
        end
      end
    endcase
  end

  // data array: one line written per clock at most
  logic              d_we;
  logic [IDX_W+WAY_W-1:0] d_addr;
  logic [LINE_W-1:0] d_wdata;
  always_comb begin
    d_we    = 1'b0;
    d_addr  = {l_idx, l_way};
    d_wdata = req.wdata;
    if (state == S_RUN) begin
      if (install_fire) begin
        d_we    = i_vic_ok;
        d_addr  = {i_idx, i_vic};
        d_wdata = mem_resp.rdata;
      end else if (req_fire && req.we && (l_hit || l_vic_ok)) begin
        d_we    = 1'b1;
        d_addr  = l_hit ? {l_idx, l_way} : {l_idx, l_vic};
      end
    end
  end

  always_ff @(posedge clk) begin
    if (d_we) data_arr[d_addr] <= d_wdata;
  end

  // out queue
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      oq_cnt <= '0;
    end else begin
      if (oq_pop) begin
        for (int k = 0; k < OUTQ-1; k++) oq[k] <= oq[k+1];
      end
      if (oq_push) oq[oq_pop ? int'(oq_cnt) - 1 : int'(oq_cnt)] <= oq_in;
      oq_cnt <= oq_cnt + OQ_W'(oq_push) - OQ_W'(oq_pop);
    end
  end

  // response pipe
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < HIT_LAT; k++) pipe_v[k] <= 1'b0;
    end else begin
      pipe_v[0] <= pipe_push;
      pipe_d[0] <= pipe_in;
      for (int k = 1; k < HIT_LAT; k++) begin
        pipe_v[k] <= pipe_v[k-1];
        pipe_d[k] <= pipe_d[k-1];
      end
    end
  end

  // A request is never accepted while a fill is installed in the same cycle.
  assert property (@(posedge clk) disable iff (!rst_n) !(install_fire && req_fire));
  // The out queue never overflows.
  assert property (@(posedge clk) disable iff (!rst_n) oq_cnt <= OQ_W'(OUTQ));

endmodule
