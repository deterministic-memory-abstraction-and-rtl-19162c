// dm_mc: deterministic-memory-aware DRAM controller.
//
// Requests from the last-level cache (line reads and line write-backs, each
// with its DM bit) are held in a request buffer of RD_BUF read and WR_BUF
// write entries. Entries are grouped into per-bank queues by the bank bits
// of their address. The OS places deterministic pages in per-core private
// banks and best-effort pages in shared banks; the controller itself only
// looks at the DM bit of each request. dm_mc_sched picks the next request
// (deterministic first, round-robin; best-effort FR-FCFS; at most MAX_DM
// deterministic requests in a row while best-effort ones wait).
//
// Command generation: the picked request is turned into DRAM commands on
// dram_cmd: PRE (if another row is open in the bank), ACT (if no row is
// open), then RD or WR. Row buffers follow an open-adaptive policy: the
// column command carries auto-precharge when other requests to the same
// bank are queued and none of them hits the open row; otherwise the row is
// left open. Read data from the DRAM (dram_rvalid/dram_rdata) is returned on
// resp_* with the request's id.
//
// Hazards: a read that finds a queued write to the same line is answered at
// once from the write's data; a write to a line that already has a queued
// write replaces that write's data; a write to a line with a queued read
// waits until the read has been issued. While the response queue is full
// only writes are scheduled, so write-backs keep draining even when the LLC
// must first free write-buffer room before it can take read data.
//
// Timing (clocks of the DRAM clock, defaults for LPDDR2-1066 at 533 MHz, a
// 64-byte line being two BL8 bursts on a x32 device): T_RCD, T_RP, T_RL,
// T_WL, T_BURST. This controller serves one request at a time: command
// generation does not overlap requests to different banks, and refresh,
// tRAS, tWR and tFAW are not modelled.
//
// From the paper: the buffer sizes (64/64), the two-level scheduling, the
// limit of 30, the open-adaptive page policy and the eight banks. This
// design's choices: the address mapping (dm_pkg), the DRAM timings, the
// hazard rules, the command bus and the serial command generation.
module dm_mc
  import dm_pkg::*;
#(
  parameter int unsigned RD_BUF  = 64,
  parameter int unsigned WR_BUF  = 64,
  parameter int unsigned MAX_DM  = 30,
  parameter int unsigned T_RCD   = 10,
  parameter int unsigned T_RP    = 10,
  parameter int unsigned T_RL    = 8,
  parameter int unsigned T_WL    = 4,
  parameter int unsigned T_BURST = 8,
  parameter int unsigned RESPQ   = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  mc_req_t            req,
  output logic               resp_valid,
  input  logic               resp_ready,
  output mc_resp_t           resp,
  // DRAM side
  output dram_cmd_t          dram_cmd,
  output logic [LINE_W-1:0]  dram_wdata,
  input  logic               dram_rvalid,
  input  logic [LINE_W-1:0]  dram_rdata,
  // event strobes
  output logic               ev_dm_issue,
  output logic               ev_be_issue,
  output logic               ev_forced_be,
  output logic               ev_row_hit,
  output logic               ev_row_conflict,
  output logic               ev_auto_pre,
  output logic               ev_fwd,
  output logic               ev_wr_merge
);

  localparam int unsigned N       = RD_BUF + WR_BUF;
  localparam int unsigned IDX_W   = $clog2(N);
  localparam int unsigned STAMP_W = 32;
  localparam int unsigned LA_W    = PADDR_W - OFF_W;
  localparam int unsigned TW      = 8;
  localparam int unsigned RQ_W    = $clog2(RESPQ + 1);

  // ------------------------------------------------------------ request buffer
  logic [N-1:0]               q_v;
  logic [N-1:0]               q_we;
  logic [N-1:0]               q_dm;
  logic [N-1:0][BANK_W-1:0]   q_bank;
  logic [N-1:0][ROW_W-1:0]    q_row;
  logic [N-1:0][STAMP_W-1:0]  q_st;
  logic [LA_W-1:0]            q_line [N];
  logic [MC_ID_W-1:0]         q_id   [N];
  logic [LINE_W-1:0]          q_data [N];
  logic [$clog2(RD_BUF+1)-1:0] rd_cnt;
  logic [$clog2(WR_BUF+1)-1:0] wr_cnt;
  logic [STAMP_W-1:0]         stamp_ctr;

  logic [NUM_BANKS-1:0]              open_v;
  logic [NUM_BANKS-1:0][ROW_W-1:0]   open_row;

  // ------------------------------------------------------------ response queue
  mc_resp_t        rq [RESPQ];
  logic [RQ_W-1:0] rq_cnt;
  logic            rq_push;
  mc_resp_t        rq_in;
  logic            rq_pop;

  assign resp_valid = (rq_cnt != '0);
  assign resp       = rq[0];
  assign rq_pop     = resp_valid && resp_ready;

  // ------------------------------------------------------------ incoming request checks
  logic            in_wr_match;   // queued write to the same line
  logic [IDX_W-1:0] in_wr_idx;
  logic            in_rd_match;   // queued read to the same line
  logic            in_free;
  logic [IDX_W-1:0] in_free_idx;

  always_comb begin
    in_wr_match = 1'b0;
    in_wr_idx   = '0;
    in_rd_match = 1'b0;
    in_free     = 1'b0;
    in_free_idx = '0;
    for (int e = 0; e < N; e++) begin
      if (q_v[e] && q_line[e] == req.addr[PADDR_W-1:OFF_W]) begin
        if (q_we[e]) begin
          in_wr_match = 1'b1;
          in_wr_idx   = IDX_W'(e);
        end else begin
          in_rd_match = 1'b1;
        end
      end
      if (!q_v[e] && !in_free) begin
        in_free     = 1'b1;
        in_free_idx = IDX_W'(e);
      end
    end
  end

  // ------------------------------------------------------------ scheduler
  logic rq_room_issue, rq_room_fwd;
  logic             s_valid, s_dm, s_hit, s_forced;
  logic [IDX_W-1:0] s_idx;
  logic             s_issue;
  logic [N-1:0]     s_elig;

  // while the response queue is full, only writes may be scheduled, so that
  // write-backs keep draining (the LLC may need write-buffer room before it
  // can take the pending read data)
  always_comb
    for (int e = 0; e < N; e++) s_elig[e] = q_v[e] && (q_we[e] || rq_room_issue);

  dm_mc_sched #(.N(N), .NB(NUM_BANKS), .MAX_DM(MAX_DM), .STAMP_W(STAMP_W)) u_sched (
    .clk, .rst_n,
    .valid    (s_elig),
    .dm       (q_dm),
    .bank     (q_bank),
    .row      (q_row),
    .stamp    (q_st),
    .open_v   (open_v),
    .open_row (open_row),
    .issue    (s_issue),
    .pick_valid(s_valid),
    .pick_idx (s_idx),
    .pick_dm  (s_dm),
    .pick_row_hit(s_hit),
    .pick_forced_be(s_forced)
  );

  // ------------------------------------------------------------ command FSM
  typedef enum logic [2:0] {C_IDLE, C_PRE, C_ACT, C_COL, C_WAIT} cstate_e;
  cstate_e          cst;
  logic [TW-1:0]    tmr;
  logic             c_we;
  logic [BANK_W-1:0] c_bank;
  logic [ROW_W-1:0] c_row;
  logic [COL_W-1:0] c_col;
  logic [MC_ID_W-1:0] c_id;
  logic [LINE_W-1:0] c_data;
  logic             c_rd_pending;   // read data still to come

  // response-queue room: one slot for the read in service, one for a forward
  assign rq_room_issue = (rq_cnt < RQ_W'(RESPQ - 1));
  assign rq_room_fwd   = (rq_cnt < RQ_W'(RESPQ - 1)) && !dram_rvalid;

  assign s_issue = (cst == C_IDLE) && s_valid;

  // open-adaptive decision for the column command, on the queue as it is then
  logic same_bank_pending, same_row_pending;
  always_comb begin
    same_bank_pending = 1'b0;
    same_row_pending  = 1'b0;
    for (int e = 0; e < N; e++) begin
      if (q_v[e] && q_bank[e] == c_bank) begin
        same_bank_pending = 1'b1;
        if (q_row[e] == c_row) same_row_pending = 1'b1;
      end
    end
  end

  // admission
  logic req_fire, fwd_fire, merge_fire, alloc_fire;
  always_comb begin
    if (req.we) begin
      if (in_wr_match)      req_ready = !(s_issue && s_idx == in_wr_idx); // merge
      else if (in_rd_match) req_ready = 1'b0;                        // wait for the read
      else                  req_ready = (32'(wr_cnt) < WR_BUF) && in_free;
    end else begin
      if (in_wr_match)      req_ready = rq_room_fwd;                 // forward
      else                  req_ready = (32'(rd_cnt) < RD_BUF) && in_free;
    end
  end
  assign req_fire   = req_valid && req_ready;
  assign fwd_fire   = req_fire && !req.we && in_wr_match;
  assign merge_fire = req_fire &&  req.we && in_wr_match;
  assign alloc_fire = req_fire && !in_wr_match;

  always_comb begin
    rq_push = 1'b0;
    rq_in   = '0;
    if (dram_rvalid && c_rd_pending) begin
      rq_push     = 1'b1;
      rq_in.id    = c_id;
      rq_in.rdata = dram_rdata;
    end else if (fwd_fire) begin
      rq_push     = 1'b1;
      rq_in.id    = req.id;
      rq_in.rdata = q_data[in_wr_idx];
    end
  end

  // DRAM command outputs
  always_comb begin
    dram_cmd      = '0;
    dram_cmd.cmd  = DCMD_NOP;
    dram_cmd.bank = c_bank;
    dram_cmd.row  = c_row;
    dram_cmd.col  = c_col;
    dram_wdata    = c_data;
    if (tmr == '0) begin
      unique case (cst)
        C_PRE: dram_cmd.cmd = DCMD_PRE;
        C_ACT: dram_cmd.cmd = DCMD_ACT;
        C_COL: begin
          dram_cmd.cmd = c_we ? DCMD_WR : DCMD_RD;
          dram_cmd.ap  = same_bank_pending && !same_row_pending;
        end
        default: ;
      endcase
    end
  end

  assign ev_dm_issue     = s_issue && s_dm;
  assign ev_be_issue     = s_issue && !s_dm;
  assign ev_forced_be    = s_issue && s_forced;
  assign ev_row_hit      = s_issue && s_hit;
  assign ev_row_conflict = s_issue && !s_hit && open_v[q_bank[s_idx]];
  assign ev_auto_pre     = (dram_cmd.cmd == DCMD_RD || dram_cmd.cmd == DCMD_WR) && dram_cmd.ap;
  assign ev_fwd          = fwd_fire;
  assign ev_wr_merge     = merge_fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_v          <= '0;
      rd_cnt       <= '0;
      wr_cnt       <= '0;
      stamp_ctr    <= '0;
      open_v       <= '0;
      open_row     <= '0;
      cst          <= C_IDLE;
      tmr          <= '0;
      c_we         <= 1'b0;
      c_bank       <= '0;
      c_row        <= '0;
      c_col        <= '0;
      c_id         <= '0;
      c_rd_pending <= 1'b0;
    end else begin
      // ---- admission
      if (alloc_fire) begin
        q_v[in_free_idx]    <= 1'b1;
        q_we[in_free_idx]   <= req.we;
        q_dm[in_free_idx]   <= req.dm;
        q_bank[in_free_idx] <= addr_bank(req.addr);
        q_row[in_free_idx]  <= addr_row(req.addr);
        q_st[in_free_idx]   <= stamp_ctr;
        stamp_ctr           <= stamp_ctr + 1'b1;
      end

      // ---- command FSM
      if (tmr != '0) tmr <= tmr - 1'b1;
      unique case (cst)
        C_IDLE: begin
          if (s_issue) begin
            q_v[s_idx] <= 1'b0;
            c_we   <= q_we[s_idx];
            c_bank <= q_bank[s_idx];
            c_row  <= q_row[s_idx];
            c_col  <= q_line[s_idx][COL_W-1:0];
            c_id   <= q_id[s_idx];
            tmr    <= '0;
            if (s_hit)                    cst <= C_COL;
            else if (open_v[q_bank[s_idx]]) cst <= C_PRE;
            else                          cst <= C_ACT;
          end
        end
        C_PRE: if (tmr == '0) begin
          open_v[c_bank] <= 1'b0;
          tmr <= TW'(T_RP - 1);
          cst <= C_ACT;
        end
        C_ACT: if (tmr == '0) begin
          open_v[c_bank]   <= 1'b1;
          open_row[c_bank] <= c_row;
          tmr <= TW'(T_RCD - 1);
          cst <= C_COL;
        end
        C_COL: if (tmr == '0) begin
          if (dram_cmd.ap) open_v[c_bank] <= 1'b0;
          c_rd_pending <= !c_we;
          tmr <= TW'((c_we ? T_WL : T_RL) + T_BURST - 1 + (dram_cmd.ap ? T_RP : 0));
          cst <= C_WAIT;
        end
        C_WAIT: begin
          if (dram_rvalid) c_rd_pending <= 1'b0;
          if (tmr == '0 && !c_rd_pending) cst <= C_IDLE;
        end
        default: cst <= C_IDLE;
      endcase

      // ---- counters (issue and admission may happen in the same clock)
      rd_cnt <= rd_cnt + $bits(rd_cnt)'(alloc_fire && !req.we)
                       - $bits(rd_cnt)'(s_issue && !q_we[s_idx]);
      wr_cnt <= wr_cnt + $bits(wr_cnt)'(alloc_fire &&  req.we)
                       - $bits(wr_cnt)'(s_issue &&  q_we[s_idx]);
    end
  end

  // entry payload (no reset: qualified by q_v)
  always_ff @(posedge clk) begin
    if (alloc_fire) begin
      q_line[in_free_idx] <= req.addr[PADDR_W-1:OFF_W];
      q_id[in_free_idx]   <= req.id;
      q_data[in_free_idx] <= req.wdata;
    end else if (merge_fire) begin
      q_data[in_wr_idx]   <= req.wdata;
    end
    if (s_issue) c_data <= q_data[s_idx];
  end

  // response queue
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rq_cnt <= '0;
    end else begin
      if (rq_pop) for (int k = 0; k < RESPQ-1; k++) rq[k] <= rq[k+1];
      if (rq_push) rq[rq_pop ? int'(rq_cnt) - 1 : int'(rq_cnt)] <= rq_in;
      rq_cnt <= rq_cnt + RQ_W'(rq_push) - RQ_W'(rq_pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) rq_cnt <= RQ_W'(RESPQ));
  assert property (@(posedge clk) disable iff (!rst_n) !(dram_rvalid && !c_rd_pending));

endmodule
