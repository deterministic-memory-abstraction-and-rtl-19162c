// lpddr2_model: behavioural model of a single-rank, 8-bank DRAM device as
// seen on the controller's command bus (not synthesizable: it stores data in
// an associative array).
//
// Commands: ACT opens a row, PRE closes it, RD/WR transfer one 64-byte line
// at the given column, optionally with auto-precharge. Read data appears on
// rvalid/rdata T_RL + T_BURST clocks after the RD command. A line never
// written reads as init_line(address). The model counts protocol errors:
// ACT to an open bank or before T_RP after a precharge, RD/WR to a closed
// bank or another row, or before T_RCD after the ACT.
module lpddr2_model
  import dm_pkg::*;
#(
  parameter int unsigned T_RCD   = 10,
  parameter int unsigned T_RP    = 10,
  parameter int unsigned T_RL    = 8,
  parameter int unsigned T_WL    = 4,
  parameter int unsigned T_BURST = 8
) (
  input  logic              clk,
  input  dram_cmd_t         cmd,
  input  logic [LINE_W-1:0] wdata,
  output logic              rvalid,
  output logic [LINE_W-1:0] rdata,
  output int                errors,
  output int                n_act,
  output int                n_pre,
  output int                n_rd,
  output int                n_wr
);

  logic [LINE_W-1:0] mem [logic [BANK_W+ROW_W+COL_W-1:0]];

  bit              open_b  [NUM_BANKS];
  logic [ROW_W-1:0] row_b  [NUM_BANKS];
  longint          t_act   [NUM_BANKS];
  longint          t_ready [NUM_BANKS];   // earliest ACT
  longint          now = 0;

  // read return pipeline
  longint          rd_due [$];
  logic [LINE_W-1:0] rd_dat [$];

  function automatic logic [LINE_W-1:0] init_line(input logic [BANK_W+ROW_W+COL_W-1:0] a);
    return {16{32'(a) ^ 32'hC0DE_0000}};
  endfunction

  initial begin
    errors = 0; n_act = 0; n_pre = 0; n_rd = 0; n_wr = 0;
    rvalid = 0; rdata = '0;
    for (int b = 0; b < NUM_BANKS; b++) begin
      open_b[b] = 0; row_b[b] = '0; t_act[b] = 0; t_ready[b] = 0;
    end
  end

  always @(posedge clk) begin
    logic [BANK_W+ROW_W+COL_W-1:0] a;
    int b;
    now++;
    b = int'(cmd.bank);
    a = {cmd.bank, cmd.row, cmd.col};
    rvalid <= 1'b0;
    if (rd_due.size() > 0 && rd_due[0] == now) begin
      rvalid <= 1'b1;
      rdata  <= rd_dat[0];
      void'(rd_due.pop_front());
      void'(rd_dat.pop_front());
    end
    unique case (cmd.cmd)
      DCMD_ACT: begin
        n_act++;
        if (open_b[b] || now < t_ready[b]) begin
          errors++; $display("DRAM: bad ACT bank %0d at %0d", b, now);
        end
        open_b[b] = 1; row_b[b] = cmd.row; t_act[b] = now;
      end
      DCMD_PRE: begin
        n_pre++;
        open_b[b] = 0; t_ready[b] = now + T_RP;
      end
      DCMD_RD, DCMD_WR: begin
        if (!open_b[b] || row_b[b] != cmd.row || now < t_act[b] + T_RCD) begin
          errors++; $display("DRAM: bad column command bank %0d at %0d", b, now);
        end
        if (cmd.cmd == DCMD_RD) begin
          n_rd++;
          rd_due.push_back(now + T_RL + T_BURST);
          rd_dat.push_back(mem.exists(a) ? mem[a] : init_line(a));
          if (cmd.ap) t_ready[b] = now + T_RL + T_BURST + T_RP;
        end else begin
          n_wr++;
          mem[a] = wdata;
          if (cmd.ap) t_ready[b] = now + T_WL + T_BURST + T_RP;
        end
        if (cmd.ap) open_b[b] = 0;
      end
      default: ;
    endcase
  end
endmodule
