// dm_bus_arb: shared request bus from the per-core TLBs to the last-level
// cache.
//
// Each core presents one translated request (llc_req_t, which includes the
// deterministic-memory bit, much like a priority/QoS field of an on-chip bus
// transaction). The bus grants one request per cycle in round-robin order,
// starting after the core granted last, and forwards it unchanged, so the DM
// bit reaches the cache with every transaction. Responses from the cache
// carry the core number and are steered back to that core.
//
// The arbitration policy (round-robin, one grant per cycle, combinational
// grant with no added latency) is this design's own choice: the paper only
// requires that the bus carry the DM bit.
//
// Handshake: valid/ready on every port; a request moves when both are high.
module dm_bus_arb
  import dm_pkg::*;
#(
  parameter int unsigned N = NUM_CORES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic     [N-1:0]     in_valid,
  output logic     [N-1:0]     in_ready,
  input  llc_req_t [N-1:0]     in_req,
  output logic                 out_valid,
  input  logic                 out_ready,
  output llc_req_t             out_req,
  // responses
  input  logic                 resp_valid,
  input  llc_resp_t            resp,
  output logic     [N-1:0]     core_resp_valid
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last;   // core granted last
  logic [IW-1:0] grant;
  logic          any;

  always_comb begin
    any   = 1'b0;
    grant = '0;
    for (int k = 1; k <= N; k++) begin
      int unsigned c;
      c = (int'(last) + k) % N;
      if (!any && in_valid[c]) begin
        any   = 1'b1;
        grant = IW'(c);
      end
    end
  end

  assign out_valid = any;
  assign out_req   = in_req[grant];

  always_comb begin
    in_ready = '0;
    if (any) in_ready[grant] = out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      last <= IW'(N-1);
    else if (any && out_ready)       last <= grant;
  end

  always_comb begin
    core_resp_valid = '0;
    if (resp_valid) core_resp_valid[resp.core] = 1'b1;
  end

endmodule
