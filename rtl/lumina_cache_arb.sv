// lumina_cache_arb: shares LuminCache's single request port among the NRUs.
//
// The paper shares one LuminCache across all NRUs but does not say how their
// requests meet. This design uses a round-robin arbiter: every cycle it grants
// one of the requesting NRUs, starting the search after the NRU granted last,
// forwards its request to the cache and remembers the winner so that the
// lookup answer, which returns one cycle later, is steered back to it.
// Interface: req_valid[n]/req[n] held until gnt[n]; rsp_valid[n] is the
// cache's rsp_valid routed to the NRU whose lookup was granted the cycle
// before; rsp is broadcast.
module lumina_cache_arb
  import lumina_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req_valid,
  input  cache_req_t [N-1:0]   req,
  output logic [N-1:0]         gnt,
  output logic                 c_req_valid,
  output cache_req_t           c_req,
  input  logic                 c_rsp_valid,
  output logic [N-1:0]         rsp_valid
);

  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1;

  logic [NW-1:0] last_q, win, owner_q;
  logic          any;

  always_comb begin
    any = 1'b0;
    win = last_q;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned c;
      c = (int'(last_q) + k) % N;
      if (!any && req_valid[c]) begin
        any = 1'b1;
        win = NW'(c);
      end
    end
    gnt = '0;
    if (any) gnt[win] = 1'b1;
    c_req_valid = any;
    c_req       = req[win];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q  <= NW'(N - 1);
      owner_q <= '0;
    end else if (any) begin
      last_q  <= win;
      owner_q <= win;
    end
  end

  always_comb begin
    rsp_valid = '0;
    rsp_valid[owner_q] = c_rsp_valid;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  a_grant_requested: assert property (@(posedge clk) disable iff (!rst_n) (gnt & ~req_valid) == '0);

endmodule
