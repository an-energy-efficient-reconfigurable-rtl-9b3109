// rr_arbiter: round-robin arbiter of the channel packaging stage.
//
// grant is one-hot among the asserted req bits (zero when none). The search
// starts at the requester after the one granted last, so every requester that
// keeps its request up is served within N grants. The priority pointer moves
// only when advance is high (the granted request was actually taken), which
// keeps the grant stable while the consumer stalls. The rotating-priority
// scheme is this design's choice; the published design states only that the
// arbiter is round-robin.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] grant
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] prio;      // highest-priority requester this cycle
  logic [IW-1:0] gidx;

  always_comb begin
    grant = '0;
    gidx  = prio;
    for (int unsigned k = 0; k < N; k++) begin
      logic [IW-1:0] idx;
      idx = IW'((int'(prio) + int'(k)) % int'(N));
      if (req[idx] && grant == '0) begin
        grant[idx] = 1'b1;
        gidx       = IW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    prio <= '0;
    else if (advance && |req)      prio <= (gidx == IW'(N-1)) ? '0 : gidx + IW'(1);
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
  a_grant_req: assert property (@(posedge clk) disable iff (!rst_n) (grant & ~req) == '0);
endmodule
