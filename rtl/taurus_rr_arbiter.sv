// taurus_rr_arbiter -- round-robin (RR) selector in front of the
// postprocessing MATs.
//
// N paths (in the Taurus pipeline: 0 = MapReduce results, 1 = bypass) request
// the single PHV slot into the postprocessing MATs. When `en` is high, one
// requester is granted per cycle; the search starts just after the last
// granted index, so a path that keeps requesting is served at least every N
// grants. grant is one-hot and combinational; the pointer moves on a grant.
//
// Follows the published design: a round-robin selector arbitrates which path
// connects to the postprocessing MAT. This design's own choices: the grant
// rule on ties and the pointer reset to "last granted = N-1" (so index 0 wins
// the first tie).
//
// Lint note: the loop index is 32 bits wide and only its low bits select a
// request; the upper bits are unused by construction.
module taurus_rr_arbiter #(
  parameter int unsigned N = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [N-1:0] req,
  output logic [N-1:0] grant
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last;

  always_comb begin
    int unsigned idx;
    idx   = 0;
    grant = '0;
    if (en) begin
      for (int unsigned k = 1; k <= N; k++) begin
        idx = (32'(last) + k) % N;
        if (req[idx] && grant == '0) grant[idx] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= IW'(N - 1);
    else begin
      for (int unsigned i = 0; i < N; i++)
        if (grant[i]) last <= IW'(i);
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
  a_grant_req: assert property (@(posedge clk) disable iff (!rst_n) (grant & ~req) == '0);

endmodule
