// rr_arbiter: round-robin arbiter used by the switch allocator.
//
// Each cycle it grants (one-hot, combinational) the first requester at or
// after the one following the last granted requester. The pointer moves only
// when the grant is taken (advance high), so a requester that was granted
// but not served keeps its turn. The paper names an arbiter that resolves
// contention for an egress port; the round-robin policy is this design's.
module rr_arbiter #(
  parameter int N  = 20,
  parameter int IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] grant,
  output logic [IW-1:0] grant_idx,
  output logic         grant_valid
);
  logic [IW-1:0] ptr;   // highest priority requester

  always_comb begin
    grant       = '0;
    grant_idx   = '0;
    grant_valid = 1'b0;
    for (int k = 0; k < N; k++) begin
      int i;
      i = int'(ptr) + k;
      if (i >= N) i -= N;
      if (!grant_valid && req[i]) begin
        grant_valid  = 1'b1;
        grant_idx    = IW'(i);
        grant[i]     = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (advance && grant_valid)
      ptr <= (int'(grant_idx) == N - 1) ? '0 : grant_idx + 1'b1;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
  a_grant_req: assert property (@(posedge clk) disable iff (!rst_n) (grant & ~req) == '0);
endmodule
