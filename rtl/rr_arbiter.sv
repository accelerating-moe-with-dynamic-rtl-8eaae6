// rr_arbiter: round-robin arbiter for one crossbar output of the switch.
//
// Grants at most one of N requesters per cycle. The search starts one past
// the requester granted last, so every waiting requester is served within N
// grants. The pointer moves only when the grant is used (advance high).
// Round-robin is this design's choice; the switch is only said to have an
// arbiter.
module rr_arbiter #(
  parameter int unsigned N = 32
)(
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] grant,
  output logic [$clog2(N)-1:0] grant_idx,
  output logic         grant_valid
);
  localparam int W = $clog2(N);
  logic [W-1:0] last;

  always_comb begin
    grant       = '0;
    grant_idx   = '0;
    grant_valid = 1'b0;
    for (int k = 1; k <= N; k++) begin
      int unsigned i;
      i = (int'(last) + k) % N;
      if (!grant_valid && req[i]) begin
        grant_valid = 1'b1;
        grant_idx   = W'(i);
        grant[i]    = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= W'(N - 1);
    else if (grant_valid && advance) last <= grant_idx;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));

endmodule
