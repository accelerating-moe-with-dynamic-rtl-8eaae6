// dy_notify_net: carries token-readiness notifications from the trackers of
// the destination GPUs to the OR Tables of the source GPUs.
//
// NGPU inputs, each naming a destination GPU and a token ID; NGPU outputs.
// Every output has a round-robin arbiter over the inputs that address it, so
// up to NGPU notifications move per cycle when their destinations differ.
// Combinational from input to output; an input is accepted in the cycle its
// output takes it. How notifications travel is not specified by the
// published design; this separate small crossbar is this design's choice.
module dy_notify_net
  import dysharp_pkg::*;
#(
  parameter int unsigned NGPU = 32
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NGPU-1:0]   in_valid,
  output logic [NGPU-1:0]   in_ready,
  input  logic [SRC_W-1:0]  in_dst [NGPU],
  input  logic [31:0]       in_tid [NGPU],
  output logic [NGPU-1:0]   out_valid,
  input  logic [NGPU-1:0]   out_ready,
  output logic [31:0]       out_tid [NGPU]
);
  localparam int PW = $clog2(NGPU);

  logic [NGPU-1:0] req   [NGPU];   // [dst][src]
  logic [NGPU-1:0] grant [NGPU];
  logic [NGPU-1:0] taken [NGPU];   // [src][dst]
  logic [PW-1:0]   idx   [NGPU];

  for (genvar d = 0; d < NGPU; d++) begin : g_d
    for (genvar s = 0; s < NGPU; s++) begin : g_s
      assign req[d][s]   = in_valid[s] && (int'(in_dst[s]) == d);
      assign taken[s][d] = grant[d][s] && out_ready[d];
    end
    rr_arbiter #(.N(NGPU)) u_arb (
      .clk, .rst_n, .req(req[d]), .advance(out_ready[d]),
      .grant(grant[d]), .grant_idx(idx[d]), .grant_valid(out_valid[d]));
    assign out_tid[d] = in_tid[idx[d]];
  end

  for (genvar s = 0; s < NGPU; s++) begin : g_in
    assign in_ready[s] = |taken[s];
  end

  for (genvar s = 0; s < NGPU; s++) begin : g_chk
    a_dst_range: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid[s] |-> (int'(in_dst[s]) < NGPU));
  end

endmodule
