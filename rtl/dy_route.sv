// dy_route: target-aware Route stage of the switch.
//
// A dymultimem request carries one multimem address and a list of target
// expert IDs. For every target i the output port is Target_i / EXPERTS_PER_GPU
// (experts are laid out GPU by GPU). The request is replicated once per
// distinct output port and each replica is trimmed to the targets of that
// port, in their original order, with #Target rewritten. A request whose
// targets all live on one GPU therefore leaves as a single packet.
//
// How: the set of destination ports is decoded from the target list; a
// priority encoder picks the lowest port not yet served, and the targets of
// that port are compacted with a prefix count (target i goes to slot
// "number of earlier targets of the same port"). One replica is offered per
// cycle on a single output with its port number; the crossbar of the switch
// steers it.
//
// Interface: one valid/ready request in; one valid/ready replica out with
// out_port. The input is accepted (in_ready) in the cycle its last replica is
// taken. Combinational from input to output; a request with k destination
// ports leaves in k cycles without back-pressure.
//
// The output-port formula and per-port trimming follow the published Route
// stage; generating replicas one per cycle (rather than all at once) is this
// design's choice, made to keep the per-port logic small.
module dy_route
  import dysharp_pkg::*;
#(
  parameter int unsigned NPORTS          = 32,
  parameter int unsigned EXPERTS_PER_GPU = 8
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  req_pkt_t          in_pkt,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [SRC_W-1:0]  out_port,
  output req_pkt_t          out_pkt
);
  localparam int PCW = $clog2(MAX_TARGETS + 1);

  logic [NPORTS-1:0]      need;   // ports that receive a replica
  logic [NPORTS-1:0]      sent;   // replicas already taken
  logic [NPORTS-1:0]      pend, cur_oh;
  logic [MAX_TARGETS-1:0] match;
  logic [PCW-1:0]         pos [MAX_TARGETS];
  logic [SRC_W-1:0]       cur;
  tgt_t [MAX_TARGETS-1:0] lst;

  always_comb begin
    need = '0;
    for (int i = 0; i < MAX_TARGETS; i++)
      if (i < int'(in_pkt.hdr.ntarget))
        need[int'(in_pkt.tgts[i]) / EXPERTS_PER_GPU % NPORTS] = 1'b1;
    pend   = need & ~sent;
    cur    = '0;
    cur_oh = '0;
    for (int p = NPORTS - 1; p >= 0; p--)
      if (pend[p]) begin cur = SRC_W'(p); cur_oh = '0; cur_oh[p] = 1'b1; end
    // targets of the current port and their compacted slots
    for (int i = 0; i < MAX_TARGETS; i++)
      match[i] = (i < int'(in_pkt.hdr.ntarget)) &&
                 (int'(in_pkt.tgts[i]) / EXPERTS_PER_GPU == int'(cur));
    pos[0] = '0;
    for (int i = 1; i < MAX_TARGETS; i++) pos[i] = pos[i-1] + PCW'(match[i-1]);
    for (int j = 0; j < MAX_TARGETS; j++) begin
      lst[j] = '0;
      for (int i = j; i < MAX_TARGETS; i++)
        if (match[i] && int'(pos[i]) == j) lst[j] = lst[j] | in_pkt.tgts[i];
    end
    out_pkt             = in_pkt;
    out_pkt.tgts        = lst;
    out_pkt.hdr.ntarget = NTGT_W'($countones(match));
  end

  assign out_port  = cur;
  assign out_valid = in_valid && (pend != '0);
  assign in_ready  = out_valid && out_ready && ((pend & ~cur_oh) == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sent <= '0;
    else if (in_valid && in_ready) sent <= '0;
    else if (out_valid && out_ready) sent <= sent | cur_oh;
  end

  // Every target must name an expert behind one of the ports.
  a_target_range: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (need != '0));

endmodule
