// dy_switch: one switch plane with target-aware forwarding and reduction.
//
// Each of the NPORTS ports faces one GPU. Requests arrive as flits, are
// reassembled (dy_flit_rx), wait in an ingress queue and go through Route,
// which replicates a dymultimem request, one replica per cycle, to every port
// that hosts one of its
// target experts (port = target / EXPERTS_PER_GPU) and trims each replica's
// target list. Before a dymultimem.ld_reduce is routed, the Reduction Logic of
// the requesting port records how many partial responses to expect. A
// crossbar with a round-robin arbiter per output moves replicas into the
// egress queue, and dy_flit_tx sends them to the destination GPU. Partial
// responses coming back from destination GPUs are steered, again through a
// round-robin arbiter, to the Reduction Logic of the port named in the
// response; the reduced result leaves on that port.
//
// Route, replication, trimming and the counting reduction follow the
// published design. Queue depths, the per-class single queue in place of the
// sixteen 256-deep virtual channels, round-robin arbitration and structs (not
// flits) for responses are this design's choices.
//
// Timing: a single-target request spends rx (F cycles) + 1 queue cycle +
// 1 egress queue cycle + F tx cycles between its first flit in and its last
// flit out when there is no contention.
//
// The lint tool reports the request matrices xreq and rreq as circular
// (UNOPTFLAT). There is no loop bit by bit: a request depends only on the
// route and response valids, the grant on the requests, and the readies on the
// grants. The report comes from each matrix being written in the same block as
// the readies, and the warning stands.
module dy_switch
  import dysharp_pkg::*;
#(
  parameter int unsigned NPORTS          = 32,
  parameter int unsigned EXPERTS_PER_GPU = 8,
  parameter int unsigned IQ_DEPTH        = 4,
  parameter int unsigned EQ_DEPTH        = 2,
  parameter int unsigned RED_BUF_BYTES   = 65536
)(
  input  logic              clk,
  input  logic              rst_n,
  // requests from GPUs (flits)
  input  logic [NPORTS-1:0] in_flit_valid,
  output logic [NPORTS-1:0] in_flit_ready,
  input  logic [FLIT_W-1:0] in_flit [NPORTS],
  input  logic [NPORTS-1:0] in_flit_last,
  // requests to GPUs (flits)
  output logic [NPORTS-1:0] out_flit_valid,
  input  logic [NPORTS-1:0] out_flit_ready,
  output logic [FLIT_W-1:0] out_flit [NPORTS],
  output logic [NPORTS-1:0] out_flit_last,
  // partial responses from destination GPUs
  input  logic [NPORTS-1:0] rsp_in_valid,
  output logic [NPORTS-1:0] rsp_in_ready,
  input  rsp_t              rsp_in [NPORTS],
  // reduced responses to source GPUs
  output logic [NPORTS-1:0] rsp_out_valid,
  input  logic [NPORTS-1:0] rsp_out_ready,
  output rsp_t              rsp_out [NPORTS],
  // event counters for observation
  output logic [31:0]       n_replicas,
  output logic [31:0]       n_requests
);
  localparam int PW = $clog2(NPORTS);

  // ---------------------------------------------------------------- ingress
  req_pkt_t           rx_pkt   [NPORTS];
  logic [NPORTS-1:0]  rx_valid, rx_ready;
  req_pkt_t           iq_pkt   [NPORTS];
  logic [NPORTS-1:0]  iq_valid, iq_ready;
  req_pkt_t           rt_in    [NPORTS];
  logic [NPORTS-1:0]  rt_valid, rt_ready;
  logic [NPORTS-1:0]  rt_ovalid, rt_oready;
  logic [SRC_W-1:0]   rt_oport  [NPORTS];
  req_pkt_t           rt_opkt   [NPORTS];
  logic [NPORTS-1:0]  red_alloc_valid, red_alloc_ready, allocated;

  for (genvar p = 0; p < NPORTS; p++) begin : g_in
    dy_flit_rx u_rx (
      .clk, .rst_n,
      .flit_valid(in_flit_valid[p]), .flit_ready(in_flit_ready[p]),
      .flit(in_flit[p]), .flit_last(in_flit_last[p]),
      .pkt_valid(rx_valid[p]), .pkt_ready(rx_ready[p]), .pkt(rx_pkt[p]));

    dy_fifo #(.T(req_pkt_t), .DEPTH(IQ_DEPTH)) u_iq (
      .clk, .rst_n,
      .in_valid(rx_valid[p]), .in_ready(rx_ready[p]), .in_data(rx_pkt[p]),
      .out_valid(iq_valid[p]), .out_ready(iq_ready[p]), .out_data(iq_pkt[p]));

    // The switch stamps the requester port; an ld_reduce first reserves its
    // reduction entry on this port.
    wire is_red = (iq_pkt[p].hdr.rtype == RT_LDRED);
    always_comb begin
      rt_in[p]     = iq_pkt[p];
      rt_in[p].src = SRC_W'(p);
    end
    assign red_alloc_valid[p] = iq_valid[p] && is_red && !allocated[p];
    assign rt_valid[p] = iq_valid[p] && (!is_red || allocated[p]);
    assign iq_ready[p] = rt_valid[p] && rt_ready[p];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) allocated[p] <= 1'b0;
      else if (iq_ready[p]) allocated[p] <= 1'b0;
      else if (red_alloc_valid[p] && red_alloc_ready[p]) allocated[p] <= 1'b1;
    end

    dy_route #(.NPORTS(NPORTS), .EXPERTS_PER_GPU(EXPERTS_PER_GPU)) u_route (
      .clk, .rst_n,
      .in_valid(rt_valid[p]), .in_ready(rt_ready[p]), .in_pkt(rt_in[p]),
      .out_valid(rt_ovalid[p]), .out_ready(rt_oready[p]), .out_port(rt_oport[p]),
      .out_pkt(rt_opkt[p]));
  end

  // ---------------------------------------------------------------- crossbar + egress
  logic [NPORTS-1:0] eq_in_valid, eq_in_ready, eq_valid, eq_ready;
  req_pkt_t          eq_in [NPORTS];
  req_pkt_t          eq_pkt [NPORTS];
  logic [NPORTS-1:0] xreq   [NPORTS];   // [dst][src]
  logic [NPORTS-1:0] xgrant [NPORTS];   // [dst][src]
  logic [PW-1:0]     xidx   [NPORTS];

  always_comb begin
    rt_oready = '0;
    for (int q = 0; q < NPORTS; q++)
      for (int p = 0; p < NPORTS; p++) begin
        xreq[q][p] = rt_ovalid[p] && (int'(rt_oport[p]) == q);
        if (xgrant[q][p] && eq_in_ready[q]) rt_oready[p] = 1'b1;
      end
  end

  for (genvar q = 0; q < NPORTS; q++) begin : g_out

    rr_arbiter #(.N(NPORTS)) u_arb (
      .clk, .rst_n, .req(xreq[q]), .advance(eq_in_ready[q]),
      .grant(xgrant[q]), .grant_idx(xidx[q]), .grant_valid(eq_in_valid[q]));

    assign eq_in[q] = rt_opkt[xidx[q]];

    dy_fifo #(.T(req_pkt_t), .DEPTH(EQ_DEPTH)) u_eq (
      .clk, .rst_n,
      .in_valid(eq_in_valid[q]), .in_ready(eq_in_ready[q]), .in_data(eq_in[q]),
      .out_valid(eq_valid[q]), .out_ready(eq_ready[q]), .out_data(eq_pkt[q]));

    dy_flit_tx u_tx (
      .clk, .rst_n,
      .pkt_valid(eq_valid[q]), .pkt_ready(eq_ready[q]), .pkt(eq_pkt[q]),
      .flit_valid(out_flit_valid[q]), .flit_ready(out_flit_ready[q]),
      .flit(out_flit[q]), .flit_last(out_flit_last[q]));
  end

  // ---------------------------------------------------------------- reduction
  logic [NPORTS-1:0] rreq   [NPORTS];   // [red port][resp in port]
  logic [NPORTS-1:0] rgrant [NPORTS];
  logic [PW-1:0]     ridx   [NPORTS];
  logic [NPORTS-1:0] rvalid, rready;

  always_comb begin
    rsp_in_ready = '0;
    for (int r = 0; r < NPORTS; r++)
      for (int q = 0; q < NPORTS; q++) begin
        rreq[r][q] = rsp_in_valid[q] && (int'(rsp_in[q].dst) == r);
        if (rgrant[r][q] && rready[r]) rsp_in_ready[q] = 1'b1;
      end
  end

  for (genvar r = 0; r < NPORTS; r++) begin : g_red

    rr_arbiter #(.N(NPORTS)) u_arb (
      .clk, .rst_n, .req(rreq[r]), .advance(rready[r]),
      .grant(rgrant[r]), .grant_idx(ridx[r]), .grant_valid(rvalid[r]));

    dy_red_logic #(.BUF_BYTES(RED_BUF_BYTES)) u_red (
      .clk, .rst_n,
      .alloc_valid(red_alloc_valid[r]), .alloc_ready(red_alloc_ready[r]),
      .alloc_tag(iq_pkt[r].hdr.tag), .alloc_cnt(iq_pkt[r].hdr.ntarget),
      .part_valid(rvalid[r]), .part_ready(rready[r]), .part(rsp_in[ridx[r]]),
      .done_valid(rsp_out_valid[r]), .done_ready(rsp_out_ready[r]), .done(rsp_out[r]));
  end

  // ---------------------------------------------------------------- counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_replicas <= '0;
      n_requests <= '0;
    end else begin
      n_replicas <= n_replicas + 32'($countones(eq_in_valid & eq_in_ready));
      n_requests <= n_requests + 32'($countones(iq_ready));
    end
  end

endmodule
