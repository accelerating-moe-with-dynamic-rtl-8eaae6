// dy_mmq_lsu: source-GPU LSU extension for dymultimem instructions.
//
// A dymultimem.st / dymultimem.ld_reduce names a multimem address (r2), a
// data register (r1), a target count (r3) and the base address of a
// contiguous target list (r4). Unlike a plain store it cannot issue at once:
// the LSU first reads the target list. Instructions wait in the MultimemQ
// (DEPTH entries, a circular buffer) from the moment their target fetch is
// started until the whole list is back; then the LSU builds the complete
// request packet (header, target list, byte enables, data) and sends it to
// the on-chip network. Reduced responses of ld_reduce come back by tag and
// are written to the destination register.
//
// Three pointers walk the queue: tail (allocation), fptr (next entry whose
// target words are requested), rptr (entry receiving in-order fetch data) and
// head (next packet to issue); fptr and rptr move on when an entry's
// last word is requested or received. Target words are 16 bytes, eight 16-bit
// expert IDs. Packets leave in program order. An ld_reduce takes one of NPEND
// tags, each remembering its destination register; with none free it waits.
// The queue, the fetch and the packet are the published mechanism; word
// size, ordering and tag handling are this design's choices.
//
// Timing: an instruction accepted in cycle t requests its first target word
// in t+1; with an SMEM latency of L cycles and W words the packet can leave
// at t+1+W+L at the earliest (fetches of later entries overlap).
module dy_mmq_lsu
  import dysharp_pkg::*;
#(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned NPEND = 32,
  parameter logic [SRC_W-1:0] GPU_ID = '0
)(
  input  logic               clk,
  input  logic               rst_n,
  // dymultimem instruction from the LSQ
  input  logic               inst_valid,
  output logic               inst_ready,
  input  dyinst_t            inst,
  // target fetch to shared memory / L1
  output logic               tf_req_valid,
  input  logic               tf_req_ready,
  output logic [31:0]        tf_req_addr,
  input  logic               tf_rsp_valid,
  input  logic [FLIT_W-1:0]  tf_rsp_data,
  // request packet to the network
  output logic               pkt_valid,
  input  logic               pkt_ready,
  output req_pkt_t           pkt,
  // reduced response from the switch
  input  logic               resp_valid,
  output logic               resp_ready,
  input  rsp_t               resp,
  // register-file writeback
  output logic               wb_valid,
  input  logic               wb_ready,
  output logic [7:0]         wb_rd,
  output logic [DATA_W-1:0]  wb_data
);

  localparam int AW = $clog2(DEPTH);
  localparam int PW = $clog2(NPEND);

  dyinst_t               q_inst [DEPTH];
  tgt_t [MAX_TARGETS-1:0] q_tgts [DEPTH];
  logic [DEPTH-1:0]      q_valid;
  logic [2:0]            q_nreq  [DEPTH];
  logic [2:0]            q_nrecv [DEPTH];

  logic [AW-1:0] tail, fptr, rptr, head;
  logic [AW:0]   count;

  logic [NPEND-1:0] pend_valid;
  logic [7:0]       pend_rd [NPEND];

  function automatic logic [2:0] nwords(logic [NTGT_W-1:0] n);
    return 3'((int'(n) + TGT_PER_FLIT - 1) / TGT_PER_FLIT);
  endfunction

  // ---------------- allocation
  assign inst_ready = (count != DEPTH[AW:0]);
  wire do_alloc = inst_valid && inst_ready;

  // ---------------- target fetch requests
  logic fetch_busy;
  assign fetch_busy  = q_valid[fptr] && (q_nreq[fptr] != nwords(q_inst[fptr].ntarget));
  assign tf_req_valid = fetch_busy;
  assign tf_req_addr  = q_inst[fptr].tbase + 32'(q_nreq[fptr]) * 32'd16;
  wire do_freq = tf_req_valid && tf_req_ready;
  wire fptr_adv = do_freq && (q_nreq[fptr] + 1'b1 == nwords(q_inst[fptr].ntarget));

  // ---------------- target fetch responses (in order)
  wire rptr_adv = tf_rsp_valid && (q_nrecv[rptr] + 1'b1 == nwords(q_inst[rptr].ntarget));

  // ---------------- issue
  // The tag offered with a waiting ld_reduce is held until it is taken, so
  // the packet stays stable while tags are freed by writebacks.
  logic          free_found, lock_valid;
  logic [PW-1:0] free_tag, first_free, lock_tag;
  always_comb begin
    free_found = 1'b0;
    first_free = '0;
    for (int i = NPEND - 1; i >= 0; i--)
      if (!pend_valid[i]) begin free_found = 1'b1; first_free = PW'(i); end
    if (lock_valid) free_found = 1'b1;
    free_tag = lock_valid ? lock_tag : first_free;
  end

  wire head_ready = q_valid[head] && (q_nrecv[head] == nwords(q_inst[head].ntarget));
  wire is_red     = (q_inst[head].op == RT_LDRED);
  assign pkt_valid = head_ready && (!is_red || free_found);

  always_comb begin
    pkt = '0;
    pkt.hdr.rtype   = q_inst[head].op;
    pkt.hdr.credit  = '0;
    pkt.hdr.tag     = is_red ? TAG_W'(free_tag) : TAG_W'(head);
    pkt.hdr.maddr   = q_inst[head].maddr;
    pkt.hdr.stage   = q_inst[head].stage;
    pkt.hdr.ntarget = q_inst[head].ntarget;
    pkt.src         = GPU_ID;
    pkt.tgts        = q_tgts[head];
    pkt.be          = is_red ? '0 : '1;
    pkt.data        = is_red ? '0 : q_inst[head].data;
  end
  wire do_issue = pkt_valid && pkt_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lock_valid <= 1'b0;
      lock_tag   <= '0;
    end else if (do_issue) lock_valid <= 1'b0;
    else if (pkt_valid && is_red && !lock_valid) begin
      lock_valid <= 1'b1;
      lock_tag   <= first_free;
    end
  end

  // ---------------- responses -> register file
  assign wb_valid   = resp_valid;
  assign wb_rd      = pend_rd[PW'(resp.tag)];
  assign wb_data    = resp.data;
  assign resp_ready = wb_ready;
  wire do_wb = resp_valid && resp_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tail <= '0; fptr <= '0; rptr <= '0; head <= '0; count <= '0;
      q_valid <= '0; pend_valid <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        q_nreq[i] <= '0; q_nrecv[i] <= '0; q_inst[i] <= '0; q_tgts[i] <= '0;
      end
      for (int i = 0; i < NPEND; i++) pend_rd[i] <= '0;
    end else begin
      if (do_alloc) begin
        q_inst[tail]  <= inst;
        q_valid[tail] <= 1'b1;
        q_nreq[tail]  <= '0;
        q_nrecv[tail] <= '0;
        tail <= tail + 1'b1;
      end
      if (do_freq) q_nreq[fptr] <= q_nreq[fptr] + 1'b1;
      if (fptr_adv) fptr <= fptr + 1'b1;
      if (tf_rsp_valid) begin
        for (int j = 0; j < TGT_PER_FLIT; j++)
          if (int'(q_nrecv[rptr]) * TGT_PER_FLIT + j < MAX_TARGETS)
            q_tgts[rptr][int'(q_nrecv[rptr]) * TGT_PER_FLIT + j] <= tf_rsp_data[j*TGT_W +: TGT_W];
        q_nrecv[rptr] <= q_nrecv[rptr] + 1'b1;
      end
      if (rptr_adv) rptr <= rptr + 1'b1;
      if (do_issue) begin
        q_valid[head] <= 1'b0;
        head <= head + 1'b1;
        if (is_red) begin
          pend_valid[free_tag] <= 1'b1;
          pend_rd[free_tag]    <= q_inst[head].rd;
        end
      end
      if (do_wb) pend_valid[PW'(resp.tag)] <= 1'b0;
      count <= count + (AW+1)'(do_alloc) - (AW+1)'(do_issue);
    end
  end

  a_rsp_for_pending: assert property (@(posedge clk) disable iff (!rst_n)
    resp_valid |-> pend_valid[PW'(resp.tag)]);
  a_ntarget: assert property (@(posedge clk) disable iff (!rst_n)
    inst_valid |-> (inst.ntarget != '0 && int'(inst.ntarget) <= MAX_TARGETS));
  a_fetch_resp: assert property (@(posedge clk) disable iff (!rst_n)
    tf_rsp_valid |-> (q_valid[rptr] && q_nrecv[rptr] < q_nreq[rptr]));

endmodule
