// dysharp_node: a switch-connected multi-GPU node with dynamic in-switch
// computing for MoE Dispatch and Combine.
//
// For each of NGPU GPUs the node holds the added GPU-side hardware:
//   * source side: the LSU MultimemQ (dy_mmq_lsu), which fetches target lists
//     and issues dymultimem requests, and the flit serialiser to the link;
//   * destination side: the flit deserialiser and the Hub memory manager
//     (dy_hub_mm with its AL TLB), which maps algebraic to layout indices and
//     reads or writes the token data;
//   * the expert-side token tracker (TS Table, TID Table access) and the
//     source-side Output Readiness table.
// One switch plane (dy_switch) replicates requests by target and reduces
// Combine responses; dy_notify_net returns readiness notifications.
//
// What the node does not contain is brought out as ports: the SMs' issue of
// dymultimem instructions and their target-list reads (inst_*, tf_*), the
// register writeback (wb_*), GPU DRAM seen through the Link MMU (hmem_* for
// the hub, tmem_* for the TID Table), the GEMM thread-block completions and
// readiness polls of the software scheduler (tb_*, q_*, orq_*, cons_*) and
// the runtime configuration (cfg_*). The configuration is shared by all GPUs
// (each GPU has its own virtual address space, so equal bases are legal);
// that sharing is a choice of this design.
//
// Workflow (published steps 1-9): instruction enters the MultimemQ, target
// list fetched, request sent; switch computes output ports per target and
// forwards replicas; the hub queries the AL TLB, on a miss the AL Table, and
// allocates a layout block on first touch in Dispatch; the translated address
// is used for the access; ld_reduce responses are aggregated in the switch.
module dysharp_node
  import dysharp_pkg::*;
#(
  parameter int unsigned NGPU            = 32,
  parameter int unsigned EXPERTS_PER_GPU = 8,
  parameter int unsigned MMQ_DEPTH       = 32,
  parameter int unsigned TLB_ENTRIES     = 512,
  parameter int unsigned TS_ENTRIES      = 1024,
  parameter int unsigned OR_ENTRIES      = 1024,
  parameter int unsigned TSIZE           = 128,
  parameter int unsigned RED_BUF_BYTES   = 65536,
  localparam int EW = (EXPERTS_PER_GPU > 1) ? $clog2(EXPERTS_PER_GPU) : 1
)(
  input  logic               clk,
  input  logic               rst_n,
  // runtime configuration
  input  logic               cfg_clear,
  input  logic [MADDR_W-1:0] cfg_mbase [2],
  input  logic [VADDR_W-1:0] cfg_vbase [2][EXPERTS_PER_GPU],
  input  logic [31:0]        cfg_bsize,
  input  logic [31:0]        cfg_ntoken,
  input  logic [VADDR_W-1:0] cfg_albase,
  input  logic [31:0]        cfg_nactive [NGPU][EXPERTS_PER_GPU],
  input  logic [15:0]        cfg_ntb1,
  input  logic [15:0]        cfg_ntb2,
  input  logic [VADDR_W-1:0] cfg_tidbase,
  input  logic [4:0]         cfg_tok_log2,
  input  logic [5:0]         cfg_topk,
  // dymultimem instructions from the SMs
  input  logic [NGPU-1:0]    inst_valid,
  output logic [NGPU-1:0]    inst_ready,
  input  dyinst_t            inst [NGPU],
  // target-list reads to shared memory
  output logic [NGPU-1:0]    tf_req_valid,
  input  logic [NGPU-1:0]    tf_req_ready,
  output logic [31:0]        tf_req_addr [NGPU],
  input  logic [NGPU-1:0]    tf_rsp_valid,
  input  logic [FLIT_W-1:0]  tf_rsp_data [NGPU],
  // reduced values to the register files
  output logic [NGPU-1:0]    wb_valid,
  input  logic [NGPU-1:0]    wb_ready,
  output logic [7:0]         wb_rd   [NGPU],
  output logic [DATA_W-1:0]  wb_data [NGPU],
  // hub memory port (AL Table and token data) per GPU
  output logic [NGPU-1:0]    hmem_valid,
  input  logic [NGPU-1:0]    hmem_ready,
  output logic [NGPU-1:0]    hmem_we,
  output logic [NGPU-1:0]    hmem_word,
  output logic [VADDR_W-1:0] hmem_addr  [NGPU],
  output logic [DATA_W-1:0]  hmem_wdata [NGPU],
  input  logic [NGPU-1:0]    hmem_rvalid,
  input  logic [DATA_W-1:0]  hmem_rdata [NGPU],
  // tracker memory port (TID Table) per GPU
  output logic [NGPU-1:0]    tmem_valid,
  input  logic [NGPU-1:0]    tmem_ready,
  output logic [NGPU-1:0]    tmem_we,
  output logic [VADDR_W-1:0] tmem_addr  [NGPU],
  output logic [31:0]        tmem_wdata [NGPU],
  input  logic [NGPU-1:0]    tmem_rvalid,
  input  logic [31:0]        tmem_rdata [NGPU],
  // GEMM thread-block completions
  input  logic [NGPU-1:0]    tb_valid,
  output logic [NGPU-1:0]    tb_ready,
  input  logic [NGPU-1:0]    tb_gemm2,
  input  logic [EW-1:0]      tb_exp [NGPU],
  input  logic [15:0]        tb_row [NGPU],
  // readiness polls
  input  logic [EW-1:0]      q_exp [NGPU],
  input  logic [15:0]        q_row [NGPU],
  output logic [NGPU-1:0]    q_g1_ready,
  output logic [NGPU-1:0]    q_g2_ready,
  output logic [NGPU-1:0]    g1_evt,
  output logic [NGPU-1:0]    g2_evt,
  input  logic [31:0]        orq_tid [NGPU],
  output logic [NGPU-1:0]    orq_ready,
  input  logic [NGPU-1:0]    cons_valid,
  input  logic [31:0]        cons_tid [NGPU],
  // statistics
  output logic [31:0]        st_replicas,
  output logic [31:0]        st_requests,
  output logic [31:0]        st_tlb_hit  [NGPU],
  output logic [31:0]        st_tlb_miss [NGPU],
  output logic [31:0]        st_alloc    [NGPU],
  output logic [31:0]        st_notify   [NGPU],
  output logic [31:0]        st_or_ready [NGPU]
);

  // GPU -> switch request links
  logic [NGPU-1:0]   up_valid, up_ready, up_last;
  logic [FLIT_W-1:0] up_flit [NGPU];
  // switch -> GPU request links
  logic [NGPU-1:0]   dn_valid, dn_ready, dn_last;
  logic [FLIT_W-1:0] dn_flit [NGPU];
  // responses
  logic [NGPU-1:0]   prsp_valid, prsp_ready, rrsp_valid, rrsp_ready;
  rsp_t              prsp [NGPU];
  rsp_t              rrsp [NGPU];
  // notifications
  logic [NGPU-1:0]   ntf_valid, ntf_ready, nto_valid, nto_ready;
  logic [SRC_W-1:0]  ntf_dst [NGPU];
  logic [31:0]       ntf_tid [NGPU];
  logic [31:0]       nto_tid [NGPU];

  for (genvar g = 0; g < NGPU; g++) begin : g_gpu
    // ---------------- source side
    logic     pkt_valid, pkt_ready;
    req_pkt_t pkt;

    dy_mmq_lsu #(.DEPTH(MMQ_DEPTH), .GPU_ID(SRC_W'(g))) u_lsu (
      .clk, .rst_n,
      .inst_valid(inst_valid[g]), .inst_ready(inst_ready[g]), .inst(inst[g]),
      .tf_req_valid(tf_req_valid[g]), .tf_req_ready(tf_req_ready[g]), .tf_req_addr(tf_req_addr[g]),
      .tf_rsp_valid(tf_rsp_valid[g]), .tf_rsp_data(tf_rsp_data[g]),
      .pkt_valid, .pkt_ready, .pkt,
      .resp_valid(rrsp_valid[g]), .resp_ready(rrsp_ready[g]), .resp(rrsp[g]),
      .wb_valid(wb_valid[g]), .wb_ready(wb_ready[g]), .wb_rd(wb_rd[g]), .wb_data(wb_data[g]));

    dy_flit_tx u_tx (
      .clk, .rst_n, .pkt_valid, .pkt_ready, .pkt,
      .flit_valid(up_valid[g]), .flit_ready(up_ready[g]), .flit(up_flit[g]), .flit_last(up_last[g]));

    // ---------------- destination side
    logic     hreq_valid, hreq_ready;
    req_pkt_t hreq;
    logic     al_valid, al_ready, sd_valid, sd_ready;
    logic [EW-1:0]     al_exp, sd_exp;
    logic [LIDX_W-1:0] al_lidx, sd_lidx;
    logic [31:0]       al_aidx;
    logic [15:0]       sd_bytes;

    dy_flit_rx u_rx (
      .clk, .rst_n,
      .flit_valid(dn_valid[g]), .flit_ready(dn_ready[g]), .flit(dn_flit[g]), .flit_last(dn_last[g]),
      .pkt_valid(hreq_valid), .pkt_ready(hreq_ready), .pkt(hreq));

    dy_hub_mm #(.EXPERTS_PER_GPU(EXPERTS_PER_GPU), .TLB_ENTRIES(TLB_ENTRIES)) u_hub (
      .clk, .rst_n,
      .cfg_clear, .cfg_mbase, .cfg_vbase, .cfg_bsize, .cfg_ntoken, .cfg_albase,
      .req_valid(hreq_valid), .req_ready(hreq_ready), .req(hreq),
      .rsp_valid(prsp_valid[g]), .rsp_ready(prsp_ready[g]), .rsp(prsp[g]),
      .mem_valid(hmem_valid[g]), .mem_ready(hmem_ready[g]), .mem_we(hmem_we[g]),
      .mem_word(hmem_word[g]), .mem_addr(hmem_addr[g]), .mem_wdata(hmem_wdata[g]),
      .mem_rvalid(hmem_rvalid[g]), .mem_rdata(hmem_rdata[g]),
      .alloc_valid(al_valid), .alloc_ready(al_ready), .alloc_exp(al_exp),
      .alloc_lidx(al_lidx), .alloc_aidx(al_aidx),
      .stdone_valid(sd_valid), .stdone_ready(sd_ready), .stdone_exp(sd_exp),
      .stdone_lidx(sd_lidx), .stdone_bytes(sd_bytes),
      .n_hit(st_tlb_hit[g]), .n_miss(st_tlb_miss[g]), .n_alloc(st_alloc[g]));

    dy_token_tracker #(.TS_ENTRIES(TS_ENTRIES), .TSIZE(TSIZE), .EXPERTS_PER_GPU(EXPERTS_PER_GPU)) u_trk (
      .clk, .rst_n,
      .cfg_clear, .cfg_bsize, .cfg_nactive(cfg_nactive[g]), .cfg_ntb1, .cfg_ntb2,
      .cfg_tidbase, .cfg_tok_log2,
      .alloc_valid(al_valid), .alloc_ready(al_ready), .alloc_exp(al_exp),
      .alloc_lidx(al_lidx), .alloc_aidx(al_aidx),
      .st_valid(sd_valid), .st_ready(sd_ready), .st_exp(sd_exp), .st_lidx(sd_lidx), .st_bytes(sd_bytes),
      .tb_valid(tb_valid[g]), .tb_ready(tb_ready[g]), .tb_gemm2(tb_gemm2[g]),
      .tb_exp(tb_exp[g]), .tb_row(tb_row[g]),
      .q_exp(q_exp[g]), .q_row(q_row[g]), .q_g1_ready(q_g1_ready[g]), .q_g2_ready(q_g2_ready[g]),
      .g1_evt(g1_evt[g]), .g2_evt(g2_evt[g]),
      .mem_valid(tmem_valid[g]), .mem_ready(tmem_ready[g]), .mem_we(tmem_we[g]),
      .mem_addr(tmem_addr[g]), .mem_wdata(tmem_wdata[g]),
      .mem_rvalid(tmem_rvalid[g]), .mem_rdata(tmem_rdata[g]),
      .ntf_valid(ntf_valid[g]), .ntf_ready(ntf_ready[g]), .ntf_dst(ntf_dst[g]), .ntf_tid(ntf_tid[g]),
      .n_notify(st_notify[g]));

    // ---------------- source-side readiness
    dy_or_table #(.ENTRIES(OR_ENTRIES)) u_or (
      .clk, .rst_n, .cfg_topk,
      .ntf_valid(nto_valid[g]), .ntf_ready(nto_ready[g]), .ntf_tid(nto_tid[g]),
      .q_tid(orq_tid[g]), .q_ready(orq_ready[g]),
      .cons_valid(cons_valid[g]), .cons_tid(cons_tid[g]),
      .n_ready_tokens(st_or_ready[g]));
  end

  dy_switch #(.NPORTS(NGPU), .EXPERTS_PER_GPU(EXPERTS_PER_GPU), .RED_BUF_BYTES(RED_BUF_BYTES)) u_sw (
    .clk, .rst_n,
    .in_flit_valid(up_valid), .in_flit_ready(up_ready), .in_flit(up_flit), .in_flit_last(up_last),
    .out_flit_valid(dn_valid), .out_flit_ready(dn_ready), .out_flit(dn_flit), .out_flit_last(dn_last),
    .rsp_in_valid(prsp_valid), .rsp_in_ready(prsp_ready), .rsp_in(prsp),
    .rsp_out_valid(rrsp_valid), .rsp_out_ready(rrsp_ready), .rsp_out(rrsp),
    .n_replicas(st_replicas), .n_requests(st_requests));

  dy_notify_net #(.NGPU(NGPU)) u_ntf (
    .clk, .rst_n,
    .in_valid(ntf_valid), .in_ready(ntf_ready), .in_dst(ntf_dst), .in_tid(ntf_tid),
    .out_valid(nto_valid), .out_ready(nto_ready), .out_tid(nto_tid));

endmodule
