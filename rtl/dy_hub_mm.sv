// dy_hub_mm: hardware memory manager in the Hub of a destination GPU.
//
// Requests arrive carrying one multimem address (whose offset is the
// algebraic index) and the targets of this GPU. For every target expert e
// the manager
//   1. splits the address: AIdx = (MAddr - MBase) / bsize and
//      off = (MAddr - MBase) % bsize (serial divider, once per packet);
//   2. looks {e, AIdx} up in the AL TLB; on a miss it reads the AL Table entry
//      (4 bytes: Valid in bit 31, LIdx in bits 30:0) of sub-table e in DRAM;
//   3. in Dispatch (dymultimem.st), when the entry is not valid, allocates the
//      next layout block LIdx = Cnt[e]++, writes the entry back, and reports
//      the allocation (expert, LIdx, AIdx) to the token tracker; the TLB is
//      then filled;
//   4. translates VAddr = VBase[stage][e] + LIdx * bsize + off (MV
//      translation) and accesses memory: a store writes the 16-byte payload
//      and, once the write is acknowledged, reports the bytes written to the
//      tracker; an ld_reduce reads 16 bytes and returns them as one partial
//      response per target to the switch.
// The allocation on first touch, the shared AL mapping for both stages, the
// TLB keyed by {Expert ID, AIdx} and both translations follow the published
// design. One memory port with one access outstanding, the sub-table layout
// (entry address = ALBase + 4*(e*ntoken + AIdx)) and the configuration ports
// standing in for the runtime are this design's choices.
//
// Timing: W+2 cycles for the divider per packet (W = 48), then per target a
// TLB hit costs 1 cycle before the data access; a miss adds one AL Table read
// and, on first touch, one AL Table write.
module dy_hub_mm
  import dysharp_pkg::*;
#(
  parameter int unsigned EXPERTS_PER_GPU = 8,
  parameter int unsigned TLB_ENTRIES     = 512
)(
  input  logic               clk,
  input  logic               rst_n,
  // configuration from the runtime
  input  logic               cfg_clear,                 // new layer: counters and TLB reset
  input  logic [MADDR_W-1:0] cfg_mbase [2],             // per stage
  input  logic [VADDR_W-1:0] cfg_vbase [2][EXPERTS_PER_GPU],
  input  logic [31:0]        cfg_bsize,                 // bytes per token vector
  input  logic [31:0]        cfg_ntoken,                // AL sub-table length
  input  logic [VADDR_W-1:0] cfg_albase,
  // request packets from the link
  input  logic               req_valid,
  output logic               req_ready,
  input  req_pkt_t           req,
  // partial responses to the switch
  output logic               rsp_valid,
  input  logic               rsp_ready,
  output rsp_t               rsp,
  // memory port (AL Table and data)
  output logic               mem_valid,
  input  logic               mem_ready,
  output logic               mem_we,
  output logic               mem_word,                  // 1: 4-byte access, 0: 16 bytes
  output logic [VADDR_W-1:0] mem_addr,
  output logic [DATA_W-1:0]  mem_wdata,
  input  logic               mem_rvalid,                // read data or write ack
  input  logic [DATA_W-1:0]  mem_rdata,
  // events for the token tracker
  output logic               alloc_valid,
  input  logic               alloc_ready,
  output logic [$clog2(EXPERTS_PER_GPU)-1:0] alloc_exp,
  output logic [LIDX_W-1:0]  alloc_lidx,
  output logic [31:0]        alloc_aidx,
  output logic               stdone_valid,
  input  logic               stdone_ready,
  output logic [$clog2(EXPERTS_PER_GPU)-1:0] stdone_exp,
  output logic [LIDX_W-1:0]  stdone_lidx,
  output logic [15:0]        stdone_bytes,
  // statistics
  output logic [31:0]        n_hit,
  output logic [31:0]        n_miss,
  output logic [31:0]        n_alloc
);
  localparam int EW = (EXPERTS_PER_GPU > 1) ? $clog2(EXPERTS_PER_GPU) : 1;
  localparam int AIDX_W = 31;

  typedef enum logic [3:0] {
    S_IDLE, S_DIV, S_TGT, S_ALRD, S_ALRD_W, S_ALWR, S_ALWR_W, S_EVT,
    S_ACC, S_ACC_W, S_STDONE, S_RSP
  } state_e;
  state_e state;

  req_pkt_t            p;
  logic [NTGT_W-1:0]   t;
  logic [AIDX_W-1:0]   aidx;
  logic [MADDR_W-1:0]  off;
  logic [LIDX_W-1:0]   lidx;
  logic [DATA_W-1:0]   rdata;
  logic [LIDX_W-1:0]   cnt [EXPERTS_PER_GPU];
  logic [EW-1:0]       e;

  // divider
  logic div_start, div_busy, div_done;
  logic [MADDR_W-1:0] div_q, div_r;
  udiv_serial #(.W(MADDR_W)) u_div (
    .clk, .rst_n, .start(div_start),
    .dividend(req.hdr.maddr - cfg_mbase[req.hdr.stage]),
    .divisor(MADDR_W'(cfg_bsize)),
    .busy(div_busy), .done(div_done), .quotient(div_q), .remainder(div_r));

  // TLB
  logic tlb_hit;
  logic [LIDX_W-1:0] tlb_lidx;
  logic tlb_fill;
  logic [LIDX_W-1:0] fill_lidx;
  dy_al_tlb #(.ENTRIES(TLB_ENTRIES), .EXP_W(EW), .AIDX_W(AIDX_W)) u_tlb (
    .clk, .rst_n, .clear(cfg_clear),
    .lk_exp(e), .lk_aidx(aidx), .lk_hit(tlb_hit), .lk_lidx(tlb_lidx),
    .fill_valid(tlb_fill), .fill_exp(e), .fill_aidx(aidx), .fill_lidx(fill_lidx));

  assign e = EW'(int'(p.tgts[t]) % EXPERTS_PER_GPU);
  wire is_st = (p.hdr.rtype == RT_ST);

  wire [VADDR_W-1:0] al_addr = cfg_albase +
       VADDR_W'((64'(e) * 64'(cfg_ntoken) + 64'(aidx)) * 64'd4);
  wire [VADDR_W-1:0] vaddr = cfg_vbase[p.hdr.stage][e] +
       VADDR_W'(64'(lidx) * 64'(cfg_bsize)) + VADDR_W'(off);

  assign req_ready = (state == S_IDLE);
  assign div_start = req_valid && req_ready;

  always_comb begin
    mem_valid = 1'b0; mem_we = 1'b0; mem_word = 1'b0; mem_addr = '0; mem_wdata = '0;
    case (state)
      S_ALRD: begin mem_valid = 1'b1; mem_word = 1'b1; mem_addr = al_addr; end
      S_ALWR: begin mem_valid = 1'b1; mem_word = 1'b1; mem_we = 1'b1; mem_addr = al_addr;
                    mem_wdata = DATA_W'({1'b1, lidx}); end
      S_ACC:  begin mem_valid = 1'b1; mem_we = is_st; mem_addr = vaddr; mem_wdata = p.data; end
      default: ;
    endcase
  end

  assign tlb_fill     = (state == S_ALRD_W && mem_rvalid && mem_rdata[31]) ||
                        (state == S_ALWR_W && mem_rvalid);
  assign fill_lidx    = (state == S_ALRD_W) ? mem_rdata[LIDX_W-1:0] : lidx;
  assign alloc_valid  = (state == S_EVT);
  assign alloc_exp    = e;
  assign alloc_lidx   = lidx;
  assign alloc_aidx   = 32'(aidx);
  assign stdone_valid = (state == S_STDONE);
  assign stdone_exp   = e;
  assign stdone_lidx  = lidx;
  assign stdone_bytes = 16'($countones(p.be));
  assign rsp_valid    = (state == S_RSP);
  assign rsp.dst      = p.src;
  assign rsp.tag      = p.hdr.tag;
  assign rsp.data     = rdata;

  wire last_tgt = (t + 1'b1 == p.hdr.ntarget);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; p <= '0; t <= '0; aidx <= '0; off <= '0; lidx <= '0; rdata <= '0;
      n_hit <= '0; n_miss <= '0; n_alloc <= '0;
      for (int i = 0; i < EXPERTS_PER_GPU; i++) cnt[i] <= '0;
    end else begin
      if (cfg_clear)
        for (int i = 0; i < EXPERTS_PER_GPU; i++) cnt[i] <= '0;
      case (state)
        S_IDLE: if (req_valid) begin p <= req; t <= '0; state <= S_DIV; end
        S_DIV: if (div_done) begin
          aidx  <= AIDX_W'(div_q);
          off   <= div_r;
          state <= S_TGT;
        end
        S_TGT: begin
          if (tlb_hit) begin
            lidx  <= tlb_lidx;
            n_hit <= n_hit + 1;
            state <= S_ACC;
          end else begin
            n_miss <= n_miss + 1;
            state  <= S_ALRD;
          end
        end
        S_ALRD: if (mem_ready) state <= S_ALRD_W;
        S_ALRD_W: if (mem_rvalid) begin
          if (mem_rdata[31]) begin
            lidx  <= mem_rdata[LIDX_W-1:0];
            state <= S_ACC;
          end else if (is_st) begin
            lidx    <= cnt[e];          // first touch: next free layout block
            cnt[e]  <= cnt[e] + 1'b1;
            n_alloc <= n_alloc + 1;
            state   <= S_ALWR;
          end else begin
            lidx  <= '0;                // combine of a never-dispatched token
            state <= S_ACC;
          end
        end
        S_ALWR:   if (mem_ready) state <= S_ALWR_W;
        S_ALWR_W: if (mem_rvalid) state <= S_EVT;
        S_EVT:    if (alloc_ready) state <= S_ACC;
        S_ACC:    if (mem_ready) state <= S_ACC_W;
        S_ACC_W:  if (mem_rvalid) begin
          rdata <= mem_rdata;
          state <= is_st ? S_STDONE : S_RSP;
        end
        S_STDONE: if (stdone_ready) begin
          t     <= t + 1'b1;
          state <= last_tgt ? S_IDLE : S_TGT;
        end
        S_RSP: if (rsp_ready) begin
          t     <= t + 1'b1;
          state <= last_tgt ? S_IDLE : S_TGT;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_tgt_here: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid |-> req.hdr.ntarget != '0);
  a_combine_mapped: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_ALRD_W && mem_rvalid && !is_st) |-> mem_rdata[31]);

endmodule
