// dy_token_tracker: expert-side token tracker (Tile Status and Token ID tables).
//
// Tokens dispatched to an expert are stacked into layout blocks; every TSIZE
// consecutive layout blocks form a tile that feeds one row of GEMM thread
// blocks. The Tile Status (TS) Table keeps one entry per live tile:
// {Valid, ExpID, Row, TPtr, DAcc, TBCnt1, TBCnt2}.
//  * Dispatch => GEMM-1: DAcc adds the bytes of each acknowledged
//    dymultimem.st to the tile; when it reaches (tokens in tile) * bsize the
//    GEMM-1 row is ready.
//  * GEMM-1 => GEMM-2: TBCnt1 counts finished GEMM-1 TBs of the row; when it
//    reaches the TBs per row the GEMM-2 row is ready.
//  * GEMM-2 => Combine: TBCnt2 counts finished GEMM-2 TBs; when the row is
//    complete the tracker reads the tile's Token ID (TID) Table row from DRAM
//    (nToken, then TID 0..nToken-1) and sends one notification per token to
//    the token's source GPU, then frees the TS entry.
// The TID Table row of a tile (pointer TPtr, handed out in allocation order)
// is written when the hub allocates a layout block: TID[LIdx % TSIZE] = AIdx
// and nToken = LIdx % TSIZE + 1. Each TID row is TSIZE+1 words long.
//
// The table fields, the counting rules and the notification follow the
// published design. Direct mapping of the TS Table on (Row*E + ExpID), a
// stall on a conflicting entry in place of offload to DRAM, the partial last
// tile (min(TSIZE, nactive - Row*TSIZE) tokens), source GPU = TID >>
// log2(tokens per GPU) and one event handled at a time are this design's
// choices. Readiness is polled through a combinational query port and also
// pulsed on g1_evt / g2_evt.
module dy_token_tracker
  import dysharp_pkg::*;
#(
  parameter int unsigned TS_ENTRIES      = 1024,
  parameter int unsigned TSIZE           = 128,
  parameter int unsigned EXPERTS_PER_GPU = 8,
  localparam int EW = (EXPERTS_PER_GPU > 1) ? $clog2(EXPERTS_PER_GPU) : 1
)(
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  logic               cfg_clear,
  input  logic [31:0]        cfg_bsize,
  input  logic [31:0]        cfg_nactive [EXPERTS_PER_GPU],
  input  logic [15:0]        cfg_ntb1,
  input  logic [15:0]        cfg_ntb2,
  input  logic [VADDR_W-1:0] cfg_tidbase,
  input  logic [4:0]         cfg_tok_log2,       // log2(tokens per source GPU)
  // layout block allocated by the hub
  input  logic               alloc_valid,
  output logic               alloc_ready,
  input  logic [EW-1:0]      alloc_exp,
  input  logic [LIDX_W-1:0]  alloc_lidx,
  input  logic [31:0]        alloc_aidx,
  // dymultimem.st acknowledged
  input  logic               st_valid,
  output logic               st_ready,
  input  logic [EW-1:0]      st_exp,
  input  logic [LIDX_W-1:0]  st_lidx,
  input  logic [15:0]        st_bytes,
  // GEMM thread block finished
  input  logic               tb_valid,
  output logic               tb_ready,
  input  logic               tb_gemm2,           // 0: GEMM-1, 1: GEMM-2
  input  logic [EW-1:0]      tb_exp,
  input  logic [15:0]        tb_row,
  // readiness query (polled by the kernels)
  input  logic [EW-1:0]      q_exp,
  input  logic [15:0]        q_row,
  output logic               q_g1_ready,
  output logic               q_g2_ready,
  output logic               g1_evt,
  output logic               g2_evt,
  // TID Table in DRAM (32-bit words)
  output logic               mem_valid,
  input  logic               mem_ready,
  output logic               mem_we,
  output logic [VADDR_W-1:0] mem_addr,
  output logic [31:0]        mem_wdata,
  input  logic               mem_rvalid,
  input  logic [31:0]        mem_rdata,
  // notification to a source GPU
  output logic               ntf_valid,
  input  logic               ntf_ready,
  output logic [SRC_W-1:0]   ntf_dst,
  output logic [31:0]        ntf_tid,
  output logic [31:0]        n_notify
);
  localparam int IW   = $clog2(TS_ENTRIES);
  localparam int SW   = $clog2(TSIZE);

  typedef struct packed {
    logic [EW-1:0]     exp;
    logic [15:0]       row;
    logic [23:0]       tptr;
    logic [31:0]       dacc;
    logic [15:0]       tbcnt1;
    logic [15:0]       tbcnt2;
  } ts_t;

  ts_t               ts   [TS_ENTRIES];   // table storage (valid bits kept apart)
  logic [TS_ENTRIES-1:0] ts_v;

  typedef enum logic [2:0] {
    S_IDLE, S_WTID, S_WTID_A, S_WN, S_WN_A, S_RD, S_RD_W, S_NTF
  } state_e;
  state_e state;

  logic [23:0]  next_tptr;
  logic [IW-1:0] cur;           // entry being worked on
  logic [SW-1:0] slot;
  logic [31:0]   aidx_l;
  logic [15:0]   nidx;          // notification: next word to read (0 = nToken)
  logic [15:0]   ntok;
  logic [31:0]   tid_l;

  function automatic logic [IW-1:0] ts_idx(logic [EW-1:0] e, logic [15:0] r);
    return IW'(32'(r) * EXPERTS_PER_GPU + 32'(e));
  endfunction

  function automatic logic [31:0] tile_bytes(logic [EW-1:0] e, logic [15:0] r);
    logic [31:0] left;
    left = cfg_nactive[e] - 32'(r) * TSIZE;
    if (left > TSIZE) left = TSIZE;
    return left * cfg_bsize;
  endfunction

  function automatic logic [VADDR_W-1:0] tid_addr(logic [23:0] tp, logic [15:0] w);
    return cfg_tidbase + VADDR_W'((64'(tp) * 64'(TSIZE + 1) + 64'(w)) * 4);
  endfunction

  // ------------------------------------------------------------ event decode
  wire [15:0]   a_row = 16'(alloc_lidx / TSIZE);
  wire [IW-1:0] a_i   = ts_idx(alloc_exp, a_row);
  wire a_conf = ts_v[a_i] && (ts[a_i].exp != alloc_exp || ts[a_i].row != a_row);
  wire [15:0]   s_row = 16'(st_lidx / TSIZE);
  wire [IW-1:0] s_i   = ts_idx(st_exp, s_row);
  wire [IW-1:0] t_i   = ts_idx(tb_exp, tb_row);

  wire idle = (state == S_IDLE);
  assign alloc_ready = idle && !a_conf;
  assign st_ready    = idle && !alloc_valid;
  assign tb_ready    = idle && !alloc_valid && !st_valid;

  // ------------------------------------------------------------ query
  wire [IW-1:0] q_i = ts_idx(q_exp, q_row);
  wire q_hit = ts_v[q_i] && ts[q_i].exp == q_exp && ts[q_i].row == q_row;
  assign q_g1_ready = q_hit && (ts[q_i].dacc == tile_bytes(q_exp, q_row));
  assign q_g2_ready = q_hit && (ts[q_i].tbcnt1 == cfg_ntb1);

  // ------------------------------------------------------------ memory port
  always_comb begin
    mem_valid = 1'b0; mem_we = 1'b0; mem_addr = '0; mem_wdata = '0;
    case (state)
      S_WTID: begin mem_valid = 1'b1; mem_we = 1'b1;
                    mem_addr = tid_addr(ts[cur].tptr, 16'(slot) + 16'd1); mem_wdata = aidx_l; end
      S_WN:   begin mem_valid = 1'b1; mem_we = 1'b1;
                    mem_addr = tid_addr(ts[cur].tptr, 16'd0); mem_wdata = 32'(slot) + 32'd1; end
      S_RD:   begin mem_valid = 1'b1; mem_addr = tid_addr(ts[cur].tptr, nidx); end
      default: ;
    endcase
  end

  assign ntf_valid = (state == S_NTF);
  assign ntf_tid   = tid_l;
  assign ntf_dst   = SRC_W'(tid_l >> cfg_tok_log2);

  wire [31:0] s_dacc_new = ts[s_i].dacc + 32'(st_bytes);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; next_tptr <= '0; cur <= '0; slot <= '0; aidx_l <= '0;
      nidx <= '0; ntok <= '0; tid_l <= '0; g1_evt <= 1'b0; g2_evt <= 1'b0; n_notify <= '0;
      ts_v <= '0;
    end else begin
      g1_evt <= 1'b0;
      g2_evt <= 1'b0;
      if (cfg_clear && idle) begin
        next_tptr <= '0;
        ts_v <= '0;
      end else begin
        case (state)
          S_IDLE: begin
            if (alloc_valid && alloc_ready) begin
              if (!ts_v[a_i]) begin
                ts_v[a_i] <= 1'b1;
                next_tptr <= next_tptr + 1'b1;
              end
              cur    <= a_i;
              slot   <= SW'(alloc_lidx % TSIZE);
              aidx_l <= alloc_aidx;
              state  <= S_WTID;
            end else if (st_valid && st_ready) begin
              if (s_dacc_new == tile_bytes(st_exp, s_row)) g1_evt <= 1'b1;
            end else if (tb_valid && tb_ready) begin
              if (!tb_gemm2) begin
                if (ts[t_i].tbcnt1 + 1'b1 == cfg_ntb1) g2_evt <= 1'b1;
              end else begin
                if (ts[t_i].tbcnt2 + 1'b1 == cfg_ntb2) begin
                  cur   <= t_i;
                  nidx  <= '0;
                  state <= S_RD;
                end
              end
            end
          end
          S_WTID:   if (mem_ready) state <= S_WTID_A;
          S_WTID_A: if (mem_rvalid) state <= S_WN;
          S_WN:     if (mem_ready) state <= S_WN_A;
          S_WN_A:   if (mem_rvalid) state <= S_IDLE;
          S_RD:     if (mem_ready) state <= S_RD_W;
          S_RD_W: if (mem_rvalid) begin
            if (nidx == 0) begin
              ntok <= mem_rdata[15:0];
              nidx <= 16'd1;
              state <= (mem_rdata[15:0] == 0) ? S_IDLE : S_RD;
              if (mem_rdata[15:0] == 0) ts_v[cur] <= 1'b0;
            end else begin
              tid_l <= mem_rdata;
              state <= S_NTF;
            end
          end
          S_NTF: if (ntf_ready) begin
            n_notify <= n_notify + 1;
            if (nidx == ntok) begin
              ts_v[cur] <= 1'b0;   // row complete: entry freed
              state <= S_IDLE;
            end else begin
              nidx  <= nidx + 1'b1;
              state <= S_RD;
            end
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  // table storage: same events as above, no reset (only read where valid)
  wire ev_ok  = idle && !cfg_clear;
  wire do_new = ev_ok && alloc_valid && alloc_ready && !ts_v[a_i];
  wire do_st  = ev_ok && st_valid && st_ready;
  wire do_tb  = ev_ok && tb_valid && tb_ready;
  always_ff @(posedge clk) begin
    if (do_new) begin
      ts[a_i].exp    <= alloc_exp;
      ts[a_i].row    <= a_row;
      ts[a_i].tptr   <= next_tptr;
      ts[a_i].dacc   <= '0;
      ts[a_i].tbcnt1 <= '0;
      ts[a_i].tbcnt2 <= '0;
    end
    if (do_st) ts[s_i].dacc <= s_dacc_new;
    if (do_tb && !tb_gemm2) ts[t_i].tbcnt1 <= ts[t_i].tbcnt1 + 1'b1;
    if (do_tb &&  tb_gemm2) ts[t_i].tbcnt2 <= ts[t_i].tbcnt2 + 1'b1;
  end

  a_st_entry: assert property (@(posedge clk) disable iff (!rst_n)
    (st_valid && st_ready) |-> (ts_v[s_i] && ts[s_i].exp == st_exp && ts[s_i].row == s_row));
  a_tb_entry: assert property (@(posedge clk) disable iff (!rst_n)
    (tb_valid && tb_ready) |-> (ts_v[t_i] && ts[t_i].exp == tb_exp && ts[t_i].row == tb_row));

endmodule
