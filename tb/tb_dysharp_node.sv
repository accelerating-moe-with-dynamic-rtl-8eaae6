// tb_dysharp_node: end-to-end test of the node at a reduced size
// (4 GPUs, 2 experts per GPU, 4-token tiles, 4-entry MultimemQ, 16-entry AL
// TLB so that capacity misses occur), 8 tokens per GPU, top-3 gating.
//
// Scenario (one MoE layer, everything through the node's ports):
//  1. The testbench gates every token of every GPU to TOPK distinct experts
//     and programs the per-expert active-token counts (cfg_nactive).
//  2. Dispatch: each GPU's SMs issue one dymultimem.st per token (target list
//     in a shared-memory model); the switch replicates by target; the hubs
//     allocate layout blocks on first touch and store the token vectors.
//     Checked: every expert's layout blocks hold exactly its tokens, the AL
//     Table maps every (expert, token) pair, and every tile row becomes
//     GEMM-1 ready.
//  3. GEMM-1 / GEMM-2: the testbench plays the kernels: it writes each expert
//     output (token vector + expert ID + 1 in every 32-bit lane) to the
//     Combine buffer and reports the finished thread blocks; rows must turn
//     GEMM-2 ready, then the trackers read the TID rows and notify the
//     source GPUs, whose OR tables must report every token ready.
//  4. Combine: each GPU issues one dymultimem.ld_reduce per token with the
//     same target list; the switch sums the partials; every writeback must
//     equal the sum over the token's experts.
// Every mechanism is counted and a failure is counted for one that never
// happens: multicast replication, in-switch reduction, TLB miss, TLB hit,
// first-touch allocation, GEMM-1 ready, GEMM-2 ready, notification, OR
// ready, MultimemQ full (issue stalled), and response back-pressure.
// All memories (shared memory, DRAM behind the hub and the tracker) are
// models in this testbench with random latency.
module tb_dysharp_node;
  import dysharp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask
  task automatic tick(); @(posedge clk); #1; endtask

  localparam int NG = 4, E = 2, T = 8, TOPK = 3, TSIZE_T = 4;
  localparam int NX   = NG * E;          // experts in the node
  localparam int NTOK = NG * T;          // tokens in the node
  localparam logic [31:0] BS = 16;       // one 16-byte flit per token vector
  localparam int EWD = (E > 1) ? $clog2(E) : 1;

  // ------------------------------------------------------------ DUT ports
  logic cfg_clear;
  logic [MADDR_W-1:0] cfg_mbase [2];
  logic [VADDR_W-1:0] cfg_vbase [2][E];
  logic [31:0] cfg_bsize, cfg_ntoken;
  logic [VADDR_W-1:0] cfg_albase, cfg_tidbase;
  logic [31:0] cfg_nactive [NG][E];
  logic [15:0] cfg_ntb1, cfg_ntb2;
  logic [4:0] cfg_tok_log2;
  logic [5:0] cfg_topk;
  logic [NG-1:0] inst_valid, inst_ready;
  dyinst_t inst [NG];
  logic [NG-1:0] tf_req_valid, tf_req_ready, tf_rsp_valid;
  logic [31:0] tf_req_addr [NG];
  logic [FLIT_W-1:0] tf_rsp_data [NG];
  logic [NG-1:0] wb_valid, wb_ready;
  logic [7:0] wb_rd [NG];
  logic [DATA_W-1:0] wb_data [NG];
  logic [NG-1:0] hmem_valid, hmem_ready, hmem_we, hmem_word, hmem_rvalid;
  logic [VADDR_W-1:0] hmem_addr [NG];
  logic [DATA_W-1:0] hmem_wdata [NG];
  logic [DATA_W-1:0] hmem_rdata [NG];
  logic [NG-1:0] tmem_valid, tmem_ready, tmem_we, tmem_rvalid;
  logic [VADDR_W-1:0] tmem_addr [NG];
  logic [31:0] tmem_wdata [NG];
  logic [31:0] tmem_rdata [NG];
  logic [NG-1:0] tb_valid, tb_ready, tb_gemm2;
  logic [EWD-1:0] tb_exp [NG];
  logic [15:0] tb_row [NG];
  logic [EWD-1:0] q_exp [NG];
  logic [15:0] q_row [NG];
  logic [NG-1:0] q_g1_ready, q_g2_ready, g1_evt, g2_evt, orq_ready, cons_valid;
  logic [31:0] orq_tid [NG];
  logic [31:0] cons_tid [NG];
  logic [31:0] st_replicas, st_requests;
  logic [31:0] st_tlb_hit [NG];
  logic [31:0] st_tlb_miss [NG];
  logic [31:0] st_alloc [NG];
  logic [31:0] st_notify [NG];
  logic [31:0] st_or_ready [NG];

  dysharp_node #(.NGPU(NG), .EXPERTS_PER_GPU(E), .MMQ_DEPTH(4), .TLB_ENTRIES(16),
                 .TS_ENTRIES(64), .OR_ENTRIES(64), .TSIZE(TSIZE_T)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ gating
  int route [NTOK][TOPK];                 // token -> global expert IDs
  int ntok_of [NX];                       // tokens per expert
  logic [DATA_W-1:0] xvec [NTOK];         // token vectors

  function automatic logic [DATA_W-1:0] expert_out(int tok, int x);
    logic [DATA_W-1:0] v;
    v = xvec[tok];
    for (int l = 0; l < LANES; l++) v[l*LANE_W +: LANE_W] = v[l*LANE_W +: LANE_W] + LANE_W'(x + 1);
    return v;
  endfunction

  // ------------------------------------------------------------ memory models
  logic [127:0] smem [NG][logic [31:0]];     // shared memory: target lists
  logic [127:0] dram16 [NG][logic [63:0]];   // hub-side DRAM, 16-byte words
  logic [31:0]  dram4  [NG][logic [63:0]];   // AL Table words
  logic [31:0]  tdram  [NG][logic [63:0]];   // TID Table words

  // mechanism counters
  int m_qfull = 0, m_bp = 0, m_wb = 0;

  for (genvar g = 0; g < NG; g++) begin : g_mod
    // shared-memory model: in-order, 2..5 cycle latency
    initial begin
      logic [31:0] aq [$];
      int dq [$];
      int now;
      now = 0;
      tf_req_ready[g] = 0; tf_rsp_valid[g] = 0; tf_rsp_data[g] = '0;
      forever begin
        tf_req_ready[g] = ($urandom_range(0, 3) != 0);
        tf_rsp_valid[g] = 0;
        if (aq.size() > 0 && dq[0] <= now) begin
          tf_rsp_valid[g] = 1;
          tf_rsp_data[g] = smem[g].exists(aq[0]) ? smem[g][aq[0]] : '0;
          void'(aq.pop_front()); void'(dq.pop_front());
        end
        #1;
        if (tf_req_valid[g] && tf_req_ready[g]) begin
          aq.push_back(tf_req_addr[g]); dq.push_back(now + $urandom_range(2, 5));
        end
        tick(); now++;
      end
    end
    // hub DRAM model: one access at a time, random latency
    initial begin
      hmem_ready[g] = 0; hmem_rvalid[g] = 0; hmem_rdata[g] = '0;
      forever begin
        logic [63:0] a; logic w, wd; logic [127:0] d;
        hmem_ready[g] = ($urandom_range(0, 2) != 0);
        #1;
        if (hmem_valid[g] && hmem_ready[g]) begin
          a = hmem_addr[g]; w = hmem_we[g]; wd = hmem_word[g]; d = hmem_wdata[g];
          tick(); hmem_ready[g] = 0;
          repeat ($urandom_range(0, 3)) tick();
          if (w) begin
            if (wd) dram4[g][a] = d[31:0]; else dram16[g][a] = d;
            hmem_rdata[g] = '0;
          end else if (wd) hmem_rdata[g] = 128'(dram4[g].exists(a) ? dram4[g][a] : 32'h0);
          else hmem_rdata[g] = dram16[g].exists(a) ? dram16[g][a] : '0;
          hmem_rvalid[g] = 1; tick(); hmem_rvalid[g] = 0;
        end else tick();
      end
    end
    // tracker DRAM model
    initial begin
      tmem_ready[g] = 0; tmem_rvalid[g] = 0; tmem_rdata[g] = '0;
      forever begin
        logic [63:0] a; logic w; logic [31:0] d;
        tmem_ready[g] = ($urandom_range(0, 2) != 0);
        #1;
        if (tmem_valid[g] && tmem_ready[g]) begin
          a = tmem_addr[g]; w = tmem_we[g]; d = tmem_wdata[g];
          tick(); tmem_ready[g] = 0;
          repeat ($urandom_range(0, 2)) tick();
          if (w) tdram[g][a] = d;
          tmem_rdata[g] = w ? 32'h0 : (tdram[g].exists(a) ? tdram[g][a] : 32'h0);
          tmem_rvalid[g] = 1; tick(); tmem_rvalid[g] = 0;
        end else tick();
      end
    end
    // writeback checker with random back-pressure
    initial begin
      wb_ready[g] = 0;
      forever begin
        wb_ready[g] = ($urandom_range(0, 2) != 0);
        #1;
        if (wb_valid[g] && !wb_ready[g]) m_bp++;
        if (wb_valid[g] && wb_ready[g]) begin
          int tok;
          logic [DATA_W-1:0] want;
          tok = g * T + int'(wb_rd[g]);
          want = '0;
          for (int k = 0; k < TOPK; k++) want = lane_add(want, expert_out(tok, route[tok][k]));
          chk(int'(wb_rd[g]) < T && wb_data[g] == want,
              $sformatf("GPU %0d token %0d reduced value", g, tok));
          m_wb++;
        end
        tick();
      end
    end
  end

  // ------------------------------------------------------------ SM issue
  task automatic issue(int g, bit st);
    for (int j = 0; j < T; j++) begin
      int tok;
      dyinst_t in;
      tok = g * T + j;
      in = '0;
      in.op = st ? RT_ST : RT_LDRED;
      in.rd = 8'(j);
      in.data = xvec[tok];
      in.stage = st ? STAGE_DISPATCH : STAGE_COMBINE;
      in.maddr = cfg_mbase[st ? 0 : 1] + MADDR_W'(tok) * BS;
      in.ntarget = NTGT_W'(TOPK);
      in.tbase = 32'(j * 64);
      inst[g] = in; inst_valid[g] = 1;
      forever begin
        bit t;
        #1; t = inst_ready[g];
        if (!t) m_qfull++;
        tick();
        if (t) break;
      end
      inst_valid[g] = 0;
    end
  endtask

  task automatic tbdone(int g, bit g2, int e, int r);
    tb_valid[g] = 1; tb_gemm2[g] = g2; tb_exp[g] = EWD'(e); tb_row[g] = 16'(r);
    forever begin bit t; #1; t = tb_ready[g]; tick(); if (t) break; end
    tb_valid[g] = 0;
  endtask

  function automatic int rows_of(int x);
    return (ntok_of[x] + TSIZE_T - 1) / TSIZE_T;
  endfunction

  int g1_seen = 0, g2_seen = 0;
  always @(posedge clk) begin
    g1_seen <= g1_seen + $countones(g1_evt);
    g2_seen <= g2_seen + $countones(g2_evt);
  end

  int phase_done [NG];

  initial begin
    int total_pairs, total_rows, ready_tok, hits, misses, allocs, notes;
    cfg_clear = 0; inst_valid = '0; tb_valid = '0; tb_gemm2 = '0; cons_valid = '0;
    for (int g = 0; g < NG; g++) begin
      inst[g] = '0; tb_exp[g] = '0; tb_row[g] = '0; q_exp[g] = '0; q_row[g] = '0;
      orq_tid[g] = '0; cons_tid[g] = '0;
    end
    cfg_mbase[0] = 48'h0100_0000; cfg_mbase[1] = 48'h0200_0000;
    for (int s = 0; s < 2; s++) for (int e = 0; e < E; e++) cfg_vbase[s][e] = (64'(s + 1) << 36) | (64'(e) << 28);
    cfg_bsize = BS; cfg_ntoken = NTOK; cfg_albase = 64'h1000_0000; cfg_tidbase = 64'h2000_0000;
    cfg_ntb1 = 2; cfg_ntb2 = 2; cfg_tok_log2 = 5'($clog2(T)); cfg_topk = 6'(TOPK);
    // gating
    for (int x = 0; x < NX; x++) ntok_of[x] = 0;
    total_pairs = 0;
    for (int t = 0; t < NTOK; t++) begin
      bit used [NX];
      for (int x = 0; x < NX; x++) used[x] = 0;
      xvec[t] = {$urandom, $urandom, $urandom, $urandom};
      for (int k = 0; k < TOPK; k++) begin
        int x;
        do x = $urandom_range(0, NX - 1); while (used[x]);
        used[x] = 1; route[t][k] = x; ntok_of[x]++; total_pairs++;
      end
    end
    for (int g = 0; g < NG; g++) for (int e = 0; e < E; e++) cfg_nactive[g][e] = ntok_of[g * E + e];
    // target lists in shared memory: 64 bytes per token, 8 IDs per 16-byte word
    for (int t = 0; t < NTOK; t++) begin
      int g, j;
      g = t / T; j = t % T;
      for (int k = 0; k < TOPK; k++) begin
        logic [31:0] a;
        a = 32'(j * 64 + (k / 8) * 16);
        if (!smem[g].exists(a)) smem[g][a] = '0;
        smem[g][a][(k % 8) * 16 +: 16] = 16'(route[t][k]);
      end
    end
    total_rows = 0;
    for (int x = 0; x < NX; x++) total_rows += rows_of(x);
    repeat (3) tick();
    rst_n = 1;
    repeat (2) tick();

    // ---------------- Dispatch
    for (int g = 0; g < NG; g++) phase_done[g] = 0;
    for (int g = 0; g < NG; g++) fork
      automatic int gg = g;
      begin issue(gg, 1); phase_done[gg] = 1; end
    join_none
    forever begin
      int n, nal;
      tick();
      n = 0; nal = 0;
      for (int g = 0; g < NG; g++) begin n += phase_done[g]; nal += st_alloc[g]; end
      if (n == NG && nal == total_pairs && g1_seen == total_rows) break;
    end
    repeat (20) tick();
    chk(st_replicas > st_requests, $sformatf("multicast: %0d replicas for %0d requests", st_replicas, st_requests));
    for (int x = 0; x < NX; x++) begin
      int g, e;
      logic [DATA_W-1:0] want [$];
      logic [DATA_W-1:0] got [$];
      g = x / E; e = x % E;
      for (int t = 0; t < NTOK; t++) for (int k = 0; k < TOPK; k++) if (route[t][k] == x) begin
        logic [63:0] al;
        want.push_back(xvec[t]);
        al = cfg_albase + 64'((e * NTOK + t) * 4);
        chk(dram4[g].exists(al) && dram4[g][al][31], $sformatf("AL entry expert %0d token %0d", x, t));
        // expert output for the Combine buffer at the same layout block
        if (dram4[g].exists(al))
          dram16[g][cfg_vbase[1][e] + 64'(dram4[g][al][30:0]) * BS] = expert_out(t, x);
      end
      for (int l = 0; l < ntok_of[x]; l++) begin
        logic [63:0] a;
        a = cfg_vbase[0][e] + 64'(l) * BS;
        got.push_back(dram16[g].exists(a) ? dram16[g][a] : '0);
      end
      want.sort(); got.sort();
      chk(want == got, $sformatf("expert %0d holds exactly its %0d tokens", x, ntok_of[x]));
      for (int r = 0; r < rows_of(x); r++) begin
        q_exp[g] = EWD'(e); q_row[g] = 16'(r); #1;
        chk(q_g1_ready[g] && !q_g2_ready[g], $sformatf("expert %0d row %0d GEMM-1 ready", x, r));
      end
    end

    tick();  // back in step with the clock after the #1 probes
    // ---------------- GEMM-1, GEMM-2 (per GPU in parallel)
    for (int g = 0; g < NG; g++) phase_done[g] = 0;
    for (int g = 0; g < NG; g++) fork
      automatic int gg = g;
      begin
        for (int e = 0; e < E; e++) for (int r = 0; r < rows_of(gg * E + e); r++) begin
          for (int b = 0; b < 2; b++) tbdone(gg, 0, e, r);
          q_exp[gg] = EWD'(e); q_row[gg] = 16'(r); #1;
          chk(q_g2_ready[gg], $sformatf("GPU %0d expert %0d row %0d GEMM-2 ready", gg, e, r));
          for (int b = 0; b < 2; b++) tbdone(gg, 1, e, r);
        end
        phase_done[gg] = 1;
      end
    join_none
    forever begin
      int n, rdy;
      tick();
      n = 0; rdy = 0;
      for (int g = 0; g < NG; g++) begin n += phase_done[g]; rdy += st_or_ready[g]; end
      if (n == NG && rdy == NTOK) break;
    end
    repeat (10) tick();
    chk(g2_seen == total_rows, $sformatf("GEMM-2 ready events %0d for %0d rows", g2_seen, total_rows));
    notes = 0;
    for (int g = 0; g < NG; g++) notes += st_notify[g];
    chk(notes == total_pairs, $sformatf("%0d notifications for %0d token-expert pairs", notes, total_pairs));
    ready_tok = 0;
    for (int g = 0; g < NG; g++) for (int j = 0; j < T; j++) begin
      orq_tid[g] = 32'(g * T + j); #1;
      chk(orq_ready[g], $sformatf("token %0d ready at its source", g * T + j));
      ready_tok += orq_ready[g];
    end
    tick();  // back in step with the clock after the #1 probes

    // ---------------- Combine
    for (int g = 0; g < NG; g++) phase_done[g] = 0;
    for (int g = 0; g < NG; g++) fork
      automatic int gg = g;
      begin issue(gg, 0); phase_done[gg] = 1; end
    join_none
    forever begin
      int n;
      tick();
      n = 0;
      for (int g = 0; g < NG; g++) n += phase_done[g];
      if (n == NG && m_wb == NTOK) break;
    end
    repeat (20) tick();
    // consume: the OR entries are released
    for (int g = 0; g < NG; g++) begin cons_valid[g] = 1; cons_tid[g] = 32'(g * T); end
    tick(); cons_valid = '0;
    for (int g = 0; g < NG; g++) begin orq_tid[g] = 32'(g * T); #1; chk(!orq_ready[g], "consumed token released"); end

    hits = 0; misses = 0; allocs = 0;
    for (int g = 0; g < NG; g++) begin hits += st_tlb_hit[g]; misses += st_tlb_miss[g]; allocs += st_alloc[g]; end
    chk(allocs == total_pairs, "one allocation per token-expert pair");
    chk(hits + misses == 2 * total_pairs, "one translation per target and stage");
    $display("mechanisms: replicas=%0d requests=%0d reductions=%0d tlb_hit=%0d tlb_miss=%0d alloc=%0d g1=%0d g2=%0d notify=%0d or_ready=%0d qfull_stalls=%0d wb_backpressure=%0d",
             st_replicas, st_requests, m_wb, hits, misses, allocs, g1_seen, g2_seen, notes, ready_tok, m_qfull, m_bp);
    chk(st_replicas > st_requests, "mechanism: multicast replication");
    chk(m_wb == NTOK, "mechanism: in-switch reduction");
    chk(misses > 0, "mechanism: TLB miss");
    chk(hits > 0, "mechanism: TLB hit");
    chk(allocs > 0, "mechanism: first-touch allocation");
    chk(g1_seen > 0, "mechanism: GEMM-1 ready");
    chk(g2_seen > 0, "mechanism: GEMM-2 ready");
    chk(notes > 0, "mechanism: notification");
    chk(ready_tok == NTOK, "mechanism: output readiness");
    chk(m_qfull > 0, "mechanism: MultimemQ full");
    chk(m_bp > 0, "mechanism: response back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
