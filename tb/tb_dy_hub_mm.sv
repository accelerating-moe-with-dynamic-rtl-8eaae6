// tb_dy_hub_mm: drives Dispatch stores and Combine ld_reduces into the hub
// memory manager over a DRAM model with random latency and back-pressure.
// A reference model of the AL mapping (per-expert first-touch counters)
// predicts, in order, every allocation event, every data write address
// (VBase[Dispatch][e] + LIdx*bsize + offset) and every store-done event; for
// Combine it predicts every partial response (address VBase[Combine][e] +
// LIdx*bsize + offset, tag, destination port). At the end the AL Table
// entries in DRAM, the hit/miss/allocation counters and the reset of the
// counters by cfg_clear are checked.
module tb_dy_hub_mm;
  import dysharp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic tick(); @(posedge clk); #1; endtask

  localparam int E = 8;
  localparam int GPU = 5;
  localparam logic [31:0] BSIZE = 64;
  localparam logic [31:0] NTOK  = 256;
  localparam logic [63:0] ALBASE = 64'h7000_0000;

  logic cfg_clear;
  logic [MADDR_W-1:0] cfg_mbase [2];
  logic [VADDR_W-1:0] cfg_vbase [2][E];
  logic [31:0] cfg_bsize, cfg_ntoken;
  logic [VADDR_W-1:0] cfg_albase;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  req_pkt_t req;
  rsp_t rsp;
  logic mem_valid, mem_ready, mem_we, mem_word, mem_rvalid;
  logic [VADDR_W-1:0] mem_addr;
  logic [DATA_W-1:0] mem_wdata, mem_rdata;
  logic alloc_valid, alloc_ready, stdone_valid, stdone_ready;
  logic [2:0] alloc_exp, stdone_exp;
  logic [LIDX_W-1:0] alloc_lidx, stdone_lidx;
  logic [31:0] alloc_aidx;
  logic [15:0] stdone_bytes;
  logic [31:0] n_hit, n_miss, n_alloc;

  dy_hub_mm #(.EXPERTS_PER_GPU(E), .TLB_ENTRIES(512)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- DRAM
  logic [127:0] m16 [logic [63:0]];
  logic [31:0]  m4  [logic [63:0]];
  function automatic logic [127:0] pattern(logic [63:0] a);
    return {a[31:0] ^ 32'h1111, a[31:0] ^ 32'h2222, a[31:0] ^ 32'h3333, a[31:0]};
  endfunction
  logic [63:0] wr_q [$];   // observed data writes (address)
  logic [127:0] wrd_q [$];
  int n_mem = 0;
  initial begin
    mem_ready = 0; mem_rvalid = 0; mem_rdata = '0;
    forever begin
      logic [63:0] a; logic w, wd; logic [127:0] d;
      mem_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (mem_valid && mem_ready) begin
        a = mem_addr; w = mem_we; wd = mem_word; d = mem_wdata;
        tick(); mem_ready = 0;
        repeat ($urandom_range(0, 3)) tick();
        if (w) begin
          if (wd) m4[a] = d[31:0];
          else begin m16[a] = d; wr_q.push_back(a); wrd_q.push_back(d); end
          mem_rdata = '0;
        end else if (wd) mem_rdata = 128'(m4.exists(a) ? m4[a] : 32'h0);
        else mem_rdata = m16.exists(a) ? m16[a] : pattern(a);
        n_mem++;
        mem_rvalid = 1; tick(); mem_rvalid = 0;
      end else tick();
    end
  end

  // ---------------------------------------------------------------- reference
  int lmap [E][int];            // aidx -> lidx
  int cnt [E];
  typedef struct { int e; int lidx; int aidx; } ev_t;
  ev_t exp_alloc [$];
  ev_t exp_stdone [$];          // aidx field holds bytes
  logic [63:0] exp_wr [$];
  logic [127:0] exp_wrd [$];
  rsp_t exp_rsp [$];
  int n_acc = 0;

  task automatic send(bit st, int aidx, int off, int es[$], bit [7:0] src, bit [11:0] tag);
    req_pkt_t p;
    p = '0;
    p.hdr.rtype = st ? RT_ST : RT_LDRED;
    p.hdr.stage = st ? STAGE_DISPATCH : STAGE_COMBINE;
    p.hdr.maddr = cfg_mbase[st ? 0 : 1] + MADDR_W'(aidx) * BSIZE + MADDR_W'(off);
    p.hdr.ntarget = NTGT_W'(es.size());
    p.hdr.tag = tag;
    p.src = src;
    p.be = 16'($urandom) | 16'h1;
    p.data = {$urandom, $urandom, $urandom, $urandom};
    foreach (es[i]) begin
      int e, l;
      e = es[i];
      p.tgts[i] = TGT_W'(GPU * E + e);
      n_acc++;
      if (st) begin
        if (!lmap[e].exists(aidx)) begin
          lmap[e][aidx] = cnt[e]; cnt[e]++;
          exp_alloc.push_back('{e, lmap[e][aidx], aidx});
        end
        l = lmap[e][aidx];
        exp_wr.push_back(cfg_vbase[0][e] + 64'(l) * BSIZE + 64'(off));
        exp_wrd.push_back(p.data);
        exp_stdone.push_back('{e, l, $countones(p.be)});
      end else begin
        rsp_t r; logic [63:0] a;
        l = lmap[e][aidx];
        a = cfg_vbase[1][e] + 64'(l) * BSIZE + 64'(off);
        r.dst = src; r.tag = tag;
        r.data = m16.exists(a) ? m16[a] : pattern(a);
        exp_rsp.push_back(r);
      end
    end
    req = p; req_valid = 1;
    forever begin bit t; #1; t = req_ready; tick(); if (t) break; end
    req_valid = 0;
  endtask

  // ---------------------------------------------------------------- monitors
  initial begin
    alloc_ready = 0; stdone_ready = 0; rsp_ready = 0;
    forever begin
      alloc_ready = $urandom_range(0, 1); stdone_ready = $urandom_range(0, 1);
      rsp_ready = $urandom_range(0, 1);
      #1;
      if (alloc_valid && alloc_ready) begin
        chk(exp_alloc.size() > 0, "unexpected allocation");
        if (exp_alloc.size() > 0) begin
          ev_t x;
          x = exp_alloc.pop_front();
          chk(alloc_exp == x.e && alloc_lidx == x.lidx && alloc_aidx == x.aidx,
              $sformatf("alloc e%0d l%0d a%0d, expected e%0d l%0d a%0d",
                        alloc_exp, alloc_lidx, alloc_aidx, x.e, x.lidx, x.aidx));
        end
      end
      if (stdone_valid && stdone_ready) begin
        chk(exp_stdone.size() > 0, "unexpected store done");
        if (exp_stdone.size() > 0) begin
          ev_t x;
          x = exp_stdone.pop_front();
          chk(stdone_exp == x.e && stdone_lidx == x.lidx && stdone_bytes == x.aidx, "store done event");
        end
        // the write must already be in memory
        chk(wr_q.size() > 0, "store done after its write");
        if (wr_q.size() > 0) begin
          chk(exp_wr.size() > 0 && wr_q[0] == exp_wr[0] && wrd_q[0] == exp_wrd[0],
              $sformatf("write address %h expected %h", wr_q[0], exp_wr[0]));
          void'(wr_q.pop_front()); void'(wrd_q.pop_front());
          if (exp_wr.size() > 0) begin void'(exp_wr.pop_front()); void'(exp_wrd.pop_front()); end
        end
      end
      if (rsp_valid && rsp_ready) begin
        chk(exp_rsp.size() > 0, "unexpected response");
        if (exp_rsp.size() > 0) begin
          rsp_t x;
          x = exp_rsp.pop_front();
          chk(rsp == x, $sformatf("response %h expected %h", rsp.data, x.data));
        end
      end
      tick();
    end
  end

  initial begin
    int es [$];
    int n_before;
    cfg_clear = 0; req_valid = 0; req = '0;
    cfg_mbase[0] = 48'h1_0000; cfg_mbase[1] = 48'h80_0000;
    for (int s = 0; s < 2; s++) for (int e = 0; e < E; e++)
      cfg_vbase[s][e] = (64'(s + 1) << 40) | (64'(e) << 28);
    cfg_bsize = BSIZE; cfg_ntoken = NTOK; cfg_albase = ALBASE;
    for (int e = 0; e < E; e++) cnt[e] = 0;
    repeat (2) tick();
    rst_n = 1;
    // Dispatch
    for (int k = 0; k < 300; k++) begin
      int n;
      es.delete();
      n = $urandom_range(1, 4);
      while (es.size() < n) begin
        int e; bit dup;
        e = $urandom_range(0, E - 1); dup = 0;
        foreach (es[i]) if (es[i] == e) dup = 1;
        if (!dup) es.push_back(e);
      end
      send(1, $urandom_range(0, 63), 16 * $urandom_range(0, 3), es, 8'd0, 12'(k));
    end
    // Combine: every dispatched (token, expert)
    for (int k = 0; k < 200; k++) begin
      int a;
      es.delete();
      a = $urandom_range(0, 63);
      for (int e = 0; e < E; e++) if (lmap[e].exists(a)) es.push_back(e);
      if (es.size() > 0) send(0, a, 16 * $urandom_range(0, 3), es, 8'($urandom_range(0, 31)), 12'(k));
    end
    wait (exp_rsp.size() == 0 && exp_stdone.size() == 0);
    repeat (20) tick();
    chk(exp_alloc.size() == 0, "all allocations seen");
    begin
      int na;
      na = 0;
      for (int e = 0; e < E; e++) begin
        na += cnt[e];
        foreach (lmap[e][a]) begin
          logic [63:0] ad;
          ad = ALBASE + 64'((e * NTOK + a) * 4);
          chk(m4.exists(ad) && m4[ad] == {1'b1, 31'(lmap[e][a])}, $sformatf("AL entry e%0d a%0d", e, a));
        end
      end
      chk(n_alloc == na, $sformatf("n_alloc %0d expected %0d", n_alloc, na));
      chk(n_hit + n_miss == n_acc, "every target looked up once");
      chk(n_miss >= n_alloc && n_hit > 0, $sformatf("hits %0d misses %0d", n_hit, n_miss));
    end
    // new layer: runtime zeroes the AL Table, the hub resets counters and TLB
    m4.delete();
    for (int e = 0; e < E; e++) begin lmap[e].delete(); cnt[e] = 0; end
    cfg_clear = 1; tick(); cfg_clear = 0;
    n_before = n_hit;
    es.delete(); es.push_back(3);
    send(1, 7, 0, es, 8'd0, 12'd1);
    wait (exp_stdone.size() == 0);
    repeat (5) tick();
    chk(n_hit == n_before, "TLB empty after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
