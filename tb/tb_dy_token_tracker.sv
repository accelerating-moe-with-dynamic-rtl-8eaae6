// tb_dy_token_tracker: runs the Dispatch -> GEMM-1 -> GEMM-2 -> Combine
// chain through the token tracker (TSIZE reduced to 4 tokens so that many
// tiles, including partial last tiles, are exercised). Layout blocks are
// allocated in random expert order and filled by several stores each; the
// testbench checks that a row reads GEMM-1 ready exactly when all bytes of
// its tokens have arrived, GEMM-2 ready exactly when all GEMM-1 thread
// blocks have finished, and that finishing the GEMM-2 thread blocks sends one notification
// per token of the tile (read back from the TID Table in the DRAM model, in
// slot order), to the token's source GPU, and frees the entry. A
// conflicting allocation onto a live entry must stall.
module tb_dy_token_tracker;
  import dysharp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic tick(); @(posedge clk); #1; endtask

  localparam int E = 8, TS = 4, NTS = 64;
  localparam int BS = 64, NTB1 = 3, NTB2 = 2;

  logic cfg_clear;
  logic [31:0] cfg_bsize;
  logic [31:0] cfg_nactive [E];
  logic [15:0] cfg_ntb1, cfg_ntb2;
  logic [VADDR_W-1:0] cfg_tidbase;
  logic [4:0] cfg_tok_log2;
  logic alloc_valid, alloc_ready, st_valid, st_ready, tb_valid, tb_ready, tb_gemm2;
  logic [2:0] alloc_exp, st_exp, tb_exp, q_exp;
  logic [LIDX_W-1:0] alloc_lidx, st_lidx;
  logic [31:0] alloc_aidx;
  logic [15:0] st_bytes, tb_row, q_row;
  logic q_g1_ready, q_g2_ready, g1_evt, g2_evt;
  logic mem_valid, mem_ready, mem_we, mem_rvalid;
  logic [VADDR_W-1:0] mem_addr;
  logic [31:0] mem_wdata, mem_rdata;
  logic ntf_valid, ntf_ready;
  logic [SRC_W-1:0] ntf_dst;
  logic [31:0] ntf_tid, n_notify;

  dy_token_tracker #(.TS_ENTRIES(NTS), .TSIZE(TS), .EXPERTS_PER_GPU(E)) dut (.*);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  // DRAM model, 32-bit words
  logic [31:0] m4 [logic [63:0]];
  initial begin
    mem_ready = 0; mem_rvalid = 0; mem_rdata = '0;
    forever begin
      logic [63:0] a; logic w; logic [31:0] d;
      mem_ready = ($urandom_range(0, 2) != 0);
      #1;
      if (mem_valid && mem_ready) begin
        a = mem_addr; w = mem_we; d = mem_wdata;
        tick(); mem_ready = 0;
        repeat ($urandom_range(0, 3)) tick();
        if (w) m4[a] = d;
        mem_rdata = w ? 32'h0 : (m4.exists(a) ? m4[a] : 32'hdead);
        mem_rvalid = 1; tick(); mem_rvalid = 0;
      end else tick();
    end
  end

  // notification monitor
  int ntf_got [$];
  int g1_pulses = 0, g2_pulses = 0;
  initial begin
    ntf_ready = 0;
    forever begin
      ntf_ready = $urandom_range(0, 1);
      #1;
      if (g1_evt) g1_pulses++;
      if (g2_evt) g2_pulses++;
      if (ntf_valid && ntf_ready) begin
        chk(ntf_dst == SRC_W'(ntf_tid >> 4), "notification goes to the token's source GPU");
        ntf_got.push_back(ntf_tid);
      end
      tick();
    end
  end

  task automatic do_alloc(int e, int l, int a);
    alloc_valid = 1; alloc_exp = 3'(e); alloc_lidx = LIDX_W'(l); alloc_aidx = a;
    forever begin bit t; #1; t = alloc_ready; tick(); if (t) break; end
    alloc_valid = 0;
  endtask
  task automatic do_st(int e, int l, int b);
    st_valid = 1; st_exp = 3'(e); st_lidx = LIDX_W'(l); st_bytes = 16'(b);
    forever begin bit t; #1; t = st_ready; tick(); if (t) break; end
    st_valid = 0;
  endtask
  task automatic do_tb(bit g2, int e, int r);
    tb_valid = 1; tb_gemm2 = g2; tb_exp = 3'(e); tb_row = 16'(r);
    forever begin bit t; #1; t = tb_ready; tick(); if (t) break; end
    tb_valid = 0;
  endtask
  task automatic query(int e, int r, output bit g1, output bit g2);
    q_exp = 3'(e); q_row = 16'(r); #1; g1 = q_g1_ready; g2 = q_g2_ready;
  endtask

  int nact [E];
  int tok [E][int];        // lidx -> token id
  int nxt [E];
  int bytes [E][int];      // row -> bytes arrived
  int rows_total = 0;

  function automatic int tile_tok(int e, int r);
    int left;
    left = nact[e] - r * TS;
    return left > TS ? TS : left;
  endfunction

  initial begin
    int tokid;
    bit g1, g2;
    cfg_clear = 0; alloc_valid = 0; st_valid = 0; tb_valid = 0; tb_gemm2 = 0;
    alloc_exp = 0; alloc_lidx = 0; alloc_aidx = 0; st_exp = 0; st_lidx = 0; st_bytes = 0;
    tb_exp = 0; tb_row = 0; q_exp = 0; q_row = 0;
    cfg_bsize = BS; cfg_ntb1 = NTB1; cfg_ntb2 = NTB2; cfg_tidbase = 64'h4000_0000; cfg_tok_log2 = 4;
    tokid = 0;
    for (int e = 0; e < E; e++) begin
      nact[e] = $urandom_range(1, 11); nxt[e] = 0;
      cfg_nactive[e] = nact[e];
      rows_total += (nact[e] + TS - 1) / TS;
    end
    repeat (2) tick();
    rst_n = 1;
    // Dispatch: allocate and fill layout blocks in random expert order
    begin
      int left;
      left = 0;
      for (int e = 0; e < E; e++) left += nact[e];
      while (left > 0) begin
        int e, l, r;
        e = $urandom_range(0, E - 1);
        if (nxt[e] == nact[e]) continue;
        l = nxt[e]; nxt[e]++; left--;
        r = l / TS;
        tok[e][l] = $urandom_range(0, 511);
        do_alloc(e, l, tok[e][l]);
        for (int s = 0; s < 4; s++) begin
          query(e, r, g1, g2);
          chk(!g1, $sformatf("e%0d row %0d not GEMM-1 ready before its bytes", e, r));
          do_st(e, l, BS / 4);
          if (!bytes[e].exists(r)) bytes[e][r] = 0;
          bytes[e][r] += BS / 4;
        end
        query(e, r, g1, g2);
        chk(g1 == (bytes[e][r] == tile_tok(e, r) * BS),
            $sformatf("e%0d row %0d GEMM-1 ready %0d with %0d bytes", e, r, g1, bytes[e][r]));
        chk(!g2, "GEMM-2 not ready before GEMM-1");
      end
    end
    repeat (3) tick();
    chk(g1_pulses == rows_total, $sformatf("%0d GEMM-1 ready events for %0d rows", g1_pulses, rows_total));
    // conflict: row NTS/E of expert 0 maps onto row 0
    alloc_valid = 1; alloc_exp = 0; alloc_lidx = LIDX_W'(TS * (NTS / E)); alloc_aidx = 0; #1;
    chk(!alloc_ready, "allocation onto a live entry stalls");
    alloc_valid = 0;
    // GEMM-1 and GEMM-2 thread blocks, row by row in random order
    for (int e = 0; e < E; e++) for (int r = 0; r < (nact[e] + TS - 1) / TS; r++) begin
      int want [$];
      want.delete();
      for (int t = 0; t < NTB1; t++) begin
        query(e, r, g1, g2);
        chk(!g2, "GEMM-2 waits for all GEMM-1 TBs");
        do_tb(0, e, r);
      end
      query(e, r, g1, g2);
      chk(g2, $sformatf("e%0d row %0d GEMM-2 ready", e, r));
      ntf_got.delete();
      for (int t = 0; t < NTB2; t++) do_tb(1, e, r);
      for (int s = 0; s < tile_tok(e, r); s++) want.push_back(tok[e][r * TS + s]);
      fork
        wait (ntf_got.size() == want.size());
        repeat (2000) @(posedge clk);
      join_any
      disable fork;
      repeat (5) tick();
      chk(ntf_got.size() == want.size(), $sformatf("e%0d row %0d: %0d notifications, want %0d",
                                                   e, r, ntf_got.size(), want.size()));
      foreach (want[i]) chk(i < ntf_got.size() && ntf_got[i] == want[i], "notified token in slot order");
      query(e, r, g1, g2);
      chk(!g1 && !g2, "entry freed after Combine notifications");
    end
    chk(g2_pulses == rows_total, "one GEMM-2 ready event per row");
    chk(n_notify == 32'(nact[0] + nact[1] + nact[2] + nact[3] + nact[4] + nact[5] + nact[6] + nact[7]),
        "one notification per dispatched token");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
