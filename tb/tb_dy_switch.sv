// tb_dy_switch: an 8-port switch (2 experts per GPU) driven through flit
// transmitters on every input and flit receivers on every output, with random
// back-pressure on all outputs. Every GPU sends random dymultimem.st and
// dymultimem.ld_reduce packets with 1..8 distinct target experts. The
// testbench checks
//  * multicast: each packet arrives once at every port owning one of its
//    targets, carrying exactly that port's targets in order, the requester
//    port stamped in, and header/payload unchanged; per (source, destination)
//    order is kept; no port receives a replica it has no target for;
//  * reduction: the GPUs answer each ld_reduce replica with one partial per
//    target; the requester receives exactly one response per ld_reduce, with
//    the lane-wise sum of all partials and its tag;
//  * the replica and request counters.
module tb_dy_switch;
  import dysharp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic tick(); @(posedge clk); #1; endtask

  localparam int N = 8, EPG = 2, NPKT = 60;

  logic [N-1:0] in_flit_valid, in_flit_ready, in_flit_last;
  logic [FLIT_W-1:0] in_flit [N];
  logic [N-1:0] out_flit_valid, out_flit_ready, out_flit_last;
  logic [FLIT_W-1:0] out_flit [N];
  logic [N-1:0] rsp_in_valid, rsp_in_ready, rsp_out_valid, rsp_out_ready;
  rsp_t rsp_in [N];
  rsp_t rsp_out [N];
  logic [31:0] n_replicas, n_requests;

  dy_switch #(.NPORTS(N), .EXPERTS_PER_GPU(EPG)) dut (.*);

  // GPU side: packet -> flits, flits -> packet
  logic [N-1:0] g_valid, g_ready, o_valid, o_ready;
  req_pkt_t g_pkt [N];
  req_pkt_t o_pkt [N];
  for (genvar p = 0; p < N; p++) begin : g_gpu
    dy_flit_tx u_tx (.clk, .rst_n, .pkt_valid(g_valid[p]), .pkt_ready(g_ready[p]), .pkt(g_pkt[p]),
                     .flit_valid(in_flit_valid[p]), .flit_ready(in_flit_ready[p]),
                     .flit(in_flit[p]), .flit_last(in_flit_last[p]));
    dy_flit_rx u_rx (.clk, .rst_n, .flit_valid(out_flit_valid[p]), .flit_ready(out_flit_ready[p]),
                     .flit(out_flit[p]), .flit_last(out_flit_last[p]),
                     .pkt_valid(o_valid[p]), .pkt_ready(o_ready[p]), .pkt(o_pkt[p]));
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  req_pkt_t exp_q [N][N][$];      // [dst][src]
  logic [DATA_W-1:0] sum_exp [N][int];   // [src][tag]
  int part_q_n [N][$];            // partials to send from port: count
  rsp_t part_q [N][$];
  int n_rep_exp = 0, n_req_exp = 0, n_rsp_got = 0, n_red = 0, n_rcv = 0, n_rep_total = 0;
  int sent_done [N];

  // senders
  for (genvar p = 0; p < N; p++) begin : g_send
    initial begin
      g_valid[p] = 0; g_pkt[p] = '0; sent_done[p] = 0;
      wait (rst_n);
      repeat (2) tick();
      for (int k = 0; k < NPKT; k++) begin
        req_pkt_t pk;
        int nt, ports [$];
        bit used [N*EPG];
        pk = '0;
        pk.hdr.rtype = $urandom_range(0, 1) ? RT_ST : RT_LDRED;
        pk.hdr.stage = (pk.hdr.rtype == RT_ST) ? STAGE_DISPATCH : STAGE_COMBINE;
        pk.hdr.tag = TAG_W'(k);
        pk.hdr.maddr = {$urandom, 16'($urandom)};
        pk.src = 8'hee;                // overwritten by the switch
        if (pk.hdr.rtype == RT_ST) begin
          pk.be = 16'($urandom); pk.data = {$urandom, $urandom, $urandom, $urandom};
        end
        nt = $urandom_range(1, 8);
        for (int i = 0; i < N * EPG; i++) used[i] = 0;
        for (int i = 0; i < nt; i++) begin
          int t;
          do t = $urandom_range(0, N * EPG - 1); while (used[t]);
          used[t] = 1;
          pk.tgts[i] = TGT_W'(t);
        end
        pk.hdr.ntarget = NTGT_W'(nt);
        // expected replicas
        for (int d = 0; d < N; d++) begin
          req_pkt_t r;
          int n;
          r = pk; r.src = SRC_W'(p); r.tgts = '0; n = 0;
          for (int i = 0; i < nt; i++) if (pk.tgts[i] / EPG == d) begin r.tgts[n] = pk.tgts[i]; n++; end
          r.hdr.ntarget = NTGT_W'(n);
          if (n > 0) begin exp_q[d][p].push_back(r); n_rep_exp++; end
        end
        if (pk.hdr.rtype == RT_LDRED) begin sum_exp[p][k] = '0; n_red++; end
        n_req_exp++;
        g_pkt[p] = pk; g_valid[p] = 1;
        forever begin bit t; #1; t = g_ready[p]; tick(); if (t) break; end
        g_valid[p] = 0;
        repeat ($urandom_range(0, 6)) tick();
      end
      sent_done[p] = 1;
    end
  end

  // receivers: check replica, queue partial responses for ld_reduce
  initial begin
    o_ready = '0;
    forever begin
      o_ready = N'($urandom);
      #1;
      for (int d = 0; d < N; d++) if (o_valid[d] && o_ready[d]) begin
        req_pkt_t g, x;
        int s;
        bit ok;
        g = o_pkt[d];
        s = g.src;
        n_rcv++;
        chk(s < N && exp_q[d][s].size() > 0, $sformatf("replica at port %0d from %0d expected", d, s));
        if (s < N && exp_q[d][s].size() > 0) begin
          x = exp_q[d][s].pop_front();
          ok = (g.hdr == x.hdr);
          for (int i = 0; i < int'(x.hdr.ntarget); i++) ok &= (g.tgts[i] == x.tgts[i]);
          if (x.hdr.rtype == RT_ST) ok &= (g.be == x.be && g.data == x.data);
          chk(ok, $sformatf("replica content at port %0d from %0d tag %0d", d, s, x.hdr.tag));
          if (x.hdr.rtype == RT_LDRED) for (int i = 0; i < int'(x.hdr.ntarget); i++) begin
            rsp_t r;
            r.dst = SRC_W'(s); r.tag = x.hdr.tag;
            r.data = {$urandom, $urandom, $urandom, $urandom};
            sum_exp[s][int'(x.hdr.tag)] = lane_add(sum_exp[s][int'(x.hdr.tag)], r.data);
            part_q[d].push_back(r);
          end
        end
      end
      tick();
    end
  end

  // partial responders and reduced-response checkers
  initial begin
    logic [N-1:0] taken;
    rsp_in_valid = '0; rsp_out_ready = '0;
    for (int d = 0; d < N; d++) rsp_in[d] = '0;
    forever begin
      for (int d = 0; d < N; d++) begin
        if (!rsp_in_valid[d] && part_q[d].size() > 0 && $urandom_range(0, 2) != 0) begin
          rsp_in[d] = part_q[d].pop_front(); rsp_in_valid[d] = 1;
        end
      end
      rsp_out_ready = N'($urandom);
      #1;
      for (int s = 0; s < N; s++) if (rsp_out_valid[s] && rsp_out_ready[s]) begin
        int tg;
        tg = int'(rsp_out[s].tag);
        n_rsp_got++;
        chk(int'(rsp_out[s].dst) == s, "reduced response returns to its requester");
        chk(sum_exp[s].exists(tg) && rsp_out[s].data == sum_exp[s][tg],
            $sformatf("reduced sum for port %0d tag %0d", s, tg));
        sum_exp[s].delete(tg);
      end
      taken = rsp_in_valid & rsp_in_ready;
      tick();
      rsp_in_valid &= ~taken;
    end
  end

  initial begin
    wait (rst_n);
    forever begin
      int done;
      tick();
      done = 0;
      for (int p = 0; p < N; p++) done += sent_done[p];
      if (done == N && n_rsp_got == n_red && n_rcv == n_rep_exp) break;
    end
    repeat (10) tick();
    for (int d = 0; d < N; d++) for (int s = 0; s < N; s++) chk(exp_q[d][s].size() == 0, "every replica delivered");
    chk(n_requests == 32'(n_req_exp), $sformatf("request counter %0d expected %0d", n_requests, n_req_exp));
    chk(n_replicas == 32'(n_rep_exp), $sformatf("replica counter %0d expected %0d", n_replicas, n_rep_exp));
    chk(n_rep_exp > n_req_exp, "multicast produced more replicas than requests");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) tick();
    rst_n = 1;
  end
endmodule
