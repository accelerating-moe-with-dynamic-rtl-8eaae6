// tb_dy_mmq_lsu: drives dymultimem instructions into the LSU extension with a
// shared-memory model that returns target words after a fixed latency, and
// checks every issued request packet (type, address, stage, count, the target
// list read from memory, data and byte enables), program order, unique
// ld_reduce tags, and the register writeback of reduced responses. Timing
// checks: target words of one instruction are fetched one per cycle (a
// 4-word list issues exactly 3 cycles later than a 1-word list), and with
// a busy network the 32-entry MultimemQ fills and then back-pressures.
module tb_dy_mmq_lsu;
  import dysharp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic tick(); @(posedge clk); #1; endtask

  localparam int L = 3;
  logic inst_valid, inst_ready, tf_req_valid, tf_req_ready, tf_rsp_valid;
  dyinst_t inst;
  logic [31:0] tf_req_addr;
  logic [FLIT_W-1:0] tf_rsp_data;
  logic pkt_valid, pkt_ready, resp_valid, resp_ready, wb_valid, wb_ready;
  req_pkt_t pkt;
  rsp_t resp;
  logic [7:0] wb_rd;
  logic [DATA_W-1:0] wb_data;

  dy_mmq_lsu #(.GPU_ID(8'd5)) dut (.*);

  int unsigned cyc = 0;
  always @(posedge clk) cyc++;

  // ---- shared memory with the target lists: target at byte address a is f(a)
  function automatic logic [15:0] tgt_at(logic [31:0] a);
    return 16'((a * 32'd2654435761) >> 16);
  endfunction
  logic [FLIT_W-1:0] rq_data [$];
  int unsigned       rq_time [$];
  always @(posedge clk) begin
    if (rst_n && tf_req_valid && tf_req_ready) begin
      logic [FLIT_W-1:0] w;
      for (int j = 0; j < 8; j++) w[16*j +: 16] = tgt_at(tf_req_addr + 32'(2*j));
      rq_data.push_back(w);
      rq_time.push_back(cyc + L);
    end
  end
  always @(negedge clk) begin
    tf_rsp_valid = 0;
    if (rq_time.size() > 0 && rq_time[0] <= cyc) begin
      tf_rsp_valid = 1;
      tf_rsp_data  = rq_data.pop_front();
      void'(rq_time.pop_front());
    end
  end

  // ---- expected packets
  dyinst_t exp_q [$];
  int      issue_cyc [$];
  logic [7:0] tag_rd [logic [11:0]];
  int n_pkts = 0;
  logic [11:0] rsp_q [$];
  int n_wb = 0;
  bit rsp_on = 0;

  always @(posedge clk) begin
    if (rst_n && pkt_valid && pkt_ready) begin
      dyinst_t e;
      e = exp_q.pop_front();
      issue_cyc.push_back(cyc);
      chk(pkt.hdr.rtype == e.op, "rtype");
      chk(pkt.hdr.maddr == e.maddr, "maddr");
      chk(pkt.hdr.stage == e.stage, "stage");
      chk(pkt.hdr.ntarget == e.ntarget, "ntarget");
      chk(pkt.src == 8'd5, "src");
      for (int i = 0; i < int'(e.ntarget); i++)
        chk(pkt.tgts[i] == tgt_at(e.tbase + 32'(2*i)), $sformatf("target %0d", i));
      if (e.op == RT_ST) begin
        chk(pkt.data == e.data && pkt.be == 16'hffff, "store payload");
      end else begin
        chk(!tag_rd.exists(pkt.hdr.tag), "ld_reduce tag unique among pending");
        tag_rd[pkt.hdr.tag] = e.rd;
        rsp_q.push_back(pkt.hdr.tag);
      end
      n_pkts++;
    end
  end

  // reduced responses come back some cycles later, in issue order
  logic [127:0] rsp_d;
  always @(negedge clk) begin
    if (rst_n && rsp_on) begin
      if (resp_valid && resp_ready) begin
        chk(wb_valid && wb_rd == tag_rd[resp.tag] && wb_data == rsp_d, $sformatf("writeback of tag %0d", resp.tag));
        tag_rd.delete(resp.tag);
        void'(rsp_q.pop_front());
        n_wb++;
      end
      resp_valid = 0;
      if (rsp_q.size() > 0 && $urandom_range(0, 2) == 0) begin
        rsp_d = {$urandom, $urandom, $urandom, $urandom};
        resp.tag = rsp_q[0]; resp.dst = 8'd5; resp.data = rsp_d; resp_valid = 1;
        wb_ready = ($urandom_range(0, 3) != 0);
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(dyinst_t i);
    inst = i; inst_valid = 1;
    forever begin bit t; #1; t = inst_ready; tick(); if (t) break; end
    exp_q.push_back(i);
    inst_valid = 0;
  endtask

  function automatic dyinst_t rnd(int nt, bit red);
    dyinst_t i;
    i.op = red ? RT_LDRED : RT_ST;
    i.rd = 8'($urandom);
    i.data = {$urandom, $urandom, $urandom, $urandom};
    i.maddr = {16'($urandom), 32'($urandom)};
    i.ntarget = 15'(nt);
    i.tbase = 32'($urandom_range(0, 4095)) * 16;
    i.stage = red ? STAGE_COMBINE : STAGE_DISPATCH;
    return i;
  endfunction

  int lat1, lat4, t0, full_seen;
  initial begin
    inst_valid = 0; inst = '0; tf_req_ready = 1; pkt_ready = 1; resp_valid = 0; resp = '0; wb_ready = 1;
    repeat (3) tick();
    rst_n = 1;
    tick();
    // latency of a 1-word and a 4-word target list, network always ready
    t0 = cyc; send(rnd(8, 0));
    wait (issue_cyc.size() == 1); lat1 = issue_cyc[0] - t0;
    tick();
    t0 = cyc; send(rnd(32, 0));
    wait (issue_cyc.size() == 2); lat4 = issue_cyc[1] - t0;
    chk(lat4 - lat1 == 3, $sformatf("4-word list %0d cycles vs 1-word %0d", lat4, lat1));
    // fill the queue while the network is busy
    pkt_ready = 0;
    full_seen = 0;
    for (int k = 0; k < 40; k++) begin
      if (!inst_ready) full_seen++;
      if (k < 32) send(rnd($urandom_range(1, 32), $urandom_range(0, 1)));
      else tick();
    end
    chk(!inst_ready, "MultimemQ full after 32 instructions");
    pkt_ready = 1;
    rsp_on = 1;
    // random stream with random back-pressure
    fork
      for (int k = 0; k < 300; k++) send(rnd($urandom_range(1, 32), $urandom_range(0, 1)));
      repeat (3000) begin pkt_ready = ($urandom_range(0, 3) != 0); tf_req_ready = ($urandom_range(0, 3) != 0); tick(); end
    join_any
    pkt_ready = 1; tf_req_ready = 1;
    wait (exp_q.size() == 0);
    tick();
    chk(n_pkts == 334, $sformatf("issued %0d packets", n_pkts));
    wait (rsp_q.size() == 0);
    repeat (3) tick();
    chk(n_wb > 100, $sformatf("%0d reduced responses written back", n_wb));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
