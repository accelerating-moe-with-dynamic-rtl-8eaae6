// tb_dy_flit_rx: feeds flit images built in the testbench from the published
// packet layout and checks that the reassembled packet equals the packet the
// image was built from (header, requester port, live targets, byte enables,
// data), with random gaps on the link and random back-pressure on the output.
module tb_dy_flit_rx;
  import dysharp_pkg::*;
  logic clk = 0, rst_n = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc++;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic flit_valid, flit_ready, flit_last, pkt_valid, pkt_ready;
  logic [FLIT_W-1:0] flit;
  req_pkt_t pkt;
  dy_flit_rx dut (.*);

  function automatic int build(req_pkt_t p, ref logic [FLIT_W-1:0] f [40]);
    int n = 0;
    int nt = int'(p.hdr.ntarget);
    logic [82:0] h;
    h = {p.hdr.rtype, p.hdr.credit, p.hdr.tag, p.hdr.maddr, p.hdr.stage, p.hdr.ntarget};
    f[n++] = {25'd0, h, 12'd0, p.src};
    for (int k = 0; k < (nt + 7) / 8; k++) begin
      f[n] = '0;
      for (int j = 0; j < 8; j++) f[n][16*j +: 16] = p.tgts[8*k + j];
      n++;
    end
    if (p.hdr.rtype == RT_ST) begin
      f[n++] = {112'd0, p.be};
      f[n++] = p.data;
    end
    return n;
  endfunction

  req_pkt_t sent [$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver
  int received = 0;
  always @(posedge clk) if (rst_n) begin
    if (pkt_valid && pkt_ready) begin
      req_pkt_t e;
      e = sent.pop_front();
      chk(pkt.hdr == e.hdr, $sformatf("hdr %h vs %h", pkt.hdr, e.hdr));
      chk(pkt.src == e.src, "src");
      for (int i = 0; i < int'(e.hdr.ntarget); i++)
        chk(pkt.tgts[i] == e.tgts[i], $sformatf("target %0d", i));
      chk(pkt.be == e.be, "be");
      chk(pkt.data == e.data, "data");
      received++;
    end
  end

  task automatic tick(); @(posedge clk); #1; endtask

  initial begin
    logic [FLIT_W-1:0] f [40];
    req_pkt_t p;
    int n;
    flit_valid = 0; flit = '0; flit_last = 0; pkt_ready = 0;
    repeat (3) tick();
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      p = '0;
      p.hdr.rtype   = ($urandom_range(0, 1) == 0) ? RT_ST : RT_LDRED;
      p.hdr.tag     = 12'($urandom);
      p.hdr.credit  = 4'($urandom);
      p.hdr.maddr   = {16'($urandom), 32'($urandom)};
      p.hdr.stage   = (p.hdr.rtype == RT_ST) ? STAGE_DISPATCH : STAGE_COMBINE;
      p.hdr.ntarget = 15'($urandom_range(1, MAX_TARGETS));
      p.src         = 8'($urandom_range(0, 31));
      for (int i = 0; i < int'(p.hdr.ntarget); i++) p.tgts[i] = 16'($urandom);
      if (p.hdr.rtype == RT_ST) begin p.be = 16'($urandom); p.data = {$urandom, $urandom, $urandom, $urandom}; end
      n = build(p, f);
      sent.push_back(p);
      for (int k = 0; k < n; k++) begin
        while ($urandom_range(0, 3) == 0) begin flit_valid = 0; pkt_ready = ($urandom_range(0,1)==0); tick(); end
        flit_valid = 1; flit = f[k]; flit_last = (k == n - 1);
        forever begin
          bit taken;
          pkt_ready = ($urandom_range(0, 1) == 0);
          taken = flit_ready;
          tick();
          if (taken) break;
        end
      end
      flit_valid = 0;
    end
    pkt_ready = 1;
    repeat (5) tick();
    chk(received == 200, $sformatf("received %0d packets", received));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
