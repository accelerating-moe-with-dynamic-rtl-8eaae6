// tb_dy_flit_tx: checks the packet serialiser against flit images built
// independently in the testbench from the published field layout (flit0 =
// {CRC 25b, header 83b, DL header 20b}, eight 16-bit targets per extension
// flit, byte-enable flit and payload for stores), and checks that a packet of
// F flits takes exactly F cycles with the link always ready. Random
// back-pressure is applied in a second phase.
module tb_dy_flit_tx;
  import dysharp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic pkt_valid, pkt_ready, flit_valid, flit_ready, flit_last;
  req_pkt_t pkt;
  logic [FLIT_W-1:0] flit;

  dy_flit_tx dut (.*);

  // expected flit image
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

  function automatic req_pkt_t rand_pkt();
    req_pkt_t p;
    p = '0;
    p.hdr.rtype   = ($urandom_range(0, 1) == 0) ? RT_ST : RT_LDRED;
    p.hdr.credit  = 4'($urandom);
    p.hdr.tag     = 12'($urandom);
    p.hdr.maddr   = {16'($urandom), 32'($urandom)};
    p.hdr.stage   = (p.hdr.rtype == RT_ST) ? STAGE_DISPATCH : STAGE_COMBINE;
    p.hdr.ntarget = 15'($urandom_range(1, MAX_TARGETS));
    p.src         = 8'($urandom_range(0, 31));
    for (int i = 0; i < MAX_TARGETS; i++) p.tgts[i] = (i < int'(p.hdr.ntarget)) ? 16'($urandom) : 16'h0;
    p.be   = (p.hdr.rtype == RT_ST) ? 16'hffff : 16'h0;
    p.data = (p.hdr.rtype == RT_ST) ? {$urandom, $urandom, $urandom, $urandom} : '0;
    return p;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask

  initial begin
    logic [FLIT_W-1:0] exp_f [40];
    int n, got, cyc;
    bit bp;
    pkt_valid = 0; flit_ready = 0; pkt = '0;
    repeat (3) tick();
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      bp = (t >= 100);
      pkt = rand_pkt();
      n = build(pkt, exp_f);
      pkt_valid = 1;
      got = 0; cyc = 0;
      while (got < n) begin
        flit_ready = bp ? ($urandom_range(0, 2) != 0) : 1'b1;
        #1;
        if (flit_valid && flit_ready) begin
          chk(flit == exp_f[got], $sformatf("pkt %0d flit %0d: %h vs %h", t, got, flit, exp_f[got]));
          chk(flit_last == (got == n - 1), $sformatf("pkt %0d flit %0d last", t, got));
          chk(pkt_ready == (got == n - 1), "pkt_ready with last flit");
          got++;
        end
        tick();
        cyc++;
        if (cyc > 1000) break;
      end
      if (!bp) chk(cyc == n, $sformatf("pkt %0d took %0d cycles for %0d flits", t, cyc, n));
      pkt_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
