// tb_dy_route: checks target-aware replication. First the published example
// (3 experts per GPU, targets 4, 9 -> one replica with target 4 to port 1
// and one with target 9 to port 3; the printed example also lists target 12
// under port 3, which the printed formula 12/3 = 4 sends to port 4, so the
// test checks 12 -> port 4), then random target lists with 8
// experts per GPU: the set of ports that get a replica must equal the set of
// Target/8 values, every replica must carry exactly its port's targets in
// order with #Target rewritten, each port is served once, and the input is
// accepted only with its last replica, under random output back-pressure;
// with no back-pressure a request with k ports takes k cycles.
module tb_dy_route;
  import dysharp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic tick(); @(posedge clk); #1; endtask

  localparam int NP = 32;
  logic in_valid, in_ready, in_valid3, in_ready3;
  req_pkt_t in_pkt, in_pkt3;
  logic out_valid, out_ready, out_valid3, out_ready3;
  logic [SRC_W-1:0] out_port, out_port3;
  req_pkt_t out_pkt, out_pkt3;

  dy_route #(.NPORTS(NP), .EXPERTS_PER_GPU(8)) dut (.*);
  dy_route #(.NPORTS(8), .EXPERTS_PER_GPU(3)) dut3 (.clk, .rst_n, .in_valid(in_valid3), .in_ready(in_ready3),
    .in_pkt(in_pkt3), .out_valid(out_valid3), .out_ready(out_ready3), .out_port(out_port3), .out_pkt(out_pkt3));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int got [NP];
    bit seen [NP];
    in_valid = 0; in_pkt = '0; out_ready = '0; in_valid3 = 0; in_pkt3 = '0; out_ready3 = '1;
    repeat (2) tick();
    rst_n = 1;
    // published example
    in_pkt3.hdr.rtype = RT_ST; in_pkt3.hdr.ntarget = 3;
    in_pkt3.tgts[0] = 4; in_pkt3.tgts[1] = 9; in_pkt3.tgts[2] = 12;
    in_valid3 = 1; #1;
    chk(out_valid3 && out_port3 == 1 && out_pkt3.hdr.ntarget == 1 && out_pkt3.tgts[0] == 4,
        "example port 1 gets target 4");
    chk(!in_ready3, "example not accepted with replicas left");
    tick(); #1;
    chk(out_valid3 && out_port3 == 3 && out_pkt3.hdr.ntarget == 1 && out_pkt3.tgts[0] == 9,
        "example port 3 gets target 9");
    tick(); #1;
    chk(out_valid3 && out_port3 == 4 && out_pkt3.hdr.ntarget == 1 && out_pkt3.tgts[0] == 12,
        "target 12 goes to port 12/3 = 4");
    chk(in_ready3, "example accepted with its last replica");
    tick(); in_valid3 = 0;

    for (int t = 0; t < 500; t++) begin
      int nt, cyc, nports;
      nt = $urandom_range(1, MAX_TARGETS);
      in_pkt = '0;
      in_pkt.hdr.rtype = RT_ST;
      in_pkt.hdr.tag = 12'($urandom);
      in_pkt.hdr.maddr = 48'($urandom);
      in_pkt.hdr.ntarget = 15'(nt);
      in_pkt.data = {$urandom, $urandom, $urandom, $urandom};
      for (int i = 0; i < nt; i++) in_pkt.tgts[i] = 16'($urandom_range(0, NP*8 - 1));
      for (int p = 0; p < NP; p++) begin got[p] = 0; seen[p] = 0; end
      in_valid = 1;
      cyc = 0;
      forever begin
        bit acc;
        out_ready = $urandom_range(0, 1) || (t % 4 == 0);
        #1;
        acc = in_ready;
        if (out_valid && out_ready) begin
          int k, p;
          k = 0;
          p = out_port;
          chk(!seen[p], "replica taken once");
          seen[p] = 1;
          for (int i = 0; i < nt; i++) if (in_pkt.tgts[i] / 8 == p) begin
            chk(out_pkt.tgts[k] == in_pkt.tgts[i], $sformatf("port %0d target %0d: %0d vs %0d nt=%0d", p, k, out_pkt.tgts[k], in_pkt.tgts[i], nt));
            k++;
          end
          chk(int'(out_pkt.hdr.ntarget) == k && k > 0, $sformatf("port %0d count", p));
          chk(out_pkt.data == in_pkt.data && out_pkt.hdr.maddr == in_pkt.hdr.maddr, "payload and address kept");
        end
        tick();
        cyc++;
        if (acc) break;
        if (cyc > 200) break;
      end
      nports = 0;
      for (int p = 0; p < NP; p++) nports += seen[p];
      for (int p = 0; p < NP; p++) begin
        bit need;
        need = 0;
        for (int i = 0; i < nt; i++) if (in_pkt.tgts[i] / 8 == p) need = 1;
        chk(seen[p] == need, $sformatf("packet %0d port %0d replica %0d expected %0d", t, p, seen[p], need));
      end
      if (t % 4 == 0) chk(cyc == nports, "no back-pressure: one cycle per destination port");
      in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
