// tb_dy_notify_net: every GPU sends notifications to random destinations
// under random output back-pressure; the testbench checks that each
// destination receives exactly the multiset of token IDs addressed to it,
// that each source's notifications to one destination keep their order, and
// that with distinct destinations all inputs pass in one cycle.
module tb_dy_notify_net;
  import dysharp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic tick(); @(posedge clk); #1; endtask

  localparam int N = 32;
  logic [N-1:0] in_valid, in_ready, out_valid, out_ready;
  logic [7:0]   in_dst [N];
  logic [31:0]  in_tid [N];
  logic [31:0]  out_tid [N];
  dy_notify_net #(.NGPU(N)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_q [N][N][$];   // [dst][src]
  int left [N];
  int got = 0;

  initial begin
    logic [N-1:0] taken;
    in_valid = '0; out_ready = '0;
    for (int s = 0; s < N; s++) begin in_dst[s] = 0; in_tid[s] = 0; end
    repeat (2) tick();
    rst_n = 1;
    // permutation: all pass at once
    for (int s = 0; s < N; s++) begin in_valid[s] = 1; in_dst[s] = 8'((s + 5) % N); in_tid[s] = s; end
    out_ready = '1; #1;
    chk(in_ready == '1 && out_valid == '1, "distinct destinations pass together");
    for (int s = 0; s < N; s++) chk(out_tid[(s + 5) % N] == s, "permutation routing");
    tick(); in_valid = '0;
    // random traffic
    for (int s = 0; s < N; s++) left[s] = 50;
    while (got < N * 50) begin
      for (int s = 0; s < N; s++) if (!in_valid[s] && left[s] > 0 && $urandom_range(0, 1)) begin
        in_valid[s] = 1; in_dst[s] = 8'($urandom_range(0, N - 1)); in_tid[s] = (s << 16) | left[s];
        exp_q[in_dst[s]][s].push_back(in_tid[s]);
        left[s]--;
      end
      out_ready = N'($urandom);
      #1;
      for (int d = 0; d < N; d++) if (out_valid[d] && out_ready[d]) begin
        int s;
        s = out_tid[d] >> 16;
        chk(exp_q[d][s].size() > 0 && exp_q[d][s][0] == out_tid[d], $sformatf("dst %0d token %h", d, out_tid[d]));
        if (exp_q[d][s].size() > 0) void'(exp_q[d][s].pop_front());
        got++;
      end
      taken = in_valid & in_ready;
      tick();
      in_valid &= ~taken;
    end
    for (int d = 0; d < N; d++) for (int s = 0; s < N; s++) chk(exp_q[d][s].size() == 0, "all delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
