// tb_rr_arbiter: checks one-hot grants, that a grant goes to the first
// requester after the last one served (round-robin order computed in the
// testbench), that the pointer holds when the grant is not used, and that
// with all requesting every requester is served exactly once per N grants.
module tb_rr_arbiter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic tick(); @(posedge clk); #1; endtask

  localparam int N = 32;
  logic [N-1:0] req, grant;
  logic advance, grant_valid;
  logic [4:0] grant_idx;
  rr_arbiter #(.N(N)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last = N - 1, expi, cnt [N];
    req = '0; advance = 0;
    repeat (2) tick();
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      req = N'({$urandom, $urandom}) & N'({$urandom, $urandom});
      advance = ($urandom_range(0, 3) != 0);
      #1;
      expi = -1;
      for (int k = 1; k <= N; k++) if (expi < 0 && req[(last + k) % N]) expi = (last + k) % N;
      chk(grant_valid == (expi >= 0), "grant_valid");
      if (expi >= 0) begin
        chk(grant == (N'(1) << expi) && int'(grant_idx) == expi, $sformatf("grant %0d expected %0d", grant_idx, expi));
        if (advance) last = expi;
      end else chk(grant == '0, "no grant");
      tick();
    end
    // fairness with every requester active
    req = '1; advance = 1;
    for (int i = 0; i < N; i++) cnt[i] = 0;
    for (int t = 0; t < N; t++) begin #1; cnt[grant_idx]++; tick(); end
    for (int i = 0; i < N; i++) chk(cnt[i] == 1, $sformatf("requester %0d served %0d times", i, cnt[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
