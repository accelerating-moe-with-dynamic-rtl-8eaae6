// tb_dy_or_table: sends topk notifications per token, interleaved over many
// tokens, and checks that a token reads ready exactly when its count reaches
// topk (not one notification earlier), that the ready-token counter matches,
// that a notification for a different token mapping to an occupied entry
// waits, and that consume frees the entry.
module tb_dy_or_table;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic tick(); @(posedge clk); #1; endtask

  logic [5:0] cfg_topk;
  logic ntf_valid, ntf_ready, q_ready, cons_valid;
  logic [31:0] ntf_tid, q_tid, cons_tid, n_ready_tokens;
  dy_or_table dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cnt [int];
  initial begin
    int tids [$];
    cfg_topk = 6'd8; ntf_valid = 0; cons_valid = 0; ntf_tid = 0; q_tid = 0; cons_tid = 0;
    repeat (2) tick();
    rst_n = 1;
    for (int k = 0; k < 200; k++) begin tids.push_back(k * 3 + 1); cnt[k * 3 + 1] = 0; end
    repeat (1600) begin
      int i, tid;
      do i = $urandom_range(0, tids.size() - 1); while (cnt[tids[i]] == 8);
      tid = tids[i];
      q_tid = tid; #1;
      chk(!q_ready, $sformatf("token %0d not ready at %0d", tid, cnt[tid]));
      ntf_valid = 1; ntf_tid = tid; #1;
      chk(ntf_ready, "notification accepted");
      tick(); ntf_valid = 0;
      cnt[tid]++;
      #1;
      chk(q_ready == (cnt[tid] == 8), $sformatf("token %0d ready after %0d", tid, cnt[tid]));
    end
    chk(n_ready_tokens == 200, $sformatf("%0d tokens ready", n_ready_tokens));
    // conflict: tid 1 + 1024 maps onto the entry of token 1
    ntf_valid = 1; ntf_tid = 1 + 1024; #1;
    chk(!ntf_ready, "conflicting notification waits");
    ntf_valid = 0;
    cons_valid = 1; cons_tid = 1; tick(); cons_valid = 0;
    q_tid = 1; #1; chk(!q_ready, "consumed token no longer ready");
    ntf_valid = 1; ntf_tid = 1 + 1024; #1;
    chk(ntf_ready, "freed entry takes a new token");
    tick(); ntf_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
