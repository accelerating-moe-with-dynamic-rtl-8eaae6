// tb_dy_al_tlb: compares the AL TLB with a reference model kept in the
// testbench (a FIFO of the last ENTRIES fills): random lookups must hit
// exactly when the {Expert ID, AIdx} pair is among the resident entries and
// return its LIdx; the same AIdx under another expert must miss; clear must
// empty the TLB.
module tb_dy_al_tlb;
  import dysharp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic tick(); @(posedge clk); #1; endtask

  localparam int N = 512;
  logic clear, lk_hit, fill_valid;
  logic [2:0] lk_exp, fill_exp;
  logic [30:0] lk_aidx, fill_aidx;
  logic [30:0] lk_lidx, fill_lidx;
  dy_al_tlb #(.ENTRIES(N)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [33:0] key_q [$];
  logic [30:0] val_q [$];

  function automatic int find(logic [33:0] k);
    foreach (key_q[i]) if (key_q[i] == k) return i;
    return -1;
  endfunction

  initial begin
    int hits = 0;
    clear = 0; fill_valid = 0; lk_exp = 0; lk_aidx = 0; fill_exp = 0; fill_aidx = 0; fill_lidx = 0;
    repeat (2) tick();
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      int i;
      lk_exp = 3'($urandom); lk_aidx = 31'($urandom_range(0, 700));
      #1;
      i = find({lk_exp, lk_aidx});
      chk(lk_hit == (i >= 0), $sformatf("hit for exp %0d aidx %0d", lk_exp, lk_aidx));
      if (i >= 0) begin chk(lk_lidx == val_q[i], "LIdx"); hits++; end
      if (i < 0) begin
        fill_valid = 1; fill_exp = lk_exp; fill_aidx = lk_aidx; fill_lidx = 31'($urandom);
        key_q.push_back({lk_exp, lk_aidx}); val_q.push_back(fill_lidx);
        if (key_q.size() > N) begin void'(key_q.pop_front()); void'(val_q.pop_front()); end
      end
      tick();
      fill_valid = 0;
    end
    chk(hits > 200, $sformatf("%0d hits", hits));
    clear = 1; tick(); clear = 0;
    lk_exp = key_q[0][33:31]; lk_aidx = key_q[0][30:0]; #1;
    chk(!lk_hit, "clear empties the TLB");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
