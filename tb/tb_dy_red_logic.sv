// tb_dy_red_logic: opens many reductions with random target counts, feeds
// their partial responses interleaved in random order, and checks that each
// reduction returns exactly once, only after its last partial, with the
// lane-wise 32-bit sum computed in the testbench. Also checks that a second
// request on a busy tag waits, and that a reduced response appears one cycle
// after its last partial.
module tb_dy_red_logic;
  import dysharp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic tick(); @(posedge clk); #1; endtask

  logic alloc_valid, alloc_ready, part_valid, part_ready, done_valid, done_ready;
  logic [TAG_W-1:0] alloc_tag;
  logic [NTGT_W-1:0] alloc_cnt;
  rsp_t part, done;
  dy_red_logic dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [127:0] expsum [logic [11:0]];
  int           left   [logic [11:0]];
  int           ndone = 0;
  int unsigned  cyc = 0, last_part_cyc [logic [11:0]];
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && done_valid && done_ready) begin
    chk(expsum.exists(done.tag), "done for an open tag");
    if (expsum.exists(done.tag)) begin
      chk(left[done.tag] == 0, "done only after the last partial");
      chk(done.data == expsum[done.tag], $sformatf("sum of tag %0d", done.tag));
      chk(done.dst == 8'd3, "destination kept");
      expsum.delete(done.tag);
      ndone++;
    end
  end

  function automatic logic [127:0] add4(logic [127:0] a, logic [127:0] b);
    logic [127:0] r;
    for (int l = 0; l < 4; l++) r[32*l +: 32] = a[32*l +: 32] + b[32*l +: 32];
    return r;
  endfunction

  initial begin
    logic [11:0] tags [$];
    alloc_valid = 0; part_valid = 0; done_ready = 1; alloc_tag = '0; alloc_cnt = '0; part = '0;
    repeat (2) tick();
    rst_n = 1;
    // timing of a single reduction with 2 targets
    alloc_valid = 1; alloc_tag = 12'd7; alloc_cnt = 2; tick(); alloc_valid = 0;
    expsum[12'd7] = '0; left[12'd7] = 2;
    // busy tag must wait
    alloc_valid = 1; #1; chk(!alloc_ready, "busy tag blocks a new request"); alloc_valid = 0;
    for (int k = 0; k < 2; k++) begin
      part.dst = 8'd3; part.tag = 12'd7; part.data = {$urandom, $urandom, $urandom, $urandom};
      expsum[12'd7] = add4(expsum[12'd7], part.data); left[12'd7]--;
      part_valid = 1; tick(); part_valid = 0;
      if (k == 1) chk(done_valid && done.tag == 7, "reduced response one cycle after last partial");
      else begin #1; chk(!done_valid, "no response before the last partial"); end
    end
    tick();
    // many interleaved reductions
    for (int r = 0; r < 300; r++) begin
      logic [11:0] tg;
      do tg = 12'($urandom); while (expsum.exists(tg) || left.exists(tg) && left[tg] != 0);
      alloc_valid = 1; alloc_tag = tg; alloc_cnt = 15'($urandom_range(1, 32));
      expsum[tg] = '0; left[tg] = int'(alloc_cnt);
      forever begin bit t; #1; t = alloc_ready; tick(); if (t) break; end
      alloc_valid = 0;
      tags.push_back(tg);
      // feed some partials of random open reductions
      repeat ($urandom_range(0, 40)) begin
        int i;
        if (tags.size() == 0) break;
        i = $urandom_range(0, tags.size() - 1);
        part.dst = 8'd3; part.tag = tags[i]; part.data = {$urandom, $urandom, $urandom, $urandom};
        part_valid = 1;
        done_ready = ($urandom_range(0, 3) != 0);
        forever begin bit t; #1; t = part_ready; tick(); if (t) break; done_ready = 1; end
        expsum[tags[i]] = add4(expsum[tags[i]], part.data);
        left[tags[i]]--;
        if (left[tags[i]] == 0) tags.delete(i);
        part_valid = 0;
      end
    end
    while (tags.size() > 0) begin
      part.dst = 8'd3; part.tag = tags[0]; part.data = {$urandom, $urandom, $urandom, $urandom};
      part_valid = 1; done_ready = 1;
      forever begin bit t; #1; t = part_ready; tick(); if (t) break; end
      expsum[tags[0]] = add4(expsum[tags[0]], part.data);
      left[tags[0]]--;
      if (left[tags[0]] == 0) void'(tags.pop_front());
      part_valid = 0;
    end
    repeat (3) tick();
    chk(ndone == 301, $sformatf("%0d reductions completed", ndone));
    chk(expsum.size() == 0, "no reduction left open");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
