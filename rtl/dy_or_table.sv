// dy_or_table: Output Readiness (OR) Table on the source GPU.
//
// Each entry {Valid, TID, nReady} counts how many of a token's topk expert
// outputs have been produced. Every notification from an expert-side token
// tracker increments nReady of its token (allocating the entry on the first
// one); when nReady reaches topk the token may be combined with
// dymultimem.ld_reduce. The Combine kernel polls the table through the query
// port and releases the entry through the consume port once it has issued
// the reduction.
//
// The fields and the topk rule follow the published design. Direct mapping
// on TID mod ENTRIES, a stall of a notification whose entry holds another
// token (in place of offload to DRAM) and the consume port are this design's
// choices. Timing: one notification per cycle; a query answers in the same
// cycle.
module dy_or_table
  import dysharp_pkg::*;
#(
  parameter int unsigned ENTRIES = 1024
)(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [5:0]  cfg_topk,
  // notification from a tracker
  input  logic        ntf_valid,
  output logic        ntf_ready,
  input  logic [31:0] ntf_tid,
  // readiness query
  input  logic [31:0] q_tid,
  output logic        q_ready,
  // entry release after the Combine request was issued
  input  logic        cons_valid,
  input  logic [31:0] cons_tid,
  output logic [31:0] n_ready_tokens
);
  localparam int IW = $clog2(ENTRIES);

  logic [ENTRIES-1:0] vld;
  logic [31:0]        tid    [ENTRIES];
  logic [5:0]         nready [ENTRIES];

  wire [IW-1:0] ni = IW'(ntf_tid);
  wire [IW-1:0] qi = IW'(q_tid);
  wire [IW-1:0] ci = IW'(cons_tid);

  wire n_match = vld[ni] && tid[ni] == ntf_tid;
  assign ntf_ready = !vld[ni] || n_match;
  wire do_ntf = ntf_valid && ntf_ready;
  wire do_cons = cons_valid && vld[ci] && tid[ci] == cons_tid;

  assign q_ready = vld[qi] && tid[qi] == q_tid && nready[qi] >= cfg_topk;

  wire [5:0] n_new = n_match ? nready[ni] + 1'b1 : 6'd1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      n_ready_tokens <= '0;
    end else begin
      if (do_cons) vld[ci] <= 1'b0;
      if (do_ntf) begin
        vld[ni] <= 1'b1;
        if (n_new == cfg_topk) n_ready_tokens <= n_ready_tokens + 1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (do_ntf) begin
      tid[ni]    <= ntf_tid;
      nready[ni] <= n_new;
    end
  end

  a_not_both: assert property (@(posedge clk) disable iff (!rst_n)
    (do_ntf && do_cons) |-> (ni != ci));
  a_not_over: assert property (@(posedge clk) disable iff (!rst_n)
    do_ntf |-> (n_new <= cfg_topk));

endmodule
