// dy_al_tlb: AL TLB of the hub memory manager.
//
// A fully associative cache of AL Table entries. The tag section is a
// content-addressable memory holding {Expert ID, AIdx}; the index of the
// matching tag reads the buffer section, which holds {Valid, LIdx}. A hit
// returns LIdx in the same cycle (combinational lookup). A miss is filled by
// the manager after it has read (or allocated) the AL Table entry; fills go
// to the next slot of a FIFO replacement pointer (the replacement policy is
// this design's choice). clear invalidates every entry, for a new layer.
module dy_al_tlb
  import dysharp_pkg::*;
#(
  parameter int unsigned ENTRIES = 512,
  parameter int unsigned EXP_W   = 3,
  parameter int unsigned AIDX_W  = 31
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  // lookup
  input  logic [EXP_W-1:0]  lk_exp,
  input  logic [AIDX_W-1:0] lk_aidx,
  output logic              lk_hit,
  output logic [LIDX_W-1:0] lk_lidx,
  // fill
  input  logic              fill_valid,
  input  logic [EXP_W-1:0]  fill_exp,
  input  logic [AIDX_W-1:0] fill_aidx,
  input  logic [LIDX_W-1:0] fill_lidx
);
  localparam int IW = $clog2(ENTRIES);

  typedef struct packed {
    logic [EXP_W-1:0]  exp;
    logic [AIDX_W-1:0] aidx;
  } tag_t;

  tag_t [ENTRIES-1:0] tag_cam;          // packed: every entry is compared at once
  logic [ENTRIES-1:0] vld;
  logic [LIDX_W-1:0] buf_lidx [ENTRIES];
  logic [IW-1:0]     rp;

  // CAM search
  logic [IW-1:0] hit_idx;
  always_comb begin
    lk_hit  = 1'b0;
    hit_idx = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (vld[i] && tag_cam[i] == tag_t'({lk_exp, lk_aidx})) begin
        lk_hit  = 1'b1;
        hit_idx = IW'(i);
      end
  end
  assign lk_lidx = buf_lidx[hit_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      rp  <= '0;
    end else if (clear) begin
      vld <= '0;
      rp  <= '0;
    end else if (fill_valid) begin
      vld[rp] <= 1'b1;
      rp      <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid) begin
      tag_cam[rp]  <= tag_t'({fill_exp, fill_aidx});
      buf_lidx[rp] <= fill_lidx;
    end
  end

endmodule
