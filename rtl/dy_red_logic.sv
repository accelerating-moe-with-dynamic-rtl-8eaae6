// dy_red_logic: in-switch reduction for dymultimem.ld_reduce, one per port.
//
// When a request from this port's GPU passes the switch, the unit records the
// number of targets the request names (alloc). Each destination returns one
// partial response per target; the unit adds it into the reduction buffer
// entry of the request and decrements the counter. When the counter reaches
// zero the buffered sum is the reduced value and is returned to the source
// GPU as a single response. The add is lane-wise over four 32-bit lanes of
// the 16-byte payload (integer add; the data type is this design's choice).
//
// The buffer holds ENTRIES = BUF_BYTES / 16 entries indexed directly by the
// request tag; an alloc for a tag still in use waits (alloc_ready low).
// Timing: a partial response is absorbed in one cycle; the reduced response
// appears the cycle after the last partial and is held until taken.
module dy_red_logic
  import dysharp_pkg::*;
#(
  parameter int unsigned BUF_BYTES = 65536,
  parameter int unsigned ENTRIES   = BUF_BYTES / (DATA_W / 8)
)(
  input  logic              clk,
  input  logic              rst_n,
  // request seen at ingress
  input  logic              alloc_valid,
  output logic              alloc_ready,
  input  logic [TAG_W-1:0]  alloc_tag,
  input  logic [NTGT_W-1:0] alloc_cnt,
  // partial responses from destination GPUs
  input  logic              part_valid,
  output logic              part_ready,
  input  rsp_t              part,
  // reduced response back to the source GPU
  output logic              done_valid,
  input  logic              done_ready,
  output rsp_t              done
);
  localparam int IW = $clog2(ENTRIES);

  logic [DATA_W-1:0] acc [ENTRIES];
  logic [NTGT_W-1:0] cnt [ENTRIES];
  logic [ENTRIES-1:0] busy;

  wire [IW-1:0] ai = IW'(alloc_tag);
  wire [IW-1:0] pi = IW'(part.tag);

  assign alloc_ready = !busy[ai];
  assign part_ready  = !done_valid || done_ready;

  wire do_alloc = alloc_valid && alloc_ready;
  wire do_part  = part_valid && part_ready;
  wire [DATA_W-1:0] sum = lane_add(acc[pi], part.data);
  wire last = (cnt[pi] == NTGT_W'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= '0;
      done_valid <= 1'b0;
      done       <= '0;
    end else begin
      if (done_valid && done_ready) done_valid <= 1'b0;
      if (do_alloc) busy[ai] <= 1'b1;
      if (do_part && last) begin
        busy[pi]   <= 1'b0;
        done_valid <= 1'b1;
        done.dst   <= part.dst;
        done.tag   <= part.tag;
        done.data  <= sum;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (do_alloc) begin
      acc[ai] <= '0;
      cnt[ai] <= alloc_cnt;
    end
    if (do_part) begin
      acc[pi] <= sum;
      cnt[pi] <= cnt[pi] - 1'b1;
    end
  end

  a_part_busy: assert property (@(posedge clk) disable iff (!rst_n)
    part_valid |-> busy[pi]);
  a_no_same_cycle: assert property (@(posedge clk) disable iff (!rst_n)
    (do_alloc && do_part) |-> (ai != pi));

endmodule
