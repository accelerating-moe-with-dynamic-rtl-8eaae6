// dy_flit_tx: serialises one dymultimem request packet into 16-byte flits.
//
// Flit order follows the extended NVLink packet: flit0 = {CRC, header,
// DL header}, then ceil(#target/8) target extension flits carrying eight
// 16-bit expert IDs each (target j of a flit in bits [16j+15:16j]), then, for
// a dymultimem.st only, the byte-enable flit and one data payload flit. A
// dymultimem.ld_reduce request carries no data. The CRC field is left zero:
// it is computed by the existing data link layer, outside this block. The
// requester port is placed in the low bits of the DL header so that a
// destination can address its response (a choice of this design).
//
// Interface: valid/ready packet input, valid/ready flit output with a last
// marker. Timing: one flit per cycle while flit_ready is high; the packet is
// accepted (pkt_ready) in the cycle its last flit is taken, so a packet of F
// flits occupies the link for exactly F cycles and packets go back to back.
module dy_flit_tx
  import dysharp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              pkt_valid,
  output logic              pkt_ready,
  input  req_pkt_t          pkt,
  output logic              flit_valid,
  input  logic              flit_ready,
  output logic [FLIT_W-1:0] flit,
  output logic              flit_last
);

  logic [5:0] idx;       // flit index inside the current packet
  logic [5:0] nflits;
  logic [5:0] ntf;       // number of target extension flits

  always_comb begin
    ntf    = 6'((int'(pkt.hdr.ntarget) + TGT_PER_FLIT - 1) / TGT_PER_FLIT);
    nflits = 6'(pkt_flits(pkt.hdr));
  end

  always_comb begin
    flit = '0;
    if (idx == 0) begin
      flit = {{CRC_W{1'b0}}, pkt.hdr, {(DLH_W-SRC_W){1'b0}}, pkt.src};
    end else if (idx <= ntf) begin
      for (int j = 0; j < TGT_PER_FLIT; j++)
        flit[j*TGT_W +: TGT_W] = pkt.tgts[(int'(idx) - 1) * TGT_PER_FLIT + j];
    end else if (idx == ntf + 1) begin
      flit[BE_W-1:0] = pkt.be;
    end else begin
      flit = pkt.data;
    end
  end

  assign flit_valid = pkt_valid;
  assign flit_last  = (idx == nflits - 1);
  assign pkt_ready  = flit_valid && flit_ready && flit_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) idx <= '0;
    else if (flit_valid && flit_ready) idx <= flit_last ? '0 : idx + 1'b1;
  end

  // A packet's target list must fit the extension flits this block carries.
  a_ntarget: assert property (@(posedge clk) disable iff (!rst_n)
    pkt_valid |-> (int'(pkt.hdr.ntarget) <= MAX_TARGETS));
  // The packet must stay stable until it is taken.
  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (pkt_valid && !pkt_ready) |=> (pkt_valid && $stable(pkt)));

endmodule
