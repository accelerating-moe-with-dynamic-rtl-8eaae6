// dy_flit_rx: reassembles a dymultimem request packet from 16-byte flits.
//
// flit0 gives the header and the requester port (DL header low bits); the
// target count in the header says how many target extension flits follow
// (eight 16-bit expert IDs each) and the request type says whether a
// byte-enable flit and a payload flit close the packet (dymultimem.st) or not
// (dymultimem.ld_reduce). The layout mirrors dy_flit_tx.
//
// Interface: valid/ready flit input (flit_last is cross-checked by an
// assertion only), valid/ready packet output. Timing: one flit per cycle;
// the packet is presented the cycle after its last flit and held until
// taken; no flit is accepted while a finished packet waits.
module dy_flit_rx
  import dysharp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flit_valid,
  output logic              flit_ready,
  input  logic [FLIT_W-1:0] flit,
  input  logic              flit_last,
  output logic              pkt_valid,
  input  logic              pkt_ready,
  output req_pkt_t          pkt
);

  logic [5:0] idx;
  logic [5:0] ntf;
  logic [5:0] nflits;
  hdr_t       h0;
  logic       last_now;

  assign h0 = hdr_t'(flit[DLH_W +: HDR_W]);

  always_comb begin
    if (idx == 0) begin
      ntf    = 6'((int'(h0.ntarget) + TGT_PER_FLIT - 1) / TGT_PER_FLIT);
      nflits = 6'(pkt_flits(h0));
    end else begin
      ntf    = 6'((int'(pkt.hdr.ntarget) + TGT_PER_FLIT - 1) / TGT_PER_FLIT);
      nflits = 6'(pkt_flits(pkt.hdr));
    end
    last_now = (idx == nflits - 1);
  end

  assign flit_ready = !pkt_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx       <= '0;
      pkt_valid <= 1'b0;
      pkt       <= '0;
    end else begin
      if (pkt_valid && pkt_ready) pkt_valid <= 1'b0;
      if (flit_valid && flit_ready) begin
        if (idx == 0) begin
          pkt.hdr <= h0;
          pkt.src <= flit[SRC_W-1:0];
          pkt.be  <= '0;
          pkt.data <= '0;
        end else if (idx <= ntf) begin
          for (int j = 0; j < TGT_PER_FLIT; j++)
            if ((int'(idx) - 1) * TGT_PER_FLIT + j < MAX_TARGETS)
              pkt.tgts[(int'(idx) - 1) * TGT_PER_FLIT + j] <= flit[j*TGT_W +: TGT_W];
        end else if (idx == ntf + 1) begin
          pkt.be <= flit[BE_W-1:0];
        end else begin
          pkt.data <= flit;
        end
        if (last_now) begin
          idx       <= '0;
          pkt_valid <= 1'b1;
        end else begin
          idx <= idx + 1'b1;
        end
      end
    end
  end

  a_last: assert property (@(posedge clk) disable iff (!rst_n)
    (flit_valid && flit_ready) |-> (flit_last == last_now));

endmodule
