// dysharp_pkg: types and constants shared by the dynamic in-switch computing
// blocks (dynamic multimem addressing and the token tracker).
//
// The request packet follows the extended NVLink data-link format: a 16-byte
// flit0 that holds CRC (25b), header (83b) and data-link header (20b); the
// 83-bit header is {request type, credit, tag} (19b), a 48-bit multimem
// address whose offset is the algebraic index, a 1-bit stage (Dispatch or
// Combine) and a 15-bit target count. Target extension flits follow, eight
// 16-bit destination expert IDs per flit, then the unchanged byte-enable flit
// and the data payload flits. Field widths and order are the published
// format; bit positions inside a flit, the split of the 19-bit field and the
// stage / request-type encodings are this design's choices (MSB first, in the
// order the format lists the fields).
package dysharp_pkg;

  localparam int FLIT_W       = 128;  // 16B flit
  localparam int CRC_W        = 25;
  localparam int HDR_W        = 83;
  localparam int DLH_W        = 20;
  localparam int MADDR_W      = 48;   // algebraic multimem address, 128TB
  localparam int NTGT_W       = 15;   // target count field
  localparam int TGT_W        = 16;   // one destination expert ID
  localparam int TGT_PER_FLIT = FLIT_W / TGT_W;  // 8
  localparam int MAX_TARGETS  = 32;   // largest target list carried (largest topk evaluated)
  localparam int MAX_TFLITS   = MAX_TARGETS / TGT_PER_FLIT;
  localparam int RTYPE_W      = 3;
  localparam int CREDIT_W     = 4;
  localparam int TAG_W        = 12;
  localparam int SRC_W        = 8;    // requester port carried in the DL header
  localparam int DATA_W       = 128;  // one 16B payload flit per instruction
  localparam int BE_W         = DATA_W / 8;
  localparam int LANE_W       = 32;   // reduction lane (.u32)
  localparam int LANES        = DATA_W / LANE_W;
  localparam int LIDX_W       = 31;   // AL Table entry: 1b Valid + 31b LIdx
  localparam int VADDR_W      = 64;

  typedef enum logic [RTYPE_W-1:0] {
    RT_NONE   = 3'd0,
    RT_ST     = 3'd1,   // dymultimem.st        (multicast, Dispatch)
    RT_LDRED  = 3'd2    // dymultimem.ld_reduce (reduction, Combine)
  } rtype_e;

  typedef enum logic {
    STAGE_DISPATCH = 1'b0,
    STAGE_COMBINE  = 1'b1
  } stage_e;

  typedef logic [TGT_W-1:0] tgt_t;

  typedef struct packed {
    rtype_e              rtype;
    logic [CREDIT_W-1:0] credit;
    logic [TAG_W-1:0]    tag;
    logic [MADDR_W-1:0]  maddr;
    stage_e              stage;
    logic [NTGT_W-1:0]   ntarget;
  } hdr_t;  // 83 bits

  // A request packet as it moves inside a block: header, requester port,
  // target list (entries at and above ntarget are don't-care), byte enables
  // and one payload flit.
  typedef struct packed {
    hdr_t                         hdr;
    logic [SRC_W-1:0]             src;
    tgt_t [MAX_TARGETS-1:0]       tgts;
    logic [BE_W-1:0]              be;
    logic [DATA_W-1:0]            data;
  } req_pkt_t;

  // Response of a dymultimem.ld_reduce: partial (destination -> switch) or
  // reduced (switch -> source).
  typedef struct packed {
    logic [SRC_W-1:0]  dst;   // source GPU port the result returns to
    logic [TAG_W-1:0]  tag;
    logic [DATA_W-1:0] data;
  } rsp_t;

  // dymultimem instruction as handed from the LSQ to the MultimemQ.
  typedef struct packed {
    rtype_e             op;
    logic [7:0]         rd;       // r1: destination register of ld_reduce
    logic [DATA_W-1:0]  data;     // r1: store data
    logic [MADDR_W-1:0] maddr;    // r2
    logic [NTGT_W-1:0]  ntarget;  // r3
    logic [31:0]        tbase;    // r4: byte address of the target list
    stage_e             stage;
  } dyinst_t;

  // Number of flits a request packet occupies on a link.
  function automatic int unsigned pkt_flits(hdr_t h);
    int unsigned n;
    n = 1 + (int'(h.ntarget) + TGT_PER_FLIT - 1) / TGT_PER_FLIT;
    if (h.rtype == RT_ST) n += 2;  // byte-enable flit + one payload flit
    return n;
  endfunction

  // Lane-wise 32-bit add used by the in-switch reduction.
  function automatic logic [DATA_W-1:0] lane_add(logic [DATA_W-1:0] a, logic [DATA_W-1:0] b);
    logic [DATA_W-1:0] r;
    for (int l = 0; l < LANES; l++)
      r[l*LANE_W +: LANE_W] = a[l*LANE_W +: LANE_W] + b[l*LANE_W +: LANE_W];
    return r;
  endfunction

endpackage
