// a3_pkg: types and constants shared by the Anton 3 network blocks.
//
// A network flit is 192 bits: a 64-bit header and a 128-bit payload of four
// 32-bit words (the flit size and the header/payload split follow the paper).
// The fields inside the 64-bit header are this design's own layout; the paper
// does not publish one.  Every packet is one flit here (the paper allows one or
// two).  Links between routers carry a valid flit forward and return one
// credit per freed input-queue slot, tagged with its virtual channel (VC).
package a3_pkg;

  localparam int unsigned FLIT_W    = 192;
  localparam int unsigned HDR_W     = 64;
  localparam int unsigned PAY_W     = 128;
  localparam int unsigned VC_W      = 3;
  localparam int unsigned QDEPTH    = 8;    // flits per VC per input queue
  localparam int unsigned CORE_NV   = 2;    // core network: request + response
  localparam int unsigned EDGE_NV   = 5;    // edge network: 4 request + 1 response
  localparam int unsigned EDGE_REQ_NV = 4;
  localparam int unsigned FID_W     = 4;    // up to 14 concurrent fences
  localparam int unsigned NPAT      = 4;    // fence patterns
  localparam int unsigned MAXP      = 8;    // widest router port count
  localparam int unsigned CFG_ID_W  = 16;

  typedef enum logic [2:0] {
    PT_WRITE  = 3'd0,  // plain remote write of a quad
    PT_CWRITE = 3'd1,  // counted write: overwrite quad, increment its counter
    PT_CACC   = 3'd2,  // counted accumulate: add 4 words, increment counter
    PT_POS    = 3'd3,  // atom position (x, y, z in words 0..2, word 3 static)
    PT_FORCE  = 3'd4,  // force (treated as a counted accumulate at a GC)
    PT_FENCE  = 3'd5,  // network fence packet
    PT_TSEND  = 3'd6   // end-of-time-step marker for the particle caches
  } ptype_e;

  // Destination endpoint inside the destination node.
  typedef enum logic [2:0] {
    EP_GC0 = 3'd0, EP_GC1 = 3'd1, EP_BC = 3'd2, EP_PPIM0 = 3'd3,
    EP_PPIM1 = 3'd4, EP_ICB0 = 3'd5, EP_ICB1 = 3'd6
  } ep_e;

  typedef struct packed {
    ptype_e          ptype;   // 3
    logic [2:0]      vc;      // 3
    logic            resp;    // 1  response class
    logic signed [3:0] dx;    // 4  remaining torus hops, signed
    logic signed [3:0] dy;    // 4
    logic signed [3:0] dz;    // 4
    logic [2:0]      dord;    // 3  dimension order, 0..5 (XYZ,XZY,YXZ,YZX,ZXY,ZYX)
    logic            slice;   // 1  channel slice
    logic [3:0]      dst_v;   // 4  destination tile row
    logic [4:0]      dst_u;   // 5  destination tile column
    ep_e             dst_ep;  // 3
    logic            side;    // 1  edge side used for ICB / exit (0 left, 1 right)
    logic [12:0]     addr;    // 13 quad address in a 128 KB SRAM
    logic [14:0]     pid;     // 15 particle id; fence fields for PT_FENCE
  } hdr_t;                    // 64 bits

  typedef struct packed {
    hdr_t         hdr;
    logic [127:0] pay;
  } flit_t;

  typedef struct packed {
    logic  valid;
    flit_t flit;
  } link_t;

  typedef struct packed {
    logic             valid;
    logic [VC_W-1:0]  vc;
  } credit_t;

  // Fence configuration write: per router, per input port, per fence pattern.
  typedef struct packed {
    logic                 valid;
    logic [CFG_ID_W-1:0]  router_id;
    logic [3:0]           port;
    logic [1:0]           pattern;
    logic [3:0]           expected;
    logic [MAXP-1:0]      mask;
  } fcfg_t;

  // Fence fields overlay the particle-id field of a fence packet.
  function automatic logic [FID_W-1:0] fence_id(hdr_t h);
    return h.pid[3:0];
  endfunction
  function automatic logic [1:0] fence_pat(hdr_t h);
    return h.pid[5:4];
  endfunction
  function automatic logic [3:0] fence_hops(hdr_t h);
    return h.pid[9:6];
  endfunction

  // One record on an I/O channel: header, a byte count and up to 16 payload
  // bytes after INZ.  kind tells the receiver how to rebuild the flit.
  typedef enum logic [1:0] {
    CK_PLAIN  = 2'd0,   // ordinary packet, INZ payload
    CK_ALLOC  = 2'd1,   // position packet, full position, allocate cache entry
    CK_NOALOC = 2'd2,   // position packet, full position, no cache entry
    CK_COMP   = 2'd3    // position packet, delta vs. prediction, cache index
  } chk_e;

  typedef struct packed {
    logic         valid;
    chk_e         kind;
    hdr_t         hdr;
    logic [9:0]   idx;     // particle cache entry (set, way) for CK_COMP
    logic [4:0]   nbytes;  // payload bytes carried, 0..16
    logic [127:0] bytes;   // INZ-encoded payload, zero above nbytes
  } chrec_t;

  // INZ sign-to-LSB transform (as printed in the paper) and its inverse.
  function automatic logic [31:0] invert_word(logic [31:0] w);
    return {{31{w[31]}} ^ w[30:0], w[31]};
  endfunction
  function automatic logic [31:0] uninvert_word(logic [31:0] e);
    return {e[0], {31{e[0]}} ^ e[31:1]};
  endfunction

endpackage
