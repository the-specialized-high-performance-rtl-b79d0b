// particle_cache: one end of the particle cache of an I/O channel.
//
// Atom positions are sent over the same channel on many consecutive time
// steps and change slowly.  A cache at the sending end and an identical cache
// at the receiving end keep, per particle, the static word of its position
// packet and a short history of its x, y and z.  On a hit the sender sends
// only the difference between the actual coordinate and a quadratic
// extrapolation from that history, plus the entry index; the receiver makes
// the same prediction and adds the difference back.  Both ends see the same
// packets in the same order, so their contents stay identical.
//
// History per coordinate: D0 = x[t-1] (32 bits), D1 and D2, the first and
// second differences, kept in DW = 12 bits each.  Prediction D0+D1+D2 equals
// 3x[t-1]-3x[t-2]+x[t-3].  Update with the actual x: D1' = x-D0,
// D2' = x-D0-D1, D0' = x.  A new entry starts with D1 = D2 = 0, so the
// predictor is constant, then linear, then quadratic.  Whatever D1 and D2 hold
// (they saturate here), both ends compute the same prediction and the
// transmitted difference x - prediction is exact, so the scheme is lossless.
//
// Organisation: ENTRIES entries, WAYS-way set associative, set = low bits of
// the particle id, tag = the rest.  Each entry holds the time-step counter
// value of its last use.  The counter advances on every end-of-time-step
// packet.  A miss allocates an invalid way, or else a way whose entry is more
// than thresh time steps old; if none, the packet goes uncompressed and
// nothing is allocated.
//
// Follows the paper: two synchronized caches, miss-and-allocate on both
// sides, hit sends index and difference, four-way set associative with 1024
// entries, 12-bit D1/D2, the finite-difference predictor, software-marked
// time steps and the configurable age threshold for eviction.  Own choices:
// set/tag split of the particle id, lowest-numbered eligible way, saturation
// of D1/D2, word 3 of the payload as the "static fields", and the receiver
// re-deriving the allocated entry itself (an assertion checks it matches the
// sender's index).
//
// MODE 0 (send side): in_pay is the position payload {w3, z, y, x}; out_kind
// is CK_ALLOC, CK_NOALOC or CK_COMP, and for CK_COMP out_pay is
// {0, dz, dy, dx}.  MODE 1 (receive side): in_kind/in_idx come from the
// channel and in_pay is the decoded payload; out_pay is the rebuilt position.
// Timing: one request per cycle, result registered one cycle later.
module particle_cache
  import a3_pkg::*;
#(
  parameter int unsigned MODE    = 0,
  parameter int unsigned ENTRIES = 1024,
  parameter int unsigned WAYS    = 4,
  parameter int unsigned DW      = 12,
  parameter int unsigned TSW     = 8,
  localparam int unsigned SETS   = ENTRIES / WAYS,
  localparam int unsigned SW     = $clog2(SETS),
  localparam int unsigned WW     = $clog2(WAYS),
  localparam int unsigned TW     = 15 - SW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [TSW-1:0] thresh,
  input  logic           ts_tick,     // end of time step seen
  input  logic           in_valid,
  input  chk_e           in_kind,     // receive side only
  input  logic [9:0]     in_idx,      // receive side only
  input  hdr_t           in_hdr,
  input  logic [127:0]   in_pay,
  output logic           out_valid,
  output chk_e           out_kind,
  output logic [9:0]     out_idx,
  output hdr_t           out_hdr,
  output logic [127:0]   out_pay
);
  typedef struct packed {
    logic                 valid;
    logic [TW-1:0]        tag;
    logic [31:0]          w3;
    logic [2:0][31:0]     d0;
    logic [2:0][DW-1:0]   d1;
    logic [2:0][DW-1:0]   d2;
    logic [TSW-1:0]       ts;
  } entry_t;

  entry_t         ent [SETS][WAYS];
  logic [TSW-1:0] ts_ctr;

  function automatic logic [DW-1:0] sat(logic signed [33:0] v);
    logic signed [33:0] hi, lo;
    hi = 34'sd1 <<< (DW - 1);
    lo = -hi;
    hi = hi - 34'sd1;
    if (v > hi) return hi[DW-1:0];
    if (v < lo) return lo[DW-1:0];
    return v[DW-1:0];
  endfunction

  function automatic logic [31:0] predict(entry_t e, int c);
    return e.d0[c] + 32'(signed'(e.d1[c])) + 32'(signed'(e.d2[c]));
  endfunction

  function automatic entry_t update(entry_t e, logic [31:0] x, int c);
    entry_t r;
    logic signed [33:0] a, b;
    r = e;
    a = 34'(signed'(x)) - 34'(signed'(e.d0[c]));
    b = a - 34'(signed'(e.d1[c]));
    r.d0[c] = x;
    r.d1[c] = sat(a);
    r.d2[c] = sat(b);
    return r;
  endfunction

  logic [SW-1:0] set;
  logic [TW-1:0] tag;
  logic          hit, can_alloc;
  logic [WW-1:0] hway, vway;

  always_comb begin
    set = in_hdr.pid[SW-1:0];
    tag = in_hdr.pid[14:SW];
    hit = 1'b0;
    hway = '0;
    for (int w = 0; w < int'(WAYS); w++)
      if (!hit && ent[set][w].valid && ent[set][w].tag == tag) begin
        hit = 1'b1;
        hway = WW'(w);
      end
    can_alloc = 1'b0;
    vway = '0;
    for (int w = 0; w < int'(WAYS); w++)
      if (!can_alloc && !ent[set][w].valid) begin
        can_alloc = 1'b1;
        vway = WW'(w);
      end
    for (int w = 0; w < int'(WAYS); w++)
      if (!can_alloc && (ts_ctr - ent[set][w].ts) > thresh) begin
        can_alloc = 1'b1;
        vway = WW'(w);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(SETS); s++)
        for (int w = 0; w < int'(WAYS); w++) ent[s][w] <= '0;
      ts_ctr    <= '0;
      out_valid <= 1'b0;
      out_kind  <= CK_PLAIN;
      out_idx   <= '0;
      out_hdr   <= '0;
      out_pay   <= '0;
    end else begin
      if (ts_tick) ts_ctr <= ts_ctr + 1'b1;
      out_valid <= in_valid;
      out_hdr   <= in_hdr;
      if (in_valid) begin
        entry_t e;
        if (MODE == 0) begin
          if (hit) begin
            e = ent[set][hway];
            out_kind <= CK_COMP;
            out_idx  <= 10'({set, hway});
            out_pay  <= {32'd0,
                         in_pay[95:64] - predict(e, 2),
                         in_pay[63:32] - predict(e, 1),
                         in_pay[31:0]  - predict(e, 0)};
            for (int c = 0; c < 3; c++) e = update(e, in_pay[32*c +: 32], c);
            e.ts = ts_ctr;
            ent[set][hway] <= e;
          end else if (can_alloc) begin
            out_kind <= CK_ALLOC;
            out_idx  <= 10'({set, vway});
            out_pay  <= in_pay;
            ent[set][vway] <= '{valid: 1'b1, tag: tag, w3: in_pay[127:96],
                                d0: in_pay[95:0], d1: '0, d2: '0, ts: ts_ctr};
          end else begin
            out_kind <= CK_NOALOC;
            out_idx  <= '0;
            out_pay  <= in_pay;
          end
        end else begin
          out_kind <= in_kind;
          out_idx  <= in_idx;
          unique case (in_kind)
            CK_COMP: begin
              logic [SW-1:0] s;
              logic [WW-1:0] w;
              logic [95:0]   x;
              s = in_idx[WW +: SW];
              w = in_idx[WW-1:0];
              e = ent[s][w];
              for (int c = 0; c < 3; c++) x[32*c +: 32] = in_pay[32*c +: 32] + predict(e, c);
              out_pay <= {e.w3, x};
              for (int c = 0; c < 3; c++) e = update(e, x[32*c +: 32], c);
              e.ts = ts_ctr;
              ent[s][w] <= e;
            end
            CK_ALLOC: begin
              out_pay <= in_pay;
              ent[set][vway] <= '{valid: 1'b1, tag: tag, w3: in_pay[127:96],
                                  d0: in_pay[95:0], d1: '0, d2: '0, ts: ts_ctr};
            end
            default: out_pay <= in_pay;
          endcase
        end
      end
    end
  end

  // the receiver allocates the very entry the sender allocated
  a_same_entry: assert property (@(posedge clk) disable iff (!rst_n)
    (MODE == 1 && in_valid && in_kind == CK_ALLOC) |-> can_alloc && in_idx == 10'({set, vway}));
endmodule
