// channel_adapter: joins the Edge Network to one off-chip I/O channel and
// compresses what crosses it.
//
// Transmit: flits from the outermost Edge Router are queued, then
//  - position packets go through the send-side particle cache, which turns a
//    hit into an entry index plus the difference from the predicted position;
//  - every payload is INZ-encoded, so only its significant bytes are sent;
//  - end-of-time-step packets advance the particle cache's time-step counter;
//  - the four copies of a network fence (one per request VC) are merged into
//    one, whose hop budget is decremented; a fence with no hops left stays on
//    this chip;
//  - the remaining torus offset along this channel's direction is moved one
//    step toward zero.
// Each result is a channel record (a3_pkg::chrec_t): kind, header, cache
// index, byte count and the bytes.  Records leave in order when the channel
// is ready.
// Receive: records are INZ-decoded, position records are rebuilt by the
// receive-side particle cache, end-of-time-step records advance its counter,
// and a fence is copied onto all four request VCs.  Requests move to the next
// request VC (own choice, standing in for the torus VC rule the paper does not
// give), responses stay on VC 4, and flits go to the Edge Router under credit
// flow control.
//
// Follows the paper: particle cache and INZ at the channel, both switchable
// off, fences injected on all request-class VCs, a fence counted once per
// channel crossing.  Own choices: the record format (the paper packs records
// at byte granularity into fixed frames; framing and the SERDES lanes are
// outside this block), merging the four fence copies here, queue sizes, VC
// rotation, and how the hop budget is spent.
// Timing: a flit taken from the Edge Router is a record two cycles later if
// the channel is ready; a record received becomes a flit two cycles later.
module channel_adapter
  import a3_pkg::*;
#(
  parameter int unsigned DIR      = 4,    // 0 Z+, 1 Z-, 2 Y+, 3 Y-, 4 X+, 5 X-
  parameter int unsigned PC_ENTRIES = 1024,
  parameter int unsigned DEPTH    = 8
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    pc_en,       // particle cache on
  input  logic    inz_en,      // INZ on
  input  logic [7:0] pc_thresh,
  // edge side
  input  link_t   e_in,
  output credit_t e_in_cred,
  output link_t   e_out,
  input  credit_t e_out_cred,
  // channel side
  output chrec_t  tx,
  input  logic    tx_ready,
  input  chrec_t  rx,
  output logic    rx_ready
);
  localparam int unsigned IQD = DEPTH * EDGE_NV;
  localparam int unsigned CW  = $clog2(DEPTH + 1);

  // ============================================================ transmit
  flit_t ti_h;
  logic [$clog2(IQD+1)-1:0] ti_n;
  logic ti_pop;
  flit_fifo #(.DEPTH(IQD)) u_tiq (.clk, .rst_n, .push(e_in.valid), .din(e_in.flit),
    .pop(ti_pop), .head(ti_h), .count(ti_n));

  // output record queue
  chrec_t oq [4];
  logic [1:0] oq_r, oq_w;
  logic [2:0] oq_n;
  logic [1:0] inflight;        // records in the two pipeline stages

  logic [1:0] fcnt [1 << FID_W];
  logic       s0_v, s0_pos, s0_drop;
  flit_t      s0;

  always_comb begin
    s0 = ti_h;
    ti_pop = (ti_n != 0) && (32'(oq_n) + 32'(inflight) < 4);
    s0_v = ti_pop;
    s0_pos = pc_en && ti_h.hdr.ptype == PT_POS;
    s0_drop = 1'b0;
    if (ti_h.hdr.ptype == PT_FENCE) begin
      // keep only the last of the four copies, and only with hops left
      if (fcnt[fence_id(ti_h.hdr)] != 2'(EDGE_REQ_NV - 1) || fence_hops(ti_h.hdr) == 4'd0)
        s0_drop = 1'b1;
      s0.hdr.pid[9:6] = fence_hops(ti_h.hdr) - 4'd1;
    end
    // one hop along this channel's dimension
    case (DIR)
      0: s0.hdr.dz = ti_h.hdr.dz - 4'sd1;
      1: s0.hdr.dz = ti_h.hdr.dz + 4'sd1;
      2: s0.hdr.dy = ti_h.hdr.dy - 4'sd1;
      3: s0.hdr.dy = ti_h.hdr.dy + 4'sd1;
      4: s0.hdr.dx = ti_h.hdr.dx - 4'sd1;
      default: s0.hdr.dx = ti_h.hdr.dx + 4'sd1;
    endcase
    if (ti_h.hdr.ptype == PT_FENCE) begin
      s0.hdr.dx = '0; s0.hdr.dy = '0; s0.hdr.dz = '0;
    end
  end

  // stage 1: particle cache (position packets) or a plain register
  logic s1_v, s1_pos;
  flit_t s1;
  logic pcs_v; chk_e pcs_kind; logic [9:0] pcs_idx; hdr_t pcs_hdr; logic [127:0] pcs_pay;
  particle_cache #(.MODE(0), .ENTRIES(PC_ENTRIES)) u_pcs (.clk, .rst_n, .thresh(pc_thresh),
    .ts_tick(s0_v && ti_h.hdr.ptype == PT_TSEND),
    .in_valid(s0_v && s0_pos), .in_kind(CK_PLAIN), .in_idx(10'd0), .in_hdr(s0.hdr),
    .in_pay(s0.pay), .out_valid(pcs_v), .out_kind(pcs_kind), .out_idx(pcs_idx),
    .out_hdr(pcs_hdr), .out_pay(pcs_pay));

  logic [127:0] enc_in, enc_bytes;
  logic [4:0]   enc_n;
  logic         enc_raw;
  inz_encoder u_enc (.pay(enc_in), .bytes(enc_bytes), .nbytes(enc_n), .raw(enc_raw));

  chrec_t rec;
  always_comb begin
    rec = '0;
    rec.valid = 1'b1;
    if (s1_pos) begin
      rec.kind = pcs_kind; rec.hdr = pcs_hdr; rec.idx = pcs_idx; enc_in = pcs_pay;
    end else begin
      rec.kind = CK_PLAIN; rec.hdr = s1.hdr; enc_in = s1.pay;
    end
    if (inz_en) begin
      rec.bytes = enc_bytes; rec.nbytes = enc_n;
    end else begin
      rec.bytes = enc_in; rec.nbytes = 5'd16;
    end
  end

  always_ff @(posedge clk) begin
    if (s1_v) oq[oq_w] <= rec;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_pos <= 1'b0; s1 <= '0;
      oq_r <= '0; oq_w <= '0; oq_n <= '0;
      e_in_cred <= '0;
      for (int f = 0; f < (1 << FID_W); f++) fcnt[f] <= '0;
    end else begin
      s1_v   <= s0_v && !s0_drop;
      s1_pos <= s0_pos;
      s1     <= s0;
      if (s0_v && ti_h.hdr.ptype == PT_FENCE)
        fcnt[fence_id(ti_h.hdr)] <= (fcnt[fence_id(ti_h.hdr)] == 2'(EDGE_REQ_NV - 1))
                                    ? 2'd0 : fcnt[fence_id(ti_h.hdr)] + 2'd1;
      if (s1_v) oq_w <= oq_w + 2'd1;
      if (tx_ready && oq_n != 0) oq_r <= oq_r + 2'd1;
      oq_n <= oq_n + 3'(s1_v) - 3'(tx_ready && oq_n != 0);
      e_in_cred.valid <= ti_pop;
      e_in_cred.vc    <= ti_h.hdr.vc;
    end
  end
  assign inflight = 2'(s1_v);
  always_comb begin
    tx = oq[oq_r];
    tx.valid = (oq_n != 0);
  end

  // ============================================================ receive
  logic [127:0] dec_pay;
  inz_decoder u_dec (.bytes(rx.bytes), .nbytes(rx.nbytes), .pay(dec_pay));

  logic pcr_v; chk_e pcr_kind; logic [9:0] pcr_idx; hdr_t pcr_hdr; logic [127:0] pcr_pay;
  logic rx_take;
  assign rx_take = rx.valid && rx_ready;
  particle_cache #(.MODE(1), .ENTRIES(PC_ENTRIES)) u_pcr (.clk, .rst_n, .thresh(pc_thresh),
    .ts_tick(rx_take && rx.hdr.ptype == PT_TSEND),
    .in_valid(rx_take && rx.kind != CK_PLAIN), .in_kind(rx.kind), .in_idx(rx.idx),
    .in_hdr(rx.hdr), .in_pay(dec_pay), .out_valid(pcr_v), .out_kind(pcr_kind),
    .out_idx(pcr_idx), .out_hdr(pcr_hdr), .out_pay(pcr_pay));

  logic r1_v;
  flit_t r1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r1_v <= 1'b0; r1 <= '0;
    end else begin
      r1_v <= rx_take && rx.kind == CK_PLAIN;
      r1   <= '{hdr: rx.hdr, pay: dec_pay};
    end
  end

  flit_t rq_h, rq_in;
  logic [CW-1:0] rq_n;
  logic rq_pop;
  always_comb begin
    rq_in = pcr_v ? '{hdr: pcr_hdr, pay: pcr_pay} : r1;
    if (rq_in.hdr.resp) rq_in.hdr.vc = 3'(EDGE_NV - 1);
    else                rq_in.hdr.vc = 3'((int'(rq_in.hdr.vc) + 1) % int'(EDGE_REQ_NV));
  end
  flit_fifo #(.DEPTH(DEPTH)) u_rq (.clk, .rst_n, .push(pcr_v || r1_v), .din(rq_in),
    .pop(rq_pop), .head(rq_h), .count(rq_n));
  assign rx_ready = (32'(rq_n) + 2 < DEPTH);

  logic [CW-1:0] e_cred [EDGE_NV];
  logic [1:0] rep;
  flit_t eo;
  logic  eo_v;
  always_comb begin
    eo = rq_h; eo_v = 1'b0; rq_pop = 1'b0;
    if (rq_n != 0) begin
      if (rq_h.hdr.ptype == PT_FENCE) begin
        eo.hdr.vc = 3'(rep);
        if (e_cred[rep] != 0) begin
          eo_v = 1'b1;
          rq_pop = (rep == 2'(EDGE_REQ_NV - 1));
        end
      end else if (e_cred[rq_h.hdr.vc] != 0) begin
        eo_v = 1'b1; rq_pop = 1'b1;
      end
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_out <= '0; rep <= '0;
      for (int v = 0; v < int'(EDGE_NV); v++) e_cred[v] <= CW'(DEPTH);
    end else begin
      e_out.valid <= eo_v;
      e_out.flit  <= eo;
      if (eo_v && rq_h.hdr.ptype == PT_FENCE)
        rep <= (rep == 2'(EDGE_REQ_NV - 1)) ? 2'd0 : rep + 2'd1;
      for (int v = 0; v < int'(EDGE_NV); v++)
        e_cred[v] <= e_cred[v] + CW'(e_out_cred.valid && int'(e_out_cred.vc) == v)
                               - CW'(eo_v && int'(eo.hdr.vc) == v);
    end
  end
endmodule
