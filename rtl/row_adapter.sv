// row_adapter: joins the Core Network (or an ICB) to the Edge Network.
//
// Going out (core -> edge) it picks the inter-node route of each request:
// one of the six dimension orders and one of the two channel slices, drawn
// from a free-running LFSR so that routes are randomised independently of
// load.  Responses always use the XYZ order.  Core VCs (0 request, 1 response)
// become edge VCs (request VC 0, response VC 4).  A network fence entering the
// Edge Network is copied onto all four request VCs, because the torus routes
// may use any of them.  Coming in (edge -> core) it merges those four copies
// back into one fence and maps edge VCs back to core VCs.
//
// Each direction buffers requests and responses in separate queues, so a
// blocked request never holds up a response, and gives responses priority.
// Credits: upstream on each side holds DEPTH credits per VC; the adapter
// returns one per flit it takes from a queue.  Downstream credits are counted
// per VC the same way.
//
// Follows the paper: the adapter between core and edge networks, randomised
// oblivious choice among the six dimension orders, XYZ-only responses on a
// single VC, fences on all request VCs.  Own choices: everything about its
// insides (the paper only names the block), the LFSR, the queue sizes, the
// priority, and leaving out the adapters' fence flow control (which the paper
// mentions without describing).
// Timing: a flit taken in cycle t can leave in cycle t+1.
module row_adapter
  import a3_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  parameter logic [15:0] SEED  = 16'hACE1
) (
  input  logic    clk,
  input  logic    rst_n,
  // core side
  input  link_t   c_in,
  output credit_t c_in_cred,
  output link_t   c_out,
  input  credit_t c_out_cred,
  // edge side
  input  link_t   e_in,
  output credit_t e_in_cred,
  output link_t   e_out,
  input  credit_t e_out_cred
);
  localparam int unsigned CW = $clog2(DEPTH + 1);
  localparam int unsigned RQD = DEPTH * EDGE_REQ_NV;   // edge request VCs share a queue

  logic [15:0] lfsr;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) lfsr <= SEED;
    else        lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};

  // ---------------------------------------------------------------- core -> edge
  flit_t ce_h [2];
  logic [CW-1:0] ce_n [2];
  logic ce_pop [2];
  for (genvar c = 0; c < 2; c++) begin : g_ce
    flit_fifo #(.DEPTH(DEPTH)) u_q (.clk, .rst_n,
      .push(c_in.valid && c_in.flit.hdr.resp == 1'(c)), .din(c_in.flit),
      .pop(ce_pop[c]), .head(ce_h[c]), .count(ce_n[c]));
  end

  logic [CW-1:0] e_cred [EDGE_NV];
  logic [1:0]    rep;            // fence copy being sent
  flit_t         eo;
  logic          eo_v;
  int            eo_vc;

  always_comb begin
    eo_v = 1'b0; eo = '0; eo_vc = 0;
    ce_pop[0] = 1'b0; ce_pop[1] = 1'b0;
    if (ce_n[1] != 0 && e_cred[EDGE_NV-1] != 0) begin
      eo = ce_h[1];
      eo.hdr.vc = 3'(EDGE_NV - 1);
      eo.hdr.dord = 3'd0;
      eo.hdr.slice = lfsr[0];
      eo_v = 1'b1; eo_vc = int'(EDGE_NV) - 1;
      ce_pop[1] = 1'b1;
    end else if (ce_n[0] != 0) begin
      eo = ce_h[0];
      if (ce_h[0].hdr.ptype == PT_FENCE) begin
        eo_vc = int'(rep);
        if (e_cred[rep] != 0) begin
          eo_v = 1'b1;
          ce_pop[0] = (rep == 2'(EDGE_REQ_NV - 1));
        end
      end else if (e_cred[0] != 0) begin
        eo_v = 1'b1;
        ce_pop[0] = 1'b1;
        eo.hdr.dord  = 3'(lfsr[15:8] % 8'd6);
        eo.hdr.slice = lfsr[0];
      end
      eo.hdr.vc = 3'(eo_vc);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rep <= '0;
      e_out <= '0;
      c_in_cred <= '0;
      for (int v = 0; v < int'(EDGE_NV); v++) e_cred[v] <= CW'(DEPTH);
    end else begin
      e_out.valid <= eo_v;
      e_out.flit  <= eo;
      if (eo_v && !ce_pop[1] && ce_h[0].hdr.ptype == PT_FENCE)
        rep <= (rep == 2'(EDGE_REQ_NV - 1)) ? 2'd0 : rep + 2'd1;
      for (int v = 0; v < int'(EDGE_NV); v++)
        e_cred[v] <= e_cred[v] + CW'(e_out_cred.valid && int'(e_out_cred.vc) == v)
                               - CW'(eo_v && eo_vc == v);
      c_in_cred.valid <= ce_pop[0] || ce_pop[1];
      c_in_cred.vc    <= ce_pop[1] ? 3'd1 : 3'd0;
    end
  end

  // ---------------------------------------------------------------- edge -> core
  flit_t ec_h [2];
  logic [$clog2(RQD+1)-1:0] ec_n0;
  logic [CW-1:0] ec_n1;
  logic ec_pop [2];
  flit_fifo #(.DEPTH(RQD)) u_eq0 (.clk, .rst_n,
    .push(e_in.valid && int'(e_in.flit.hdr.vc) < int'(EDGE_REQ_NV)), .din(e_in.flit),
    .pop(ec_pop[0]), .head(ec_h[0]), .count(ec_n0));
  flit_fifo #(.DEPTH(DEPTH)) u_eq1 (.clk, .rst_n,
    .push(e_in.valid && int'(e_in.flit.hdr.vc) >= int'(EDGE_REQ_NV)), .din(e_in.flit),
    .pop(ec_pop[1]), .head(ec_h[1]), .count(ec_n1));

  logic [CW-1:0] c_cred [2];
  logic [1:0]    fcnt [1 << FID_W];   // fence copies seen per fence id
  flit_t         co;
  logic          co_v, absorb;

  always_comb begin
    co_v = 1'b0; co = '0; absorb = 1'b0;
    ec_pop[0] = 1'b0; ec_pop[1] = 1'b0;
    if (ec_n1 != 0 && c_cred[1] != 0) begin
      co = ec_h[1]; co.hdr.vc = 3'd1; co_v = 1'b1; ec_pop[1] = 1'b1;
    end else if (ec_n0 != 0) begin
      co = ec_h[0]; co.hdr.vc = 3'd0;
      if (ec_h[0].hdr.ptype == PT_FENCE &&
          fcnt[fence_id(ec_h[0].hdr)] != 2'(EDGE_REQ_NV - 1)) begin
        absorb = 1'b1; ec_pop[0] = 1'b1;
      end else if (c_cred[0] != 0) begin
        co_v = 1'b1; ec_pop[0] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_out <= '0;
      e_in_cred <= '0;
      for (int c = 0; c < 2; c++) c_cred[c] <= CW'(DEPTH);
      for (int f = 0; f < (1 << FID_W); f++) fcnt[f] <= '0;
    end else begin
      c_out.valid <= co_v;
      c_out.flit  <= co;
      if (ec_pop[0] && ec_h[0].hdr.ptype == PT_FENCE)
        fcnt[fence_id(ec_h[0].hdr)] <= absorb ? fcnt[fence_id(ec_h[0].hdr)] + 2'd1 : 2'd0;
      for (int c = 0; c < 2; c++)
        c_cred[c] <= c_cred[c] + CW'(c_out_cred.valid && int'(c_out_cred.vc) == c)
                               - CW'(co_v && int'(co.hdr.vc) == c);
      e_in_cred.valid <= ec_pop[0] || ec_pop[1];
      e_in_cred.vc    <= ec_pop[1] ? 3'(EDGE_NV - 1) : ec_h[0].hdr.vc;
    end
  end
endmodule
