// vc_router: input-queued virtual-channel router with network-fence merging
// and multicast.  One module serves as every router of the network: the
// Core Router's four sub-routers (TRTR, URTR and the two VRTRs) and the Edge
// Router (ERTR); KIND selects the routing function and the port map.
//
// Each input port has one queue of DEPTH flits per VC.  Upstream routers send
// only when they hold a credit for that VC, and a credit goes back each time a
// flit leaves a queue, so queues never overflow.  Every packet is a single
// flit, so virtual cut-through reduces to moving whole flits.  Each cycle, for
// each output port, a round-robin arbiter picks one queue head that wants that
// output and whose VC has a downstream credit; an input port releases at most
// one flit per cycle.  The VC of a flit is kept from input to output.
//
// Network fence: a fence flit at a queue head is not forwarded at once.  The
// input port keeps a fence counter per fence id (per fence id and VC when
// FENCE_PER_VC is set, as in the Edge Router).  While counter+1 is below the
// expected count configured for the fence's pattern on that input port, the
// fence is absorbed and the counter incremented.  The fence that completes the
// count is sent to every output port whose bit is set in that input port's
// fence output mask for the pattern, one copy per port, and the counter is
// cleared.  Other packets keep flowing meanwhile.  Because the fence waits its
// turn in the same queue as the packets sent before it, it never overtakes
// them.
//
// Follows the paper: fence counters per input port with expected count and
// output mask set by software per fence pattern, merging at input ports,
// multicast by mask, counter reset on send, per-VC counters and 96 counters
// per input port in the Edge Router, 8-flit queues per VC, 2 VCs in the core
// and 5 in the edge network, per-hop latency of 2 (URTR) and 3 (ERTR) cycles,
// U-then-V routing in the core, a column of intra-dimension traffic in the
// Edge Network.  Own choices: the header layout, port numbering, single-flit
// packets, round-robin allocation, the pseudo-random column choice taken from
// header bits, the channel-row map, and no separate control path running
// ahead of the data (latency is modelled by LAT stages instead).
//
// Ports (per KIND):
//   TRTR   0 GC0, 1 GC1, 2 BC, 3 URTR
//   URTR   0 U- (west), 1 U+ (east), 2 TRTR, 3 VRTR_S
//   VRTR_S 0 V- (next row down), 1 PPIM1, 2 URTR, 3 VRTR_N
//   VRTR_N 0 V+ (next row up), 1 PPIM0, 2 VRTR_S
//   ERTR   0 N, 1 S, 2 toward the core (Row Adapter at column 0),
//          3 away from the core (Channel Adapter at column 2), 4 ICB0, 5 ICB1
// Timing: a flit presented at an input in cycle t appears at an output in
// cycle t+LAT when it meets no contention (LAT >= 2).
module vc_router
  import a3_pkg::*;
#(
  parameter int unsigned NP          = 4,
  parameter int unsigned NV          = 2,
  parameter int unsigned DEPTH       = 8,
  parameter int unsigned KIND        = 1,   // 0 TRTR, 1 URTR, 2 VRTR_S, 3 VRTR_N, 4 ERTR
  parameter int unsigned MY_U        = 0,   // tile column (core)
  parameter int unsigned MY_V        = 0,   // tile row (core) or edge row
  parameter int unsigned MY_C        = 0,   // edge column, 0 next to the core
  parameter int unsigned LAT         = 2,
  parameter int unsigned NFC         = 14,  // fence counters per input port
  parameter bit          FENCE_PER_VC = 1'b0,
  parameter int unsigned ROUTER_ID   = 0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  link_t   in_link  [NP],
  output credit_t in_cred  [NP],
  output link_t   out_link [NP],
  input  credit_t out_cred [NP],
  input  fcfg_t   fcfg
);
  localparam int unsigned QW  = $clog2(DEPTH);
  localparam int unsigned CW  = $clog2(DEPTH + 1);
  localparam int unsigned FCW = $clog2(NP + 1);     // fence counter width
  localparam int unsigned FIW = (NFC > 1) ? $clog2(NFC) : 1;
  localparam int unsigned NR  = NP * NV;

  // ------------------------------------------------------------ routing
  localparam int unsigned K_TRTR = 0, K_URTR = 1, K_VRTS = 2, K_VRTN = 3, K_ERTR = 4;

  function automatic bit remote(hdr_t h);
    return (h.dx != 0) || (h.dy != 0) || (h.dz != 0) || h.dst_ep == EP_ICB0 || h.dst_ep == EP_ICB1;
  endfunction

  // channel row map of one edge: row r serves direction r/2 in the order
  // Z+, Z-, Y+, Y-, X+, X-, slice r%2
  function automatic int next_dir(hdr_t h);   // -1: node reached
    int d;
    logic signed [3:0] off [3];
    off[0] = h.dx; off[1] = h.dy; off[2] = h.dz;
    for (int s = 2; s >= 0; s--) begin
      int dim;
      case (h.dord)
        3'd0: dim = (s == 0) ? 0 : (s == 1) ? 1 : 2;   // XYZ
        3'd1: dim = (s == 0) ? 0 : (s == 1) ? 2 : 1;   // XZY
        3'd2: dim = (s == 0) ? 1 : (s == 1) ? 0 : 2;   // YXZ
        3'd3: dim = (s == 0) ? 1 : (s == 1) ? 2 : 0;   // YZX
        3'd4: dim = (s == 0) ? 2 : (s == 1) ? 0 : 1;   // ZXY
        default: dim = (s == 0) ? 2 : (s == 1) ? 1 : 0; // ZYX
      endcase
      if (off[dim] != 0) d = 2 * (2 - dim) + (off[dim] < 0 ? 1 : 0);
    end
    if (h.dx == 0 && h.dy == 0 && h.dz == 0) d = -1;
    return d;
  endfunction

  function automatic int route(hdr_t h);
    int o;
    o = 0;
    case (KIND)
      K_TRTR: begin
        if (!remote(h) && h.dst_u == 5'(MY_U) && h.dst_v == 4'(MY_V) &&
            (h.dst_ep == EP_GC0 || h.dst_ep == EP_GC1 || h.dst_ep == EP_BC))
          o = (h.dst_ep == EP_GC0) ? 0 : (h.dst_ep == EP_GC1) ? 1 : 2;
        else
          o = 3;
      end
      K_URTR: begin
        if (remote(h))                  o = h.side ? 1 : 0;
        else if (h.dst_u < 5'(MY_U))    o = 0;
        else if (h.dst_u > 5'(MY_U))    o = 1;
        else if (h.dst_v == 4'(MY_V) && h.dst_ep != EP_PPIM0 && h.dst_ep != EP_PPIM1) o = 2;
        else                            o = 3;
      end
      K_VRTS: begin
        if (h.dst_v > 4'(MY_V))          o = 0;
        else if (h.dst_v < 4'(MY_V))     o = 3;
        else if (h.dst_ep == EP_PPIM1)   o = 1;
        else if (h.dst_ep == EP_PPIM0)   o = 3;
        else                             o = 2;
      end
      K_VRTN: begin
        if (h.dst_v < 4'(MY_V))          o = 0;
        else if (h.dst_v > 4'(MY_V))     o = 2;
        else if (h.dst_ep == EP_PPIM0)   o = 1;
        else                             o = 2;
      end
      default: begin   // ERTR
        int nd, trow, col;
        bit deliver, intra;
        nd      = next_dir(h);
        deliver = (nd < 0);
        trow    = deliver ? int'(h.dst_v) : 2 * nd + int'(h.slice);
        col     = int'({1'b0, h.addr[0] ^ h.pid[0]});           // column 0 or 1
        intra   = !deliver && (MY_C == 2) && ((trow / 4) == (int'(MY_V) / 4));
        if (intra) begin
          // same torus dimension: stay in the outermost column
          o = (trow < int'(MY_V)) ? 0 : (trow > int'(MY_V)) ? 1 : 3;
        end else if (MY_C == 2) begin
          o = 2;
        end else if (trow != int'(MY_V)) begin
          if (int'(MY_C) == col) o = (trow < int'(MY_V)) ? 0 : 1;
          else                   o = (int'(MY_C) < col) ? 3 : 2;
        end else if (!deliver) begin
          o = 3;
        end else if (MY_C != 0) begin
          o = 2;
        end else begin
          o = (h.dst_ep == EP_ICB0) ? 4 : (h.dst_ep == EP_ICB1) ? 5 : 2;
        end
      end
    endcase
    if (o >= int'(NP)) o = int'(NP) - 1;
    return o;
  endfunction

  // ------------------------------------------------------------ state
  flit_t          q     [NP][NV][DEPTH];
  logic [QW-1:0]  rd_p  [NP][NV];
  logic [QW-1:0]  wr_p  [NP][NV];
  logic [CW-1:0]  qcnt  [NP][NV];
  logic [CW-1:0]  cred  [NP][NV];          // downstream credits per output, VC
  logic [FCW-1:0] fctr  [NP][NFC];
  logic [3:0]     f_exp [NP][NPAT];
  logic [NP-1:0]  f_msk [NP][NPAT];
  logic           mc_on [NP][NV];
  logic [NP-1:0]  mc_rem[NP][NV];
  logic [$clog2(NR)-1:0] rr [NP];

  // ------------------------------------------------------------ allocation
  logic [NP-1:0]  req   [NP][NV];          // outputs wanted by each head
  logic           merge [NP][NV];          // head fence is absorbed
  logic [FIW-1:0] fidx  [NP][NV];
  logic [NP-1:0]  gnt   [NP][NV];          // outputs granted to each head
  logic           pop   [NP][NV];
  link_t          xbar  [NP];
  logic [$clog2(NR)-1:0] win [NP];
  logic           won   [NP];

  always_comb begin
    for (int p = 0; p < int'(NP); p++)
      for (int v = 0; v < int'(NV); v++) begin
        hdr_t       h;
        int         fi;
        logic [3:0] ex;
        logic [NP-1:0] mk;
        logic [4:0] c1;
        h = q[p][v][rd_p[p][v]].hdr;
        req[p][v]   = '0;
        merge[p][v] = 1'b0;
        fi = FENCE_PER_VC ? int'(fence_id(h)) * int'(NV) + v : int'(fence_id(h));
        if (fi >= int'(NFC)) fi = int'(NFC) - 1;
        fidx[p][v] = FIW'(fi);
        ex = f_exp[p][fence_pat(h)];
        mk = f_msk[p][fence_pat(h)];
        c1 = 5'(fctr[p][fi]) + 5'd1;
        if (qcnt[p][v] != 0) begin
          if (h.ptype == PT_FENCE) begin
            if (mc_on[p][v])
              req[p][v] = mc_rem[p][v];
            else if (c1 < {1'b0, ex})
              merge[p][v] = 1'b1;
            else
              req[p][v] = mk;
          end else begin
            req[p][v][route(h)] = 1'b1;
          end
        end
      end
  end

  always_comb begin
    logic          busy [NP];
    int            bvc  [NP];
    for (int p = 0; p < int'(NP); p++) begin
      busy[p] = 1'b0;
      bvc[p]  = 0;
      // an absorbed fence uses the input port for this cycle
      for (int v = 0; v < int'(NV); v++)
        if (merge[p][v] && !busy[p]) begin busy[p] = 1'b1; bvc[p] = v; end
      for (int v = 0; v < int'(NV); v++) gnt[p][v] = '0;
    end
    for (int o = 0; o < int'(NP); o++) begin
      won[o]  = 1'b0;
      win[o]  = '0;
      xbar[o] = '0;
      for (int k = 1; k <= int'(NR); k++) begin
        int idx, p, v;
        idx = (int'(rr[o]) + k) % int'(NR);
        p = idx / int'(NV);
        v = idx % int'(NV);
        if (!won[o] && req[p][v][o] && cred[o][v] != 0 &&
            (!busy[p] || (bvc[p] == v && !merge[p][v]))) begin
          won[o]    = 1'b1;
          win[o]    = $clog2(NR)'(idx);
          busy[p]   = 1'b1;
          bvc[p]    = v;
          gnt[p][v][o] = 1'b1;
          xbar[o].valid = 1'b1;
          xbar[o].flit  = q[p][v][rd_p[p][v]];
        end
      end
    end
    for (int p = 0; p < int'(NP); p++) begin
      for (int v = 0; v < int'(NV); v++) begin
        pop[p][v] = merge[p][v] && busy[p] && bvc[p] == v;
        if (req[p][v] != '0 && gnt[p][v] != '0 && (req[p][v] & ~gnt[p][v]) == '0)
          pop[p][v] = 1'b1;
        // a fence with an empty mask ends here
        if (qcnt[p][v] != 0 && q[p][v][rd_p[p][v]].hdr.ptype == PT_FENCE &&
            !merge[p][v] && req[p][v] == '0 && !busy[p])
          pop[p][v] = 1'b1;
      end
    end
  end

  // ------------------------------------------------------------ queues
  always_ff @(posedge clk) begin
    for (int p = 0; p < int'(NP); p++)
      if (in_link[p].valid)
        q[p][in_link[p].flit.hdr.vc % NV][wr_p[p][in_link[p].flit.hdr.vc % NV]] <= in_link[p].flit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < int'(NP); p++) begin
        for (int v = 0; v < int'(NV); v++) begin
          rd_p[p][v]   <= '0;
          wr_p[p][v]   <= '0;
          qcnt[p][v]   <= '0;
          cred[p][v]   <= CW'(DEPTH);
          mc_on[p][v]  <= 1'b0;
          mc_rem[p][v] <= '0;
        end
        for (int f = 0; f < int'(NFC); f++) fctr[p][f] <= '0;
        for (int t = 0; t < int'(NPAT); t++) begin
          f_exp[p][t] <= '0;
          f_msk[p][t] <= '0;
        end
        rr[p]      <= '0;
        in_cred[p] <= '0;
      end
    end else begin
      for (int p = 0; p < int'(NP); p++) begin
        in_cred[p] <= '0;
        for (int v = 0; v < int'(NV); v++) begin
          logic inc, dec;
          inc = in_link[p].valid && (int'(in_link[p].flit.hdr.vc) % int'(NV)) == v;
          dec = pop[p][v];
          if (inc) wr_p[p][v] <= (32'(wr_p[p][v]) == DEPTH - 1) ? '0 : wr_p[p][v] + 1'b1;
          if (dec) rd_p[p][v] <= (32'(rd_p[p][v]) == DEPTH - 1) ? '0 : rd_p[p][v] + 1'b1;
          qcnt[p][v] <= qcnt[p][v] + CW'(inc) - CW'(dec);
          if (dec) begin
            in_cred[p].valid <= 1'b1;
            in_cred[p].vc    <= VC_W'(v);
          end
          // fence bookkeeping
          if (merge[p][v] && dec)
            fctr[p][fidx[p][v]] <= fctr[p][fidx[p][v]] + 1'b1;
          if (!merge[p][v] && dec && q[p][v][rd_p[p][v]].hdr.ptype == PT_FENCE) begin
            fctr[p][fidx[p][v]] <= '0;
            mc_on[p][v]         <= 1'b0;
          end else if (!merge[p][v] && gnt[p][v] != '0 &&
                       q[p][v][rd_p[p][v]].hdr.ptype == PT_FENCE) begin
            mc_on[p][v]  <= 1'b1;
            mc_rem[p][v] <= req[p][v] & ~gnt[p][v];
          end
        end
        // downstream credits
        for (int v = 0; v < int'(NV); v++) begin
          logic got, used;
          got  = out_cred[p].valid && (int'(out_cred[p].vc) % int'(NV)) == v;
          used = won[p] && (int'(win[p]) % int'(NV)) == v;
          cred[p][v] <= cred[p][v] + CW'(got) - CW'(used);
        end
        if (won[p]) rr[p] <= win[p];
      end
      if (fcfg.valid && 32'(fcfg.router_id) == ROUTER_ID && 32'(fcfg.port) < NP) begin
        f_exp[$clog2(NP)'(fcfg.port)][fcfg.pattern] <= fcfg.expected;
        f_msk[$clog2(NP)'(fcfg.port)][fcfg.pattern] <= fcfg.mask[NP-1:0];
      end
    end
  end

  // ------------------------------------------------------------ output stages
  link_t pipe [LAT-1][NP];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(LAT) - 1; s++)
        for (int o = 0; o < int'(NP); o++) pipe[s][o] <= '0;
    end else begin
      for (int o = 0; o < int'(NP); o++) pipe[0][o] <= xbar[o];
      for (int s = 1; s < int'(LAT) - 1; s++)
        for (int o = 0; o < int'(NP); o++) pipe[s][o] <= pipe[s-1][o];
    end
  end
  always_comb
    for (int o = 0; o < int'(NP); o++) out_link[o] = pipe[LAT-2][o];

  // a queue never receives a flit it has no room for
  for (genvar p = 0; p < NP; p++) begin : g_chk
    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      in_link[p].valid |-> qcnt[p][int'(in_link[p].flit.hdr.vc) % int'(NV)] < CW'(DEPTH)
                           || pop[p][int'(in_link[p].flit.hdr.vc) % int'(NV)]);
  end
endmodule
