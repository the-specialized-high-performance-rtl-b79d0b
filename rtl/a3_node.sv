// a3_node: the network of one Anton 3 chip (one node of the 3D torus).
//
// The chip is an array of ROWS x COLS Core Tiles flanked on the left and
// right by a column of ROWS Edge Tiles.  Each Core Tile has a Core Router
// (core_router) joined to its four mesh neighbours, and two Geometry Core
// memories (quad_mem) that take the packets addressed to the tile's two GCs:
// writes, counted writes, counted accumulates and GC-to-GC fences (which count
// at the quad named in the fence's address field).  The GCs themselves, the
// Bond Calculator and the two PPIMs are outside this block: their network
// links, and the GCs' memory ports, are ports of a3_node.
//
// Each Edge Tile holds three Edge Routers in a row (vc_router, KIND 4); with
// their vertical neighbours they form the Edge Network of that side, ROWS x 3
// routers.  The router next to the core meets the Core Network through a Row
// Adapter and the tile's two ICBs through two more Row Adapters (the ICBs are
// outside this block; their links are ports).  The outermost router feeds a
// Channel Adapter (channel_adapter) whose channel records are ports; the
// SERDES lanes are outside this block.  Edge row r carries the channel of
// torus direction r/2 (Z+, Z-, Y+, Y-, X+, X-) and slice r%2.
//
// Follows the paper: the tile array (12 x 24), two edges of 12 Edge Tiles with
// three Edge Routers each, Row Adapters for core and ICBs, one Channel Adapter
// per Edge Tile, mesh links, fence configuration by software.  Own choices:
// which edge row serves which direction (read off the chip figure), the
// 1-cycle register on vertical core links (making a V hop 5 cycles), and the
// configuration bus (one broadcast fcfg_t write addressed by router id:
// core router of tile (r,c) has ids 4*(r*COLS+c)+0..3, edge router (side s,
// row r, column k) has id 4*ROWS*COLS + 3*(s*ROWS+r) + k).
//
// Ports (arrays indexed [row][column] or [side][row]):
//   gc_in/gc_in_cred          packets from the GCs into the network
//   gc_* memory signals       the GCs' side of their SRAMs (see quad_mem)
//   bc_*, ppim_*, icb_*       links to the Bond Calculators, PPIMs and ICBs
//   ch_tx/ch_tx_ready, ch_rx/ch_rx_ready   channel records per Edge Tile
module a3_node
  import a3_pkg::*;
#(
  parameter int unsigned ROWS  = 12,
  parameter int unsigned COLS  = 24,
  parameter int unsigned QUADS = 8192,
  parameter int unsigned PC_ENTRIES = 1024,
  localparam int unsigned AW   = $clog2(QUADS)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  fcfg_t   fcfg,
  input  logic    pc_en,
  input  logic    inz_en,
  input  logic [7:0] pc_thresh,
  // Geometry Cores: network injection
  input  link_t   gc_in      [ROWS][COLS][2],
  output credit_t gc_in_cred [ROWS][COLS][2],
  // Geometry Cores: SRAM ports
  input  logic          gc_valid  [ROWS][COLS][2],
  output logic          gc_ready  [ROWS][COLS][2],
  input  logic          gc_we     [ROWS][COLS][2],
  input  logic          gc_clr    [ROWS][COLS][2],
  input  logic [AW-1:0] gc_addr   [ROWS][COLS][2],
  input  logic [127:0]  gc_wdata  [ROWS][COLS][2],
  input  logic [7:0]    gc_thresh [ROWS][COLS][2],
  output logic          gc_rvalid [ROWS][COLS][2],
  output logic [127:0]  gc_rdata  [ROWS][COLS][2],
  output logic [7:0]    gc_rcount [ROWS][COLS][2],
  // Bond Calculator and PPIMs: network links
  input  link_t   bc_in        [ROWS][COLS],
  output credit_t bc_in_cred   [ROWS][COLS],
  output link_t   bc_out       [ROWS][COLS],
  input  credit_t bc_out_cred  [ROWS][COLS],
  input  link_t   ppim_in      [ROWS][COLS][2],
  output credit_t ppim_in_cred [ROWS][COLS][2],
  output link_t   ppim_out     [ROWS][COLS][2],
  input  credit_t ppim_out_cred[ROWS][COLS][2],
  // ICBs: links through their Row Adapters
  input  link_t   icb_in       [2][ROWS][2],
  output credit_t icb_in_cred  [2][ROWS][2],
  output link_t   icb_out      [2][ROWS][2],
  input  credit_t icb_out_cred [2][ROWS][2],
  // I/O channels
  output chrec_t  ch_tx        [2][ROWS],
  input  logic    ch_tx_ready  [2][ROWS],
  input  chrec_t  ch_rx        [2][ROWS],
  output logic    ch_rx_ready  [2][ROWS]
);
  // ------------------------------------------------------------ core tiles
  link_t   c_in  [ROWS][COLS][9], c_out [ROWS][COLS][9];
  credit_t c_ic  [ROWS][COLS][9], c_oc  [ROWS][COLS][9];
  // edge-facing links of the core mesh, per side and row
  link_t   ce_to_ra [2][ROWS], ra_to_ce [2][ROWS];
  credit_t ce_to_ra_c [2][ROWS], ra_to_ce_c [2][ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      core_router #(.MY_U(c), .MY_V(r), .BASE_ID(4 * (r * COLS + c))) u_cr (
        .clk, .rst_n, .in_link(c_in[r][c]), .in_cred(c_ic[r][c]),
        .out_link(c_out[r][c]), .out_cred(c_oc[r][c]), .fcfg);

      // registered vertical links: vdn leaves downward (V-), vup upward (V+)
      link_t vdn, vup;
      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n) begin
          vdn <= '0;
          vup <= '0;
        end else begin
          vdn <= c_out[r][c][3];
          vup <= c_out[r][c][2];
        end

      // U- (west)
      if (c == 0) begin : g_w
        assign c_in[r][c][0] = ra_to_ce[0][r];
        assign c_oc[r][c][0] = ra_to_ce_c[0][r];
      end else begin : g_w
        assign c_in[r][c][0] = c_out[r][c-1][1];
        assign c_oc[r][c][0] = c_ic[r][c-1][1];
      end
      // U+ (east)
      if (c == COLS - 1) begin : g_e
        assign c_in[r][c][1] = ra_to_ce[1][r];
        assign c_oc[r][c][1] = ra_to_ce_c[1][r];
      end else begin : g_e
        assign c_in[r][c][1] = c_out[r][c+1][0];
        assign c_oc[r][c][1] = c_ic[r][c+1][0];
      end
      // V+ (row above)
      if (r == 0) begin : g_n
        assign c_in[r][c][2] = '0;
        assign c_oc[r][c][2] = '0;
      end else begin : g_n
        assign c_in[r][c][2] = g_row[r-1].g_col[c].vdn;
        assign c_oc[r][c][2] = c_ic[r-1][c][3];
      end
      // V- (row below)
      if (r == ROWS - 1) begin : g_s
        assign c_in[r][c][3] = '0;
        assign c_oc[r][c][3] = '0;
      end else begin : g_s
        assign c_in[r][c][3] = g_row[r+1].g_col[c].vup;
        assign c_oc[r][c][3] = c_ic[r+1][c][2];
      end
      // endpoints
      assign c_in[r][c][4] = gc_in[r][c][0];
      assign c_in[r][c][5] = gc_in[r][c][1];
      assign gc_in_cred[r][c][0] = c_ic[r][c][4];
      assign gc_in_cred[r][c][1] = c_ic[r][c][5];
      assign c_in[r][c][6] = bc_in[r][c];
      assign bc_in_cred[r][c] = c_ic[r][c][6];
      assign bc_out[r][c] = c_out[r][c][6];
      assign c_oc[r][c][6] = bc_out_cred[r][c];
      for (genvar i = 0; i < 2; i++) begin : g_pp
        assign c_in[r][c][7 + i] = ppim_in[r][c][i];
        assign ppim_in_cred[r][c][i] = c_ic[r][c][7 + i];
        assign ppim_out[r][c][i] = c_out[r][c][7 + i];
        assign c_oc[r][c][7 + i] = ppim_out_cred[r][c][i];
      end

      // GC memories take every packet delivered to a GC port
      for (genvar g = 0; g < 2; g++) begin : g_gc
        link_t d;
        logic [1:0] kind;
        assign d = c_out[r][c][4 + g];
        always_comb
          case (d.flit.hdr.ptype)
            PT_CWRITE:          kind = 2'd1;
            PT_CACC, PT_FORCE:  kind = 2'd2;
            PT_FENCE:           kind = 2'd3;
            default:            kind = 2'd0;
          endcase
        credit_t cr;
        always_ff @(posedge clk or negedge rst_n)
          if (!rst_n) cr <= '0;
          else        cr <= '{valid: d.valid, vc: d.flit.hdr.vc};
        assign c_oc[r][c][4 + g] = cr;
        quad_mem #(.QUADS(QUADS)) u_mem (.clk, .rst_n,
          .nw_valid(d.valid), .nw_kind(kind), .nw_addr(d.flit.hdr.addr[AW-1:0]),
          .nw_data(d.flit.pay),
          .gc_valid(gc_valid[r][c][g]), .gc_ready(gc_ready[r][c][g]), .gc_we(gc_we[r][c][g]),
          .gc_clr(gc_clr[r][c][g]), .gc_addr(gc_addr[r][c][g]), .gc_wdata(gc_wdata[r][c][g]),
          .gc_thresh(gc_thresh[r][c][g]), .gc_rvalid(gc_rvalid[r][c][g]),
          .gc_rdata(gc_rdata[r][c][g]), .gc_rcount(gc_rcount[r][c][g]));
      end
    end
    // core mesh edge ports seen from the Row Adapters
    assign ce_to_ra[0][r]   = c_out[r][0][0];
    assign ce_to_ra_c[0][r] = c_ic[r][0][0];
    assign ce_to_ra[1][r]   = c_out[r][COLS-1][1];
    assign ce_to_ra_c[1][r] = c_ic[r][COLS-1][1];
  end

  // ------------------------------------------------------------ edge tiles
  for (genvar s = 0; s < 2; s++) begin : g_side
    link_t   e_in  [ROWS][3][6], e_out [ROWS][3][6];
    credit_t e_ic  [ROWS][3][6], e_oc  [ROWS][3][6];

    for (genvar r = 0; r < ROWS; r++) begin : g_er
      for (genvar k = 0; k < 3; k++) begin : g_ek
        localparam int unsigned NPK = (k == 0) ? 6 : 4;
        link_t   li [NPK], lo [NPK];
        credit_t ci [NPK], co [NPK];
        vc_router #(.NP(NPK), .NV(EDGE_NV), .KIND(4), .MY_V(r), .MY_C(k), .LAT(3),
                    .NFC(96), .FENCE_PER_VC(1'b1),
                    .ROUTER_ID(4 * ROWS * COLS + 3 * (s * ROWS + r) + k)) u_ertr (
          .clk, .rst_n, .in_link(li), .in_cred(co), .out_link(lo), .out_cred(ci), .fcfg);
        for (genvar p = 0; p < 6; p++) begin : g_p
          if (p < NPK) begin : g_used
            assign li[p] = e_in[r][k][p];
            assign ci[p] = e_oc[r][k][p];
            assign e_out[r][k][p] = lo[p];
            assign e_ic[r][k][p]  = co[p];
          end else begin : g_unused
            assign e_out[r][k][p] = '0;
            assign e_ic[r][k][p]  = '0;
            assign e_in[r][k][p]  = '0;
            assign e_oc[r][k][p]  = '0;
          end
        end
      end

      // Row Adapters: core (port 2 of column 0) and the two ICBs (ports 4, 5)
      link_t ra_e_out, ra_e_in;
      credit_t ra_e_out_c, ra_e_in_c;
      row_adapter #(.SEED(16'(16'hACE1 + 7 * (s * ROWS + r)))) u_ra (.clk, .rst_n,
        .c_in(ce_to_ra[s][r]), .c_in_cred(ra_to_ce_c[s][r]),
        .c_out(ra_to_ce[s][r]), .c_out_cred(ce_to_ra_c[s][r]),
        .e_in(e_out[r][0][2]), .e_in_cred(e_oc[r][0][2]),
        .e_out(e_in[r][0][2]), .e_out_cred(e_ic[r][0][2]));
      for (genvar i = 0; i < 2; i++) begin : g_icb
        row_adapter #(.SEED(16'(16'h1D0F + 5 * (s * ROWS + r) + 3 * i))) u_ra_icb (.clk, .rst_n,
          .c_in(icb_in[s][r][i]), .c_in_cred(icb_in_cred[s][r][i]),
          .c_out(icb_out[s][r][i]), .c_out_cred(icb_out_cred[s][r][i]),
          .e_in(e_out[r][0][4 + i]), .e_in_cred(e_oc[r][0][4 + i]),
          .e_out(e_in[r][0][4 + i]), .e_out_cred(e_ic[r][0][4 + i]));
      end

      // Channel Adapter on the outermost router
      channel_adapter #(.DIR((r / 2) % 6), .PC_ENTRIES(PC_ENTRIES)) u_ca (.clk, .rst_n,
        .pc_en, .inz_en, .pc_thresh,
        .e_in(e_out[r][2][3]), .e_in_cred(e_oc[r][2][3]),
        .e_out(e_in[r][2][3]), .e_out_cred(e_ic[r][2][3]),
        .tx(ch_tx[s][r]), .tx_ready(ch_tx_ready[s][r]),
        .rx(ch_rx[s][r]), .rx_ready(ch_rx_ready[s][r]));

      // mesh links inside the Edge Network
      for (genvar k = 0; k < 3; k++) begin : g_vk
        if (r == 0) begin : g_n
          assign e_in[r][k][0] = '0;
          assign e_oc[r][k][0] = '0;
        end else begin : g_n
          assign e_in[r][k][0] = e_out[r-1][k][1];
          assign e_oc[r][k][0] = e_ic[r-1][k][1];
        end
        if (r == ROWS - 1) begin : g_s
          assign e_in[r][k][1] = '0;
          assign e_oc[r][k][1] = '0;
        end else begin : g_s
          assign e_in[r][k][1] = e_out[r+1][k][0];
          assign e_oc[r][k][1] = e_ic[r+1][k][0];
        end
      end
      // between columns
      assign e_in[r][1][2] = e_out[r][0][3];
      assign e_oc[r][1][2] = e_ic[r][0][3];
      assign e_in[r][0][3] = e_out[r][1][2];
      assign e_oc[r][0][3] = e_ic[r][1][2];
      assign e_in[r][2][2] = e_out[r][1][3];
      assign e_oc[r][2][2] = e_ic[r][1][3];
      assign e_in[r][1][3] = e_out[r][2][2];
      assign e_oc[r][1][3] = e_ic[r][2][2];
    end
  end
endmodule
