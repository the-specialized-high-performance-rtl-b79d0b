// core_router: the router of one Core Tile, built from four sub-routers.
//
// The Core Network is a 2D mesh of these routers with fixed U-then-V
// dimension-order routing: a packet first moves along its row (U) to the
// destination column, then along the column (V) to the destination row.
// Packets for other chips or for the Interaction Control Blocks travel along
// U only, to the left or right chip edge selected by the header's side bit.
// Inside the tile, the URTR handles U traffic, two VRTRs handle V traffic and
// the PPIMs, and the TRTR connects the two Geometry Cores and the Bond
// Calculator.  Every sub-router has at most four ports; a V hop passes both
// VRTRs.
//
// Follows the paper: the four sub-routers and their roles, the four-port
// limit, two VCs (request, response), 8-flit queues, U-then-V routing, 2-cycle
// U hops.  Own choice: how the sub-routers are wired to each other (the
// figure's connections are drawn without port numbers), which was picked so
// that no sub-router needs more than four ports.  With the 1-cycle register
// on each V link in the mesh (core_mesh) a V hop takes 2+2+1 = 5 cycles, the
// paper's figure.
//
// Ports: links and credits in the order 0 U- (west), 1 U+ (east), 2 V+ (up),
// 3 V- (down), 4 GC0, 5 GC1, 6 BC, 7 PPIM0, 8 PPIM1.  Sub-router fence
// configuration ids are BASE_ID+0 TRTR, +1 URTR, +2 VRTR_S, +3 VRTR_N.
module core_router
  import a3_pkg::*;
#(
  parameter int unsigned MY_U    = 0,
  parameter int unsigned MY_V    = 0,
  parameter int unsigned BASE_ID = 0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  link_t   in_link  [9],
  output credit_t in_cred  [9],
  output link_t   out_link [9],
  input  credit_t out_cred [9],
  input  fcfg_t   fcfg
);
  link_t   t_i [4], t_o [4], u_i [4], u_o [4], s_i [4], s_o [4], n_i [3], n_o [3];
  credit_t t_ci[4], t_co[4], u_ci[4], u_co[4], s_ci[4], s_co[4], n_ci[3], n_co[3];

  // TRTR: 0 GC0, 1 GC1, 2 BC, 3 URTR
  vc_router #(.NP(4), .NV(CORE_NV), .KIND(0), .MY_U(MY_U), .MY_V(MY_V), .LAT(2),
              .NFC(14), .ROUTER_ID(BASE_ID + 0)) u_trtr (
    .clk, .rst_n, .in_link(t_i), .in_cred(t_co), .out_link(t_o), .out_cred(t_ci), .fcfg);
  // URTR: 0 U-, 1 U+, 2 TRTR, 3 VRTR_S
  vc_router #(.NP(4), .NV(CORE_NV), .KIND(1), .MY_U(MY_U), .MY_V(MY_V), .LAT(2),
              .NFC(14), .ROUTER_ID(BASE_ID + 1)) u_urtr (
    .clk, .rst_n, .in_link(u_i), .in_cred(u_co), .out_link(u_o), .out_cred(u_ci), .fcfg);
  // VRTR_S: 0 V-, 1 PPIM1, 2 URTR, 3 VRTR_N
  vc_router #(.NP(4), .NV(CORE_NV), .KIND(2), .MY_U(MY_U), .MY_V(MY_V), .LAT(2),
              .NFC(14), .ROUTER_ID(BASE_ID + 2)) u_vrtr_s (
    .clk, .rst_n, .in_link(s_i), .in_cred(s_co), .out_link(s_o), .out_cred(s_ci), .fcfg);
  // VRTR_N: 0 V+, 1 PPIM0, 2 VRTR_S
  vc_router #(.NP(3), .NV(CORE_NV), .KIND(3), .MY_U(MY_U), .MY_V(MY_V), .LAT(2),
              .NFC(14), .ROUTER_ID(BASE_ID + 3)) u_vrtr_n (
    .clk, .rst_n, .in_link(n_i), .in_cred(n_co), .out_link(n_o), .out_cred(n_ci), .fcfg);

  always_comb begin
    // external inputs and the credits returned for them
    u_i[0] = in_link[0];  in_cred[0] = u_co[0];
    u_i[1] = in_link[1];  in_cred[1] = u_co[1];
    n_i[0] = in_link[2];  in_cred[2] = n_co[0];
    s_i[0] = in_link[3];  in_cred[3] = s_co[0];
    t_i[0] = in_link[4];  in_cred[4] = t_co[0];
    t_i[1] = in_link[5];  in_cred[5] = t_co[1];
    t_i[2] = in_link[6];  in_cred[6] = t_co[2];
    n_i[1] = in_link[7];  in_cred[7] = n_co[1];
    s_i[1] = in_link[8];  in_cred[8] = s_co[1];
    // external outputs and their credits
    out_link[0] = u_o[0];  u_ci[0] = out_cred[0];
    out_link[1] = u_o[1];  u_ci[1] = out_cred[1];
    out_link[2] = n_o[0];  n_ci[0] = out_cred[2];
    out_link[3] = s_o[0];  s_ci[0] = out_cred[3];
    out_link[4] = t_o[0];  t_ci[0] = out_cred[4];
    out_link[5] = t_o[1];  t_ci[1] = out_cred[5];
    out_link[6] = t_o[2];  t_ci[2] = out_cred[6];
    out_link[7] = n_o[1];  n_ci[1] = out_cred[7];
    out_link[8] = s_o[1];  s_ci[1] = out_cred[8];
    // TRTR <-> URTR
    u_i[2] = t_o[3];  t_ci[3] = u_co[2];
    t_i[3] = u_o[2];  u_ci[2] = t_co[3];
    // URTR <-> VRTR_S
    s_i[2] = u_o[3];  u_ci[3] = s_co[2];
    u_i[3] = s_o[2];  s_ci[2] = u_co[3];
    // VRTR_S <-> VRTR_N
    n_i[2] = s_o[3];  s_ci[3] = n_co[2];
    s_i[3] = n_o[2];  n_ci[2] = s_co[3];
  end
endmodule
