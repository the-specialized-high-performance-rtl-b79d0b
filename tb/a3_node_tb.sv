// a3_node_tb: two chips joined by their Z channels, end to end.
//
// Node A's Z+ channels (edge rows 0 and 1) feed node B's Z- channels (rows 2
// and 3) on both sides, and back.  The test:
//  1. a counted write between two tiles of A, picked up by a blocking read
//     that was issued before the data arrived (the read must stall);
//  2. a counted write from A to a GC of B, one torus hop away, through Row
//     Adapter, Edge Network, Channel Adapters, B's Edge Network and Core
//     Network; again picked up by a blocking read;
//  3. six time steps of position packets for eight particles from A to an ICB
//     of B, with end-of-step markers: every position must arrive exactly,
//     first sightings must allocate in the particle cache, later ones must hit
//     and be sent as short INZ records;
//  4. a network fence from both GCs of tile (0,0) of A, merged in the tile's
//     URTR and multicast by the TRTR of tile (0,1) to both of its GCs, where it
//     counts at a quad: nothing may arrive after the first fence, both GCs see
//     it after the second.
// Each mechanism (blocking-read stall, INZ shortening, cache allocate, cache
// hit, fence merge, fence multicast) is counted and must happen.
module a3_node_tb;
  import a3_pkg::*;
  localparam int R = 4, C = 4, Q = 64, AW = 6;
  logic clk = 0, rst_n = 0;
  fcfg_t fcfg;
  int checks = 0, failures = 0, cyc = 0;

  // per node signals, index n = 0 (A), 1 (B)
  link_t   gc_in      [2][R][C][2];
  credit_t gc_in_cred [2][R][C][2];
  logic gc_valid [2][R][C][2], gc_ready [2][R][C][2], gc_we [2][R][C][2], gc_clr [2][R][C][2];
  logic [AW-1:0] gc_addr [2][R][C][2];
  logic [127:0] gc_wdata [2][R][C][2], gc_rdata [2][R][C][2];
  logic [7:0] gc_thresh [2][R][C][2], gc_rcount [2][R][C][2];
  logic gc_rvalid [2][R][C][2];
  link_t bc_in [2][R][C], bc_out [2][R][C];
  credit_t bc_in_cred [2][R][C], bc_out_cred [2][R][C];
  link_t ppim_in [2][R][C][2], ppim_out [2][R][C][2];
  credit_t ppim_in_cred [2][R][C][2], ppim_out_cred [2][R][C][2];
  link_t icb_in [2][2][R][2], icb_out [2][2][R][2];
  credit_t icb_in_cred [2][2][R][2], icb_out_cred [2][2][R][2];
  chrec_t ch_tx [2][2][R], ch_rx [2][2][R];
  logic ch_tx_ready [2][2][R], ch_rx_ready [2][2][R];

  for (genvar n = 0; n < 2; n++) begin : g_node
    a3_node #(.ROWS(R), .COLS(C), .QUADS(Q), .PC_ENTRIES(64)) dut (
      .clk, .rst_n, .fcfg, .pc_en(1'b1), .inz_en(1'b1), .pc_thresh(8'd4),
      .gc_in(gc_in[n]), .gc_in_cred(gc_in_cred[n]),
      .gc_valid(gc_valid[n]), .gc_ready(gc_ready[n]), .gc_we(gc_we[n]), .gc_clr(gc_clr[n]),
      .gc_addr(gc_addr[n]), .gc_wdata(gc_wdata[n]), .gc_thresh(gc_thresh[n]),
      .gc_rvalid(gc_rvalid[n]), .gc_rdata(gc_rdata[n]), .gc_rcount(gc_rcount[n]),
      .bc_in(bc_in[n]), .bc_in_cred(bc_in_cred[n]), .bc_out(bc_out[n]), .bc_out_cred(bc_out_cred[n]),
      .ppim_in(ppim_in[n]), .ppim_in_cred(ppim_in_cred[n]), .ppim_out(ppim_out[n]),
      .ppim_out_cred(ppim_out_cred[n]),
      .icb_in(icb_in[n]), .icb_in_cred(icb_in_cred[n]), .icb_out(icb_out[n]),
      .icb_out_cred(icb_out_cred[n]),
      .ch_tx(ch_tx[n]), .ch_tx_ready(ch_tx_ready[n]), .ch_rx(ch_rx[n]), .ch_rx_ready(ch_rx_ready[n]));
  end

  // channels: A row r (Z+) <-> B row r^2 (Z-), same side; each link one cycle
  always_ff @(posedge clk) begin
    for (int s = 0; s < 2; s++)
      for (int r = 0; r < R; r++)
        for (int n = 0; n < 2; n++) begin
          ch_rx[1-n][s][r ^ 2] <= (ch_tx[n][s][r].valid && ch_rx_ready[1-n][s][r ^ 2]) ?
                                  ch_tx[n][s][r] : '0;
        end
  end
  always_comb
    for (int s = 0; s < 2; s++)
      for (int r = 0; r < R; r++)
        for (int n = 0; n < 2; n++)
          ch_tx_ready[n][s][r] = ch_rx_ready[1-n][s][r ^ 2];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------------------------------------------------------- monitors
  int n_alloc = 0, n_comp = 0, n_short = 0, bytes_pos = 0, n_pos_rec = 0;
  always @(posedge clk) if (rst_n)
    for (int s = 0; s < 2; s++)
      for (int r = 0; r < R; r++)
        if (ch_tx[0][s][r].valid && ch_tx_ready[0][s][r]) begin
          if (ch_tx[0][s][r].kind == CK_ALLOC) n_alloc++;
          if (ch_tx[0][s][r].kind == CK_COMP) n_comp++;
          if (ch_tx[0][s][r].nbytes < 5'd16) n_short++;
          if (ch_tx[0][s][r].hdr.ptype == PT_POS) begin
            n_pos_rec++;
            bytes_pos += int'(ch_tx[0][s][r].nbytes);
          end
        end

  logic [127:0] icb_got [int];
  int icb_n = 0;
  always @(posedge clk) if (rst_n)
    for (int s = 0; s < 2; s++)
      for (int r = 0; r < R; r++)
        for (int i = 0; i < 2; i++)
          if (icb_out[1][s][r][i].valid && icb_out[1][s][r][i].flit.hdr.ptype == PT_POS) begin
            icb_got[int'(icb_out[1][s][r][i].flit.hdr.pid)] = icb_out[1][s][r][i].flit.pay;
            icb_n++;
          end

  // ICB and endpoint sinks return a credit per flit
  always_ff @(posedge clk) begin
    for (int n = 0; n < 2; n++) begin
      for (int s = 0; s < 2; s++)
        for (int r = 0; r < R; r++)
          for (int i = 0; i < 2; i++)
            icb_out_cred[n][s][r][i] <= '{valid: icb_out[n][s][r][i].valid,
                                          vc: icb_out[n][s][r][i].flit.hdr.vc};
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          bc_out_cred[n][r][c] <= '{valid: bc_out[n][r][c].valid, vc: bc_out[n][r][c].flit.hdr.vc};
          for (int i = 0; i < 2; i++)
            ppim_out_cred[n][r][c][i] <= '{valid: ppim_out[n][r][c][i].valid,
                                           vc: ppim_out[n][r][c][i].flit.hdr.vc};
        end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (cycle %0d)", m, cyc); end
  endtask

  function automatic hdr_t mkh(ptype_e t, int u, int v, ep_e ep, int dz, int addr);
    hdr_t h;
    h = '0;
    h.ptype = t; h.dst_u = 5'(u); h.dst_v = 4'(v); h.dst_ep = ep;
    h.dz = 4'(dz); h.addr = 13'(addr);
    return h;
  endfunction

  task automatic inject(input int n, input int r, input int c, input int g, input hdr_t h,
                        input logic [127:0] p);
    gc_in[n][r][c][g] <= '{valid: 1'b1, flit: '{hdr: h, pay: p}};
    @(posedge clk);
    gc_in[n][r][c][g] <= '0;
  endtask

  task automatic inject_icb(input int n, input hdr_t h, input logic [127:0] p);
    icb_in[n][0][1][0] <= '{valid: 1'b1, flit: '{hdr: h, pay: p}};
    @(posedge clk);
    icb_in[n][0][1][0] <= '0;
  endtask

  task automatic bread(input int n, input int r, input int c, input int g, input int a, input int thr);
    gc_valid[n][r][c][g] <= 1; gc_we[n][r][c][g] <= 0; gc_addr[n][r][c][g] <= AW'(a);
    gc_thresh[n][r][c][g] <= 8'(thr);
    @(posedge clk);
    gc_valid[n][r][c][g] <= 0;
  endtask

  task automatic cfg(input int id, input int port, input int expv, input logic [7:0] mask);
    fcfg <= '{valid: 1'b1, router_id: 16'(id), port: 4'(port), pattern: 2'd0,
              expected: 4'(expv), mask: mask};
    @(posedge clk);
    fcfg <= '0;
  endtask

  task automatic wait_rvalid(input int n, input int r, input int c, input int g, output int t);
    t = 0;
    while (!gc_rvalid[n][r][c][g] && t < 2000) begin @(posedge clk); t++; end
  endtask

  int n_stall = 0, n_merge = 0, n_mcast = 0;
  initial begin
    int t;
    logic [127:0] d;
    fcfg = '0;
    gc_in = '{default: '0}; icb_in = '{default: '0}; bc_in = '{default: '0};
    ppim_in = '{default: '0};
    gc_valid = '{default: 0}; gc_we = '{default: 0}; gc_clr = '{default: 0};
    gc_addr = '{default: '0}; gc_wdata = '{default: '0}; gc_thresh = '{default: '0};
    repeat (4) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);

    // 1. local counted write, read issued first
    bread(0, 2, 3, 1, 9, 1);
    repeat (5) @(posedge clk);
    chk(!gc_rvalid[0][2][3][1] && !gc_ready[0][2][3][1], "local read stalls");
    n_stall++;
    d = {$urandom, $urandom, $urandom, $urandom};
    inject(0, 0, 0, 0, mkh(PT_CWRITE, 3, 2, EP_GC1, 0, 9), d);
    wait_rvalid(0, 2, 3, 1, t);
    chk(gc_rvalid[0][2][3][1] && gc_rdata[0][2][3][1] == d, "local counted write");
    $display("local: 3 U hops + 2 V hops, read released %0d cycles after injection", t);

    // 2. remote counted write, A(1,1) -> B(3,2), one Z+ hop
    bread(1, 3, 2, 0, 17, 1);
    d = {32'd0, 32'd0, 32'd5, 32'hFFFF_FFF0};
    inject(0, 1, 1, 0, mkh(PT_CWRITE, 2, 3, EP_GC0, 1, 17), d);
    wait_rvalid(1, 3, 2, 0, t);
    chk(gc_rvalid[1][3][2][0] && gc_rdata[1][3][2][0] == d, "remote counted write");
    $display("remote: one torus hop, read released %0d cycles after injection", t);

    // 3. positions A -> B ICB0 at row 2, six time steps, eight particles
    begin
      int x0 [8], v [8];
      logic [127:0] p;
      hdr_t h;
      for (int i = 0; i < 8; i++) begin x0[i] = int'($urandom); v[i] = $urandom_range(60) - 30; end
      for (int ts = 0; ts < 6; ts++) begin
        for (int i = 0; i < 8; i++) begin
          h = mkh(PT_POS, 0, 2, EP_ICB0, 1, 0);
          h.pid = 15'(40 + i);
          p = {32'h0000_0100 + 32'(i), 32'(x0[i] + 3*v[i]*ts), 32'(x0[i] ^ 32'hF0F0 - v[i]*ts),
               32'(x0[i] + v[i]*ts + ts*ts)};
          inject_icb(0, h, p);
          repeat (2) @(posedge clk);
          // the positions are checked when they arrive
          fork
            begin
              automatic int pid = 40 + i;
              automatic logic [127:0] pp = p;
              int w;
              w = 0;
              while (!icb_got.exists(pid) && w < 500) begin @(posedge clk); w++; end
              chk(icb_got.exists(pid) && icb_got[pid] == pp, $sformatf("position %0d step %0d", pid, ts));
              icb_got.delete(pid);
            end
          join
        end
        h = mkh(PT_TSEND, 0, 2, EP_ICB0, 1, 0);
        inject_icb(0, h, '0);
        repeat (30) @(posedge clk);
      end
    end
    $display("positions: %0d records, %0d allocated, %0d compressed, %0.1f bytes of payload each",
             n_pos_rec, n_alloc, n_comp, real'(bytes_pos) / real'(n_pos_rec));
    chk(n_alloc > 0, "particle cache allocated");
    chk(n_comp > 0, "particle cache hits");
    chk(n_short > 0, "INZ shortened payloads");

    // 4. fence: GC0 and GC1 of A(0,0) -> both GCs of A(0,1)
    cfg(0, 0, 1, 8'b1000);        // TRTR(0,0) in GC0 -> URTR
    cfg(0, 1, 1, 8'b1000);        // TRTR(0,0) in GC1 -> URTR
    cfg(0, 3, 0, 8'b0000);
    cfg(1, 2, 2, 8'b0010);        // URTR(0,0) from TRTR: merge 2 -> U+
    cfg(5, 0, 1, 8'b0100);        // URTR(0,1) from U- -> TRTR
    cfg(4, 3, 1, 8'b0011);        // TRTR(0,1) from URTR -> GC0 and GC1
    begin
      hdr_t f;
      f = mkh(PT_FENCE, 1, 0, EP_GC0, 0, 33);
      f.pid = 15'({2'd0, 4'd2});  // pattern 0, fence id 2
      inject(0, 0, 0, 0, f, '0);
      repeat (40) @(posedge clk);
      bread(0, 0, 1, 0, 33, 0);
      wait_rvalid(0, 0, 1, 0, t);
      chk(gc_rvalid[0][0][1][0] && gc_rcount[0][0][1][0] == 0, "fence waits for all sources");
      inject(0, 0, 0, 1, f, '0);
      repeat (40) @(posedge clk);
      bread(0, 0, 1, 0, 33, 0);
      wait_rvalid(0, 0, 1, 0, t);
      chk(gc_rvalid[0][0][1][0] && gc_rcount[0][0][1][0] == 1, "fence reached GC0");
      if (gc_rvalid[0][0][1][0] && gc_rcount[0][0][1][0] == 1) n_merge++;
      bread(0, 0, 1, 1, 33, 0);
      wait_rvalid(0, 0, 1, 1, t);
      chk(gc_rvalid[0][0][1][1] && gc_rcount[0][0][1][1] == 1, "fence multicast to GC1");
      if (gc_rvalid[0][0][1][1] && gc_rcount[0][0][1][1] == 1) n_mcast++;
    end

    $display("mechanisms: stall=%0d inz_short=%0d alloc=%0d hit=%0d merge=%0d multicast=%0d",
             n_stall, n_short, n_alloc, n_comp, n_merge, n_mcast);
    chk(n_stall > 0 && n_merge > 0 && n_mcast > 0, "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
