// vc_router_tb: a URTR-style router at tile (U=3, V=2).  Checks the route of
// each destination class, the 2-cycle hop latency, credit flow control (no
// more than 8 flits to an output without credits back, the rest after), the
// credits returned upstream, and fence merging: with an expected count of 2
// the first fence is absorbed, a later data packet passes it, and the second
// fence leaves once on each output of the mask and after the packets sent
// b0 it.
module vc_router_tb;
  import a3_pkg::*;
  localparam int NP = 4;
  logic clk = 0, rst_n = 0;
  link_t in_link [NP], out_link [NP];
  credit_t in_cred [NP], out_cred [NP];
  fcfg_t fcfg;
  int checks = 0, failures = 0, cyc = 0;
  int seen [NP];
  int last_t [NP];
  hdr_t last_h [NP];
  int creds_back = 0;
  int fence_out [NP];

  vc_router #(.NP(NP), .NV(2), .KIND(1), .MY_U(3), .MY_V(2), .LAT(2), .ROUTER_ID(7)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n) for (int o = 0; o < NP; o++) begin
    if (out_link[o].valid) begin
      seen[o]++;
      last_t[o] = cyc;
      last_h[o] = out_link[o].flit.hdr;
      if (out_link[o].flit.hdr.ptype == PT_FENCE) fence_out[o]++;
    end
    if (in_cred[o].valid) creds_back++;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (cycle %0d)", m, cyc); end
  endtask

  function automatic hdr_t mk(input int u, input int v, input ep_e ep, input bit rem, input bit side);
    hdr_t h;
    h = '0;
    h.ptype = PT_WRITE; h.dst_u = 5'(u); h.dst_v = 4'(v); h.dst_ep = ep;
    h.dx = rem ? 4'sd1 : 4'sd0; h.side = side;
    return h;
  endfunction

  task automatic send(input int p, input hdr_t h);
    in_link[p].valid <= 1; in_link[p].flit <= '{hdr: h, pay: 128'(cyc)};
    @(posedge clk);
    in_link[p].valid <= 0;
  endtask

  task automatic expect_route(input int p, input hdr_t h, input int o);
    int b0, t0;
    b0 = seen[o]; t0 = cyc;
    send(p, h);
    repeat (4) @(posedge clk);
    chk(seen[o] == b0 + 1, $sformatf("route to %0d", o));
    // the router samples the flit one edge after t0, so 2 cycles through it
    // show as 3 here
    chk(last_t[o] - t0 == 3, $sformatf("hop latency %0d", last_t[o] - t0 - 1));
  endtask

  initial begin
    for (int o = 0; o < NP; o++) begin
      in_link[o] = '0; out_cred[o] = '0; seen[o] = 0; fence_out[o] = 0;
    end
    fcfg = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    expect_route(2, mk(5, 2, EP_GC0, 0, 0), 1);
    expect_route(2, mk(1, 6, EP_GC0, 0, 0), 0);
    expect_route(0, mk(3, 2, EP_GC1, 0, 0), 2);
    expect_route(0, mk(3, 2, EP_PPIM0, 0, 0), 3);
    expect_route(1, mk(3, 9, EP_GC0, 0, 0), 3);
    expect_route(3, mk(3, 2, EP_BC, 1, 1), 1);
    expect_route(2, mk(3, 2, EP_ICB0, 0, 0), 0);
    chk(creds_back == 7, "one credit back per flit");
    // credits: 5 were already used on output 1?  Count how many it has left
    // by sending 12 flits to output 1 with no credits returned.
    begin
      int b0;
      b0 = seen[1];
      for (int k = 0; k < 12; k++) send(k % 2 == 0 ? 0 : 2, mk(9, 0, EP_GC0, 0, 0));
      repeat (10) @(posedge clk);
      // output 1 had used 2 credits of its 8 already
      chk(seen[1] - b0 == 6, $sformatf("stops without credits (%0d)", seen[1] - b0));
      for (int k = 0; k < 8; k++) begin
        out_cred[1] <= '{valid: 1'b1, vc: 3'd0};
        @(posedge clk);
      end
      out_cred[1] <= '0;
      repeat (10) @(posedge clk);
      chk(seen[1] - b0 == 12, "resumes with credits");
      for (int k = 0; k < 8; k++) begin
        out_cred[1] <= '{valid: 1'b1, vc: 3'd0};
        @(posedge clk);
      end
      out_cred[1] <= '0;
    end
    // fence: port 0, pattern 1, expect 2, mask outputs 1 and 3
    fcfg <= '{valid: 1'b1, router_id: 16'd7, port: 4'd0, pattern: 2'd1, expected: 4'd2,
              mask: 8'b0000_1010};
    @(posedge clk);
    fcfg <= '0;
    begin
      hdr_t f;
      f = '0; f.ptype = PT_FENCE; f.pid = 15'({2'd1, 4'd3});   // pattern 1, id 3
      send(0, f);
      repeat (6) @(posedge clk);
      chk(fence_out[1] == 0 && fence_out[3] == 0, "first fence absorbed");
      send(0, mk(3, 2, EP_GC0, 0, 0));       // to TRTR, passes the waiting fence
      repeat (4) @(posedge clk);
      chk(seen[2] == 2, "data passes pending fence");
      send(0, mk(7, 0, EP_GC0, 0, 0));       // ahead of the second fence, to output 1
      send(0, f);
      repeat (6) @(posedge clk);
      chk(fence_out[1] == 1 && fence_out[3] == 1 && fence_out[0] == 0 && fence_out[2] == 0,
          $sformatf("fence multicast by mask %0d %0d %0d %0d", fence_out[0], fence_out[1], fence_out[2], fence_out[3]));
      chk(last_h[1].ptype == PT_FENCE && seen[1] == 16, "fence after earlier packet");
      // counter was reset: a third fence alone is absorbed again
      send(0, f);
      repeat (6) @(posedge clk);
      chk(fence_out[1] == 1, "counter reset after send");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

