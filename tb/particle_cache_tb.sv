// particle_cache_tb: a send-side and a receive-side cache joined back to
// back, fed with particles moving on integer quadratic paths
// x(t) = x0 + v*t + a*t*t.  Checks: the receiver rebuilds every position
// exactly; the first packet of a particle allocates, later ones hit; the
// sent difference is v+a at step 1 (constant predictor), a-v at step 2
// (prediction 3x1-2x0, as D1 and D2 both start from
// x1-x0) and 0 from step 3 on (the
// quadratic predictor is exact); a fifth particle in a full set is not
// allocated; after the time-step counter passes the age threshold it is.
module particle_cache_tb;
  import a3_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0] thresh;
  logic ts_tick;
  logic s_in_valid; hdr_t s_in_hdr; logic [127:0] s_in_pay;
  logic s_out_valid; chk_e s_out_kind; logic [9:0] s_out_idx; hdr_t s_out_hdr; logic [127:0] s_out_pay;
  logic r_out_valid; chk_e r_out_kind; logic [9:0] r_out_idx; hdr_t r_out_hdr; logic [127:0] r_out_pay;
  int checks = 0, failures = 0;

  particle_cache #(.MODE(0)) snd (.clk, .rst_n, .thresh, .ts_tick, .in_valid(s_in_valid),
    .in_kind(CK_PLAIN), .in_idx(10'd0), .in_hdr(s_in_hdr), .in_pay(s_in_pay),
    .out_valid(s_out_valid), .out_kind(s_out_kind), .out_idx(s_out_idx), .out_hdr(s_out_hdr),
    .out_pay(s_out_pay));
  particle_cache #(.MODE(1)) rcv (.clk, .rst_n, .thresh, .ts_tick, .in_valid(s_out_valid),
    .in_kind(s_out_kind), .in_idx(s_out_idx), .in_hdr(s_out_hdr), .in_pay(s_out_pay),
    .out_valid(r_out_valid), .out_kind(r_out_kind), .out_idx(r_out_idx), .out_hdr(r_out_hdr),
    .out_pay(r_out_pay));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic logic [31:0] pos(int x0, int v, int a, int t);
    return 32'(x0 + v*t + a*t*t);
  endfunction

  // send one position packet and return what the sender emitted
  task automatic send_pos(input int pid, input logic [127:0] p, output chk_e k,
                          output logic [127:0] sp, output logic [127:0] rp);
    s_in_valid <= 1;
    begin
      hdr_t h;
      h = '0; h.ptype = PT_POS; h.pid = 15'(pid);
      s_in_hdr <= h;
    end
    s_in_pay   <= p;
    @(posedge clk);
    s_in_valid <= 0;
    @(posedge clk); #1;
    k = s_out_kind; sp = s_out_pay;   // held: the sender updates them only on valid
    rp = r_out_pay;
    chk(r_out_valid && r_out_hdr.pid == 15'(pid), "receiver output");
  endtask

  int x0 [6], vx [6], ax [6];
  initial begin
    chk_e k; logic [127:0] sp, rp, p;
    s_in_valid = 0; s_in_hdr = '0; s_in_pay = '0; ts_tick = 0; thresh = 8'd2;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 6; i++) begin
      x0[i] = int'($urandom) ; vx[i] = $urandom_range(400) - 200; ax[i] = $urandom_range(20) - 10;
    end
    // particles 5, 5+256, 5+512, 5+768 share set 5
    for (int t = 0; t < 6; t++) begin
      for (int i = 0; i < 4; i++) begin
        p = {32'hA000_0000 + 32'(i),
             pos(x0[i] ^ 32'h55, vx[i] + 3, -ax[i], t),
             pos(x0[i] ^ 32'h99, -vx[i], ax[i] + 1, t),
             pos(x0[i], vx[i], ax[i], t)};
        send_pos(5 + 256*i, p, k, sp, rp);
        chk(rp == p, $sformatf("lossless t=%0d i=%0d", t, i));
        if (t == 0) chk(k == CK_ALLOC, "allocate on first sight");
        else begin
          chk(k == CK_COMP, "hit afterwards");
          if (t == 1) chk(sp[31:0] == 32'(vx[i] + ax[i]), "constant predictor");
          // after step 1, D1 = D2 = x1-x0 (the history before x0 counts as
          // still), so the prediction is 3x1-2x0 and x2 misses it by a-v
          if (t == 2) chk(sp[31:0] == 32'(ax[i] - vx[i]), "second step");
          if (t >= 3) chk(sp[95:0] == '0, "quadratic predictor exact");
        end
      end
      if (t == 2) begin
        // set 5 is full and all entries are fresh: no allocation
        p = {32'hB, 32'd7, 32'd8, 32'd9};
        send_pos(5 + 256*4, p, k, sp, rp);
        chk(k == CK_NOALOC && rp == p, "full set, not allocated");
      end
    end
    // three time steps pass with no use: entries become older than 2
    repeat (3) begin ts_tick <= 1; @(posedge clk); end
    ts_tick <= 0;
    p = {32'hC, 32'd70, 32'd80, 32'd90};
    send_pos(5 + 256*5, p, k, sp, rp);
    chk(k == CK_ALLOC && rp == p, "stale entry evicted");
    send_pos(5 + 256*5, p, k, sp, rp);
    chk(k == CK_COMP && sp[95:0] == '0 && rp == p, "new entry hits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
