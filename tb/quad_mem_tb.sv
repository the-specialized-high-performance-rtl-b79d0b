// quad_mem_tb: checks counted writes, counted accumulates, count-only
// increments, counter clearing and blocking reads.  A blocking read must stay
// stalled while the counter is below its threshold and return exactly one
// cycle after the write that meets it, with the data of that write.
module quad_mem_tb;
  import a3_pkg::*;
  localparam int Q = 64;
  logic clk = 0, rst_n = 0;
  logic nw_valid; logic [1:0] nw_kind; logic [5:0] nw_addr; logic [127:0] nw_data;
  logic gc_valid, gc_ready, gc_we, gc_clr; logic [5:0] gc_addr;
  logic [127:0] gc_wdata, gc_rdata; logic [7:0] gc_thresh, gc_rcount; logic gc_rvalid;
  int checks = 0, failures = 0;

  quad_mem #(.QUADS(Q)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic nw(input logic [1:0] k, input int a, input logic [127:0] d);
    nw_valid <= 1; nw_kind <= k; nw_addr <= 6'(a); nw_data <= d;
    @(posedge clk);
    nw_valid <= 0;
  endtask

  task automatic gcw(input int a, input logic [127:0] d, input bit clr);
    gc_valid <= 1; gc_we <= 1; gc_clr <= clr; gc_addr <= 6'(a); gc_wdata <= d;
    @(posedge clk);
    gc_valid <= 0; gc_we <= 0; gc_clr <= 0;
  endtask

  task automatic gcr(input int a, input int thr);
    gc_valid <= 1; gc_we <= 0; gc_addr <= 6'(a); gc_thresh <= 8'(thr);
    @(posedge clk);
    gc_valid <= 0;
  endtask

  logic [127:0] d1, d2;
  int stall;
  initial begin
    nw_valid = 0; nw_kind = 0; nw_addr = 0; nw_data = 0;
    gc_valid = 0; gc_we = 0; gc_clr = 0; gc_addr = 0; gc_wdata = 0; gc_thresh = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // plain write then ordinary read
    d1 = {$urandom, $urandom, $urandom, $urandom};
    nw(2'd0, 5, d1);
    gcr(5, 0);
    #1 chk(gc_rvalid && gc_rdata == d1 && gc_rcount == 0, "plain read");
    // blocking read on quad 9, threshold 3, three counted writes 4 cycles apart
    gcr(9, 3);
    #1 chk(!gc_rvalid && !gc_ready, "read held");
    for (int n = 1; n <= 3; n++) begin
      d2 = {$urandom, $urandom, $urandom, $urandom};
      repeat (3) begin @(posedge clk); #1 chk(!gc_rvalid, "no early release"); end
      nw(2'd1, 9, d2);
      #1;
      if (n < 3) chk(!gc_rvalid, "still held");
    end
    // released exactly one cycle after the third counted write
    @(posedge clk); #1;
    chk(gc_rvalid && gc_rdata == d2 && gc_rcount == 3, "released with last data");
    chk(gc_ready, "ready again");
    // counted accumulate: two forces summed
    gcw(20, '0, 1);
    nw(2'd2, 20, {32'd1, 32'd2, 32'd3, 32'hFFFF_FFFF});
    nw(2'd2, 20, {32'd10, 32'd20, 32'd30, 32'd5});
    gcr(20, 2);
    #1 chk(gc_rvalid && gc_rdata == {32'd11, 32'd22, 32'd33, 32'd4}, "accumulate");
    // count only (fence arrival) and clear
    nw(2'd3, 20, '1);
    gcr(20, 3);
    #1 chk(gc_rvalid && gc_rdata == {32'd11, 32'd22, 32'd33, 32'd4} && gc_rcount == 3,
           "count only keeps data");
    gcw(20, 128'h55, 1);
    gcr(20, 1);
    stall = 0;
    #1 chk(!gc_rvalid, "cleared counter blocks");
    nw(2'd3, 20, '0);
    @(posedge clk); #1;
    chk(gc_rvalid && gc_rdata == 128'h55 && gc_rcount == 1, "after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
