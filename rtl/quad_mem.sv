// quad_mem: a Geometry Core's SRAM with a synchronisation counter per quad.
//
// The memory holds QUADS quads of four 32-bit words (8192 quads = 128 KB).
// Each quad has a CNT_W-bit counter.  The network side writes quads: a plain
// write only stores data, a counted write stores data and increments the
// counter in the same cycle, a counted accumulate adds the four words into the
// quad and increments the counter, and a count-only write (used when a
// GC-to-GC network fence arrives) increments the counter alone.  The core side
// issues reads with a threshold: the read is held until the quad's counter is
// at least the threshold, then returns the quad (a threshold of 0 is an
// ordinary read).  To the core this is just a slow read.  A core-side write
// stores a quad and may clear its counter to start a new round.
//
// Follows the paper: 128 KB per GC, quads of four 32-bit words, an 8-bit
// counter per quad incremented atomically by counted remote writes, blocking
// reads that stall until the counter reaches the read's threshold.  Own
// choices: one blocking read outstanding at a time, counters saturate at
// their maximum, counters clear on reset and on a core write with clr set,
// accumulate is a 32-bit wrapping add per word.
//
// Timing: network writes take effect at the clock edge they are presented.
// A read whose threshold is met returns data one cycle after it is accepted;
// otherwise rvalid rises the cycle after the counter first meets it.
module quad_mem
  import a3_pkg::*;
#(
  parameter int unsigned QUADS = 8192,
  parameter int unsigned CNT_W = 8,
  localparam int unsigned AW   = $clog2(QUADS)
) (
  input  logic             clk,
  input  logic             rst_n,
  // network side
  input  logic             nw_valid,
  input  logic [1:0]       nw_kind,   // 0 write, 1 counted write, 2 counted add, 3 count only
  input  logic [AW-1:0]    nw_addr,
  input  logic [127:0]     nw_data,
  // core side
  input  logic             gc_valid,
  output logic             gc_ready,
  input  logic             gc_we,
  input  logic             gc_clr,
  input  logic [AW-1:0]    gc_addr,
  input  logic [127:0]     gc_wdata,
  input  logic [CNT_W-1:0] gc_thresh,
  output logic             gc_rvalid,
  output logic [127:0]     gc_rdata,
  output logic [CNT_W-1:0] gc_rcount
);
  logic [127:0]     mem [QUADS];
  logic [CNT_W-1:0] cnt [QUADS];

  logic             pend;
  logic [AW-1:0]    pend_addr;
  logic [CNT_W-1:0] pend_thr;

  assign gc_ready = !pend;

  function automatic logic [127:0] add4(logic [127:0] a, logic [127:0] b);
    logic [127:0] r;
    for (int k = 0; k < 4; k++) r[32*k +: 32] = a[32*k +: 32] + b[32*k +: 32];
    return r;
  endfunction

  // data array: no reset
  always_ff @(posedge clk) begin
    if (nw_valid) begin
      unique case (nw_kind)
        2'd0, 2'd1: mem[nw_addr] <= nw_data;
        2'd2:       mem[nw_addr] <= add4(mem[nw_addr], nw_data);
        default: ;
      endcase
    end
    if (gc_valid && gc_ready && gc_we)
      mem[gc_addr] <= gc_wdata;
  end

  // counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < int'(QUADS); q++) cnt[q] <= '0;
    end else begin
      if (nw_valid && nw_kind != 2'd0 && cnt[nw_addr] != '1)
        cnt[nw_addr] <= cnt[nw_addr] + 1'b1;
      if (gc_valid && gc_ready && gc_we && gc_clr)
        cnt[gc_addr] <= '0;
    end
  end

  // blocking read
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend      <= 1'b0;
      pend_addr <= '0;
      pend_thr  <= '0;
      gc_rvalid <= 1'b0;
      gc_rdata  <= '0;
      gc_rcount <= '0;
    end else begin
      gc_rvalid <= 1'b0;
      if (pend) begin
        if (cnt[pend_addr] >= pend_thr) begin
          pend      <= 1'b0;
          gc_rvalid <= 1'b1;
          gc_rdata  <= mem[pend_addr];
          gc_rcount <= cnt[pend_addr];
        end
      end else if (gc_valid && !gc_we) begin
        if (cnt[gc_addr] >= gc_thresh) begin
          gc_rvalid <= 1'b1;
          gc_rdata  <= mem[gc_addr];
          gc_rcount <= cnt[gc_addr];
        end else begin
          pend      <= 1'b1;
          pend_addr <= gc_addr;
          pend_thr  <= gc_thresh;
        end
      end
    end
  end

endmodule
