// flit_fifo: synchronous first-in first-out queue of flits used by the
// adapters.  Push and pop may happen in the same cycle; the head is read
// combinationally; count tells how many entries are held.
module flit_fifo
  import a3_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  flit_t         din,
  input  logic          pop,
  output flit_t         head,
  output logic [CW-1:0] count
);
  flit_t mem [DEPTH];
  int unsigned rp, wp;

  assign head = mem[rp];

  always_ff @(posedge clk) if (push) mem[wp] <= din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= 0; wp <= 0; count <= '0;
    end else begin
      if (push) wp <= (wp == DEPTH - 1) ? 0 : wp + 1;
      if (pop)  rp <= (rp == DEPTH - 1) ? 0 : rp + 1;
      count <= count + CW'(push) - CW'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (count < CW'(DEPTH) || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> count != 0);
endmodule
