// bus_fifo: the bus-data FIFO at the input of an analytic unit.
//
// Words arriving over the intra-cluster or inter-cluster bus wait here until
// an instruction of the unit takes one as a source operand. Standard
// synchronous FIFO: push and pop in the same cycle allowed, `rdata` shows the
// oldest word (first-word fall-through), `full`/`empty` flags. A push into a
// full FIFO is a scheduling error, caught by an assertion. The paper names
// the FIFO; depth and flags are this design's.
module bus_fifo
  import dana_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  push,
  input  word_t wdata,
  input  logic  pop,
  output word_t rdata,
  output logic  empty,
  output logic  full
);
  word_t         mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic [AW:0]   cnt;

  assign empty = (cnt == 0);
  assign full  = (cnt == (AW+1)'(DEPTH));
  assign rdata = mem[rp];

  always_ff @(posedge clk) if (push && !full) mem[wp] <= wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0;
    end else begin
      if (push && !full)  wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop && !empty)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
