// slap_fifo: synchronous FIFO used for every elastic queue between a GPCU and
// a CU: the vector instruction buffer, the vector load address buffer and the
// vector store address buffer.
//
// The queues are what lets the scalar GPCU run ahead of a vector CU by up to
// DEPTH entries; the paper evaluates instruction-queue depths of 24 and 32 and
// names 32 as the sweet spot, which is the default here. The paper calls them
// low-power FIFOs but does not give their insides; this one is a plain circular
// buffer with read and write pointers and an occupancy counter.
//
// Interface: push/wdata write at the clock edge when not full; pop removes the
// head at the clock edge when not empty. rdata shows the head combinationally
// (first-word fall-through), so a consumer sees an entry the cycle after it is
// pushed. Push and pop in the same cycle are allowed, also when full (the pop
// frees the slot) and when empty (nothing to pop; the push lands).
module slap_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             full,
  output logic             empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign rdata   = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      count <= count + $bits(count)'(do_push) - $bits(count)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= wdata;
  end

  // A producer must look at full before pushing: a lost entry would silently
  // desynchronise the GPCU and the CU.
  property p_no_overflow;
    @(posedge clk) disable iff (!rst_n) push |-> (!full || pop);
  endproperty
  a_no_overflow: assert property (p_no_overflow)
    else $error("slap_fifo: push while full");

endmodule
