// sync_fifo: first-word-fall-through FIFO used as the input buffers (A, B)
// and the output buffer of a core, and as the descriptor and write queues of
// the DMA.
//
// The head word is visible on rdata whenever empty is low; pop removes it.
// push is ignored when full and pop when empty (both are flagged by
// assertions, since the users are expected to check the flags).  A push and
// a pop in the same cycle are both accepted.  count gives the occupancy.
// The storage is a plain array, so an FPGA tool maps it to distributed RAM.
// That the cores have two input buffers and one output buffer is from the
// published overlay; the depth is this implementation's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           wdata,
  input  logic                       pop,
  output logic [WIDTH-1:0]           rdata,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wptr, rptr;
  logic             do_push, do_pop;

  assign empty   = (count == 0);
  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rdata   = mem[rptr];

  function automatic logic [PW-1:0] incr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= incr(wptr);
      if (do_pop)  rptr <= incr(rptr);
      count <= count + $bits(count)'(do_push) - $bits(count)'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
