// sync_fifo: synchronous first-in first-out queue, one per AXI/ACE channel of the
// interconnect (AW, W, AR, CR and CD).
//
// The interconnect parks requests and snoop responses here until its FSMs are ready to
// serve them; the paper sizes these queues parametrically so that no back-pressure builds
// up, and the interconnect picks DEPTH from the number of caches for that purpose.
// Implementation (own choice): a circular buffer of DEPTH words with read/write pointers and
// an occupancy counter. push is ignored when full, pop when empty. The head word is visible
// on rdata whenever !empty (first-word fall-through), so a consumer can pop in the same cycle
// it looks. A word pushed in cycle t is visible at the head in cycle t+1 at the earliest.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTR_W-1:0] wptr, rptr;
  logic             do_push, do_pop;

  assign empty   = (count == 0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rdata   = mem[rptr];

  function automatic logic [PTR_W-1:0] incr(logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= incr(wptr);
      if (do_pop)  rptr <= incr(rptr);
      if (do_push && !do_pop) count <= count + 1'b1;
      else if (do_pop && !do_push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= wdata;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> !full)
    else $error("sync_fifo: push while full");
endmodule
