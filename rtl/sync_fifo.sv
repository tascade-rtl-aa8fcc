// sync_fifo: single-clock first-in first-out queue used for the router input
// buffers and the TSU's input and output queues.
//
// A circular buffer of DEPTH entries with a read and a write pointer and an
// occupancy counter. push is accepted when the queue is not full, pop when it
// is not empty; a push and a pop in the same cycle are both accepted. The
// head entry is visible on rdata while empty is low (first-word
// fall-through), so a consumer can inspect it before popping. count gives
// the occupancy for threshold tests (the selective-cascading "less than half
// full" rule). Reset empties the queue; the storage itself is not reset.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  T                         wdata,
  input  logic                     pop,
  output T                         rdata,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem [DEPTH];
  logic [PW-1:0]   wptr, rptr;
  logic            do_push, do_pop;

  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rdata   = mem[rptr];

  function automatic logic [PW-1:0] incr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= incr(wptr);
      if (do_pop)  rptr <= incr(rptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= wdata;
  end

  // A producer must not push into a full queue: the push would be dropped.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);

endmodule
