// sync_fifo: synchronous first-in first-out queue, used as the Bit FIFO
// between the Package Division Unit and the C-PEs of a Combination Tile.
//
// DEPTH entries of WIDTH bits held in a register array with read and write
// pointers and an occupancy counter. push stores din at the tail when not full;
// pop drops the head when not empty; dout always shows the head (first-word
// fall-through), so a word pushed in one cycle can be popped in the next.
// Push and pop in the same cycle are allowed. The depth is this design's choice;
// the paper names the Bit FIFO without giving its size.
// Two concurrent assertions check the handshake; they sample the reset
// synchronously (disable iff), while the flops use it asynchronously, which is
// why lint reports rst_n as used both ways - this only concerns the checks.
module sync_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             full,
  output logic             empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] rptr, wptr;

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rptr  <= '0;
      wptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= inc(wptr);
      if (do_pop)  rptr <= inc(rptr);
      count <= count + ($clog2(DEPTH+1))'(do_push) - ($clog2(DEPTH+1))'(do_pop);
    end
  end

  always_ff @(posedge clk)
    if (do_push) mem[wptr] <= din;

  assign dout  = mem[rptr];
  assign full  = (32'(count) == DEPTH);
  assign empty = (count == '0);

  // Handshake rules: no push into a full FIFO, no pop from an empty one.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("sync_fifo: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("sync_fifo: pop while empty");
endmodule
