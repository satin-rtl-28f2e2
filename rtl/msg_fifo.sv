// msg_fifo: first-in first-out message buffer.
//
// Used as the receive and send queues of a clause bank, as the input buffers
// of a router and as the queues of the central unit. DEPTH entries of WIDTH
// bits in a register array with read and write pointers. A push and a pop may
// happen in the same cycle, also when the buffer is full (the pop frees the
// slot first). The head entry is visible on `dout` while `empty` is low, so a
// pop takes effect at the clock edge and the next entry appears the cycle
// after. Pushing into a full buffer or popping an empty one is an error that
// the assertions below report; the buffer ignores it.
//
// The architecture names these buffers but not their depth; DEPTH and the
// register implementation are this design's choices.
module msg_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rp, wp;
  logic [$clog2(DEPTH+1)-1:0] n;

  logic do_pop, do_push;
  assign do_pop  = pop && (n != 0);
  assign do_push = push && ((n != DEPTH[$clog2(DEPTH+1)-1:0]) || do_pop);

  assign empty = (n == 0);
  assign full  = (n == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign count = n;
  assign dout  = mem[rp];

  function automatic logic [PW-1:0] incr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0;
      wp <= '0;
      n  <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      if (do_push) begin
        mem[wp] <= din;
        wp      <= incr(wp);
      end
      if (do_pop) rp <= incr(rp);
      n <= n + $bits(n)'(do_push) - $bits(n)'(do_pop);
    end
  end

  // A producer must not push into a full buffer; a consumer must not pop an empty one.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
