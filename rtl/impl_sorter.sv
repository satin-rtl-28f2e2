// impl_sorter: received-implication sorter of the central unit.
//
// Implications reach the central unit in whatever order the network delivers
// them. Each carries an implication level that is larger than the levels of
// every implication it depends on, so handing them to the host in level order
// gives a valid serial trail. The sorter holds up to DEPTH entries in a
// register array with a valid bit each. A push writes the lowest free slot.
// The head (`out_*`) is the entry with the lowest level, ties going to the
// lowest slot; it is computed combinationally from the array, so a pushed
// entry can be the head the next cycle. `pop` removes the head. Push and pop
// may happen in the same cycle. `full` stops the producer.
//
// Follows the architecture: ordering received implications by implication
// level. This design's own: capacity, the parallel minimum search and the tie
// rule (equal levels are independent implications, any order is valid).
module impl_sorter
  import satin_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push,
  input  flit_t  din,
  input  logic   pop,
  output logic   out_valid,
  output flit_t  out,
  output logic   full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t            ent [DEPTH];
  logic [DEPTH-1:0] vld;

  logic [IW-1:0] min_i, free_i;
  logic          any_free;

  always_comb begin
    min_i     = '0;
    out_valid = 1'b0;
    for (int k = 0; k < DEPTH; k++) begin
      if (vld[k] && (!out_valid || (ent[k].i < ent[min_i].i))) begin
        min_i     = IW'(k);
        out_valid = 1'b1;
      end
    end
    free_i   = '0;
    any_free = 1'b0;
    for (int k = DEPTH - 1; k >= 0; k--) begin
      if (!vld[k]) begin
        free_i   = IW'(k);
        any_free = 1'b1;
      end
    end
  end

  assign out  = ent[min_i];
  assign full = !any_free;

  always_comb begin
    count = '0;
    for (int k = 0; k < DEPTH; k++) count += $bits(count)'(vld[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      for (int k = 0; k < DEPTH; k++) ent[k] <= '0;
    end else begin
      if (pop && out_valid) vld[min_i] <= 1'b0;
      if (push && any_free) begin
        vld[free_i] <= 1'b1;
        ent[free_i] <= din;
      end
    end
  end

  a_no_push_full: assert property (@(posedge clk) disable iff (!rst_n) !(push && full));

endmodule
