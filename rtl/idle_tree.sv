// idle_tree: global idle detection for each execution context.
//
// Every clause bank reports, per context, that it has nothing to process and
// nothing to send; every router reports that its buffers are empty. The
// global idle of a context is the AND of all of them. The AND is built as a
// tree of FANIN-input gates with a register after each level, as dedicated
// wires would be laid out across the chip, so `idle` follows its inputs after
// LEVELS cycles. The receiver must therefore see idle stay high for LEVELS+1
// cycles after its last send before it trusts it; `idle` is also held low for
// LEVELS cycles after reset. The central unit applies that rule.
//
// Follows the architecture: local idle signals combined in an AND tree on
// dedicated wires. This design's own: the fan-in, the register per level and
// the per-context split of the bank signals.
module idle_tree #(
  parameter int unsigned NIN   = 100,   // number of local idle sources
  parameter int unsigned NCTX  = 2,
  parameter int unsigned FANIN = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NCTX-1:0] local_idle [NIN],
  output logic [NCTX-1:0] idle
);

  localparam int unsigned LEVELS = satin_pkg::tree_levels(NIN, FANIN);

  // width of level k (k = 0 is the inputs)
  function automatic int unsigned width_at(input int unsigned k);
    int unsigned w;
    w = NIN;
    for (int unsigned i = 0; i < k; i++) w = (w + FANIN - 1) / FANIN;
    return w;
  endfunction

  logic [NCTX-1:0] lvl [LEVELS+1][NIN];

  for (genvar i = 0; i < NIN; i++) begin : g_in
    assign lvl[0][i] = local_idle[i];
  end

  for (genvar k = 1; k <= LEVELS; k++) begin : g_lvl
    for (genvar j = 0; j < NIN; j++) begin : g_node
      if (j < width_at(k)) begin : g_used
        logic [NCTX-1:0] a;
        always_comb begin
          a = '1;
          for (int unsigned t = 0; t < FANIN; t++)
            if (j * FANIN + t < width_at(k - 1)) a &= lvl[k-1][j*FANIN + t];
        end
        always_ff @(posedge clk or negedge rst_n)
          if (!rst_n) lvl[k][j] <= '0;
          else        lvl[k][j] <= a;
      end else begin : g_unused
        assign lvl[k][j] = '1;
      end
    end
  end

  assign idle = lvl[LEVELS][0];

endmodule
