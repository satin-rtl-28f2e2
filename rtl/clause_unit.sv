// clause_unit: one fixed-length clause of the associative clause array.
//
// A clause holds up to NLIT literals (variable index, polarity, present bit)
// and, for each of NCTX execution contexts, the search state of that context:
// which literals are true or false, which were set in the current decision
// level, whether the clause is the reason for an implication (and which
// literal it implied), the strengthening bits and the learning query flag.
// It has no sequencing of its own. Every cycle the bank presents one command
// (ccmd_t) to all clauses; broadcast commands (provar, clearvar, completedl,
// copystr, strprovar, getreason, chkres) act in every clause, per-clause
// commands (setvar, validate, getpro, getvar, strgetpro, clearreason,
// getlvlbits) act only when `sel` is high. State updates at the clock edge;
// the flags (prop, conflict, strength, reason query) are combinational from
// the state, so a flag raised by a command is visible the cycle after it.
// `dout` is combinational from the state and the current command: for getpro
// it is the single open literal, for getvar literal `idx`, for strgetpro the
// negated reason literal, for getlvlbits the current-level bits.
//
// Connecting variables: literal 0 may be the connector to the previous clause
// and literal NLIT-1 the connector to the next clause (validate loads the two
// connector bits). A connector is never matched by a propagated variable.
// When the only open literal of a clause is a connector, the clause makes it
// true itself; the neighbour sees that as its own connector literal being
// false one cycle later, through cn_*_out / cn_*_in. The implication is
// withdrawn as soon as one of the other literals stops being false, which is
// how cancelled variables undo a chain. If both neighbours make the shared
// connector true in the same cycle, both see it true and false and raise
// conflict, as the architecture expects. chain_busy is high while any
// connector of this clause is about to change, so that the bank can wait
// exactly as long as a chain is running.
//
// Follows the architecture: the command set and its meaning, the 8-literal
// clause, per-context state, unit/conflict detection, the reason literal being
// remembered for strengthening, connector chaining. This design's own choices:
// literal 0 / NLIT-1 as connector positions, the true/false pair per literal
// (a literal both true and false is a conflict), clause data in flip-flops
// rather than latches, and a clearvar variant that cancels every literal of
// the current decision level at once.
module clause_unit
  import satin_pkg::*;
#(
  parameter int unsigned NCTX = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  ccmd_t           cmd,
  input  logic            sel,
  // connector links, per context
  input  logic [NCTX-1:0] cn_prev_in,   // previous clause made the shared connector true
  input  logic [NCTX-1:0] cn_next_in,   // next clause made the shared connector true
  output logic [NCTX-1:0] cn_prev_out,  // this clause made its previous connector true
  output logic [NCTX-1:0] cn_next_out,  // this clause made its next connector true
  // flags, per context
  output logic [NCTX-1:0] valid_o,
  output logic [NCTX-1:0] prop_o,       // unit: one open literal, ready for getpro
  output logic [NCTX-1:0] conflict_o,
  output logic [NCTX-1:0] str_o,        // strengthening: reason literal removable
  output logic [NCTX-1:0] rq_o,         // learning: reason query matched
  output logic            chain_busy,
  output cdout_t          dout
);

  localparam int unsigned LAST = NLIT - 1;

  // clause data, shared by the contexts
  var_t            lvar [NLIT];
  logic [NLIT-1:0] lpol;
  logic [NLIT-1:0] present;
  logic [1:0]      conn;        // {next, prev}

  // per-context state
  logic [NLIT-1:0]  lt   [NCTX];
  logic [NLIT-1:0]  lf   [NCTX];
  logic [NLIT-1:0]  cur  [NCTX];
  logic [NLIT-1:0]  str  [NCTX];
  logic [NCTX-1:0]  valid;
  logic [NCTX-1:0]  reason;
  logic [IDX_W-1:0] ridx [NCTX];
  logic [NCTX-1:0]  rq;
  logic [1:0]       cn_t [NCTX];

  logic [NLIT-1:0] isconn, regular, vmatch;
  always_comb begin
    isconn       = '0;
    isconn[0]    = conn[0];
    isconn[LAST] = isconn[LAST] | conn[1];
    regular      = present & ~isconn;
    for (int i = 0; i < NLIT; i++) vmatch[i] = regular[i] && (lvar[i] == cmd.v);
  end

  // effective literal values including connectors
  logic [NLIT-1:0]  eff_t [NCTX];
  logic [NLIT-1:0]  eff_f [NCTX];
  logic [NLIT-1:0]  open_l [NCTX];
  logic [IDX_W-1:0] open_idx [NCTX];
  logic [NCTX-1:0]  unit;
  logic [1:0]       cn_keep [NCTX];
  logic [1:0]       cn_nxt  [NCTX];

  always_comb begin
    for (int c = 0; c < NCTX; c++) begin
      logic [NLIT-1:0] ot;
      logic [NLIT-1:0] of;
      int unsigned     nopen;
      ot = '0;
      of = '0;
      ot[0]    = conn[0] & cn_t[c][0];
      of[0]    = conn[0] & cn_prev_in[c];
      ot[LAST] = ot[LAST] | (conn[1] & cn_t[c][1]);
      of[LAST] = of[LAST] | (conn[1] & cn_next_in[c]);
      eff_t[c]  = (lt[c] | ot) & present;
      eff_f[c]  = (lf[c] | of) & present;
      open_l[c] = present & ~eff_t[c] & ~eff_f[c];
      nopen = 0;
      open_idx[c] = '0;
      for (int i = 0; i < NLIT; i++) begin
        if (open_l[c][i]) begin
          nopen++;
          open_idx[c] = IDX_W'(i);
        end
      end
      unit[c]       = valid[c] && (eff_t[c] == '0) && (nopen == 1);
      prop_o[c]     = unit[c] && ((open_l[c] & regular) != '0);
      conflict_o[c] = valid[c] && (present != '0) &&
                      (((eff_t[c] == '0) && (nopen == 0)) || ((eff_t[c] & eff_f[c]) != '0));
      str_o[c]      = valid[c] && reason[c] && (str[c] == (NLIT'(1) << ridx[c]));
      rq_o[c]       = rq[c];
      valid_o[c]    = valid[c];
      // a connector implication holds while every other literal is false
      cn_keep[c][0] = (((eff_f[c] | (NLIT'(1) << 0))    & present) == present);
      cn_keep[c][1] = (((eff_f[c] | (NLIT'(1) << LAST)) & present) == present);
      cn_nxt[c][0]  = conn[0] && (cn_t[c][0] ? cn_keep[c][0] : (unit[c] && open_l[c][0]));
      cn_nxt[c][1]  = conn[1] && (cn_t[c][1] ? cn_keep[c][1] : (unit[c] && open_l[c][LAST]));
      cn_prev_out[c] = conn[0] & cn_t[c][0];
      cn_next_out[c] = conn[1] & cn_t[c][1];
    end
  end

  always_comb begin
    chain_busy = 1'b0;
    for (int c = 0; c < NCTX; c++) chain_busy |= (cn_nxt[c] != cn_t[c]);
  end

  // output bus
  logic cc;   // command's context, clipped to the contexts present
  always_comb cc = (int'(cmd.ctx) < NCTX) ? cmd.ctx : 1'b0;

  // literals cleared by a clearvar: the matched variable, or the whole level
  logic [NLIT-1:0] clr;
  always_comb clr = cmd.allcur ? cur[cc] : vmatch;

  always_comb begin
    dout = '0;
    dout.present = regular;
    unique case (cmd.op)
      CMD_GETPRO: begin
        dout.idx = open_idx[cc];
        dout.v   = lvar[open_idx[cc]];
        dout.p   = lpol[open_idx[cc]];
      end
      CMD_GETVAR: begin
        dout.idx = cmd.idx;
        dout.v   = lvar[cmd.idx];
        dout.p   = lpol[cmd.idx];
      end
      CMD_STRGETPRO: begin
        dout.idx = ridx[cc];
        dout.v   = lvar[ridx[cc]];
        dout.p   = ~lpol[ridx[cc]];
      end
      CMD_GETLVLBITS: begin
        dout.idx  = ridx[cc];
        dout.v    = lvar[ridx[cc]];
        dout.p    = lpol[ridx[cc]];
        dout.bits = cur[cc] & regular;
      end
      default: ;
    endcase
  end

  // state update
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NLIT; i++) lvar[i] <= '0;
      lpol    <= '0;
      present <= '0;
      conn    <= '0;
      valid   <= '0;
      reason  <= '0;
      rq      <= '0;
      for (int c = 0; c < NCTX; c++) begin
        lt[c]   <= '0;
        lf[c]   <= '0;
        cur[c]  <= '0;
        str[c]  <= '0;
        ridx[c] <= '0;
        cn_t[c] <= '0;
      end
    end else begin
      for (int c = 0; c < NCTX; c++) cn_t[c] <= cn_nxt[c];
      unique case (cmd.op)
        CMD_SETVAR: if (sel) begin
          lvar[cmd.idx] <= cmd.v;
          lpol[cmd.idx] <= cmd.p;
        end
        CMD_VALIDATE: if (sel) begin
          present   <= cmd.mask;
          conn      <= cmd.conn;
          valid[cc] <= 1'b1;
          lt[cc]    <= '0;
          lf[cc]    <= '0;
          cur[cc]   <= '0;
          str[cc]   <= '0;
          reason[cc] <= 1'b0;
          rq[cc]    <= 1'b0;
          cn_t[cc]  <= '0;
        end
        CMD_CHKRES: if (!valid[cc] && (valid != '0)) begin
          valid[cc] <= 1'b1;
          lt[cc]    <= '0;
          lf[cc]    <= '0;
          cur[cc]   <= '0;
          cn_t[cc]  <= '0;
        end
        CMD_PROVAR: if (valid[cc]) begin
          for (int i = 0; i < NLIT; i++) begin
            if (vmatch[i]) begin
              if (lpol[i] == cmd.p) lt[cc][i] <= 1'b1;
              else                  lf[cc][i] <= 1'b1;
              cur[cc][i] <= 1'b1;
            end
          end
        end
        CMD_GETPRO: if (sel && prop_o[cc]) begin
          lt[cc][open_idx[cc]]  <= 1'b1;
          cur[cc][open_idx[cc]] <= 1'b1;
          reason[cc] <= 1'b1;
          ridx[cc]   <= open_idx[cc];
        end
        CMD_CLEARVAR: begin
          lt[cc]  <= lt[cc]  & ~clr;
          lf[cc]  <= lf[cc]  & ~clr;
          cur[cc] <= cur[cc] & ~clr;
          if (reason[cc] && clr[ridx[cc]]) begin
            reason[cc] <= 1'b0;
            rq[cc]     <= 1'b0;
          end
        end
        CMD_COMPLETEDL: cur[cc] <= '0;
        CMD_COPYSTR:    str[cc] <= present;
        CMD_STRPROVAR: begin
          for (int i = 0; i < NLIT; i++)
            if (vmatch[i] && (lpol[i] == cmd.p)) str[cc][i] <= 1'b0;
        end
        CMD_STRGETPRO: if (sel) str[cc] <= '0;
        CMD_CLEARREASON: if (sel) begin
          reason[cc] <= 1'b0;
          rq[cc]     <= 1'b0;
        end
        CMD_GETREASON: begin
          if (valid[cc] && reason[cc] && (lvar[ridx[cc]] == cmd.v) && (lpol[ridx[cc]] == cmd.p))
            rq[cc] <= 1'b1;
        end
        CMD_GETLVLBITS: if (sel) rq[cc] <= 1'b0;
        default: ;
      endcase
    end
  end

endmodule
