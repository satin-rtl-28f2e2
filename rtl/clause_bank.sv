// clause_bank: a bank of clause units with its controller.
//
// The bank owns NCLAUSE clause units, shares one network port between them
// and turns network messages into the clause commands the units execute.
// Its data path is a short pipeline:
//
//   receive buffer -> decode register -> execute (one command to all clauses,
//   select clause, select propagation) -> encode register -> send buffer
//
// Decode converts the head message of the receive buffer into a clause
// command. Each cycle the execute stage presents exactly one command to all
// clauses, chosen in this order:
//   1. the next getvar of a learning readout in progress,
//   2. getlvlbits for a clause whose reason query matched,
//   3. getpro for the first clause with a pending propagation
//      (not in a context stopped by a conflict),
//   4. a Conflict report for a context that has a conflicting clause,
//   5. strgetpro for the first clause whose reason literal is removable,
//   6. the decoded message.
// Steps 1, 3, 4 and 5 produce a message and wait for room in the send
// buffer; step 6 never needs it, so the bank always drains its receive
// buffer and cannot hold the network up. "Select propagation" is a priority
// encoder over the clause flags; "select clause" decodes the clause address.
//
// Implication levels: per context the bank keeps l_i. A received PropLit with
// level l_p sets l_i = max(l_i, l_p); an implication sent by the bank carries
// l_i + 1. A received CompleteDL (start of a new decision level) clears l_i.
// A local conflict or a received Conflict stops the context: no more
// implications or conflict reports leave the bank until a CancelVar arrives.
//
// Learning readout: a Reason message (V = assignment whose reason is sought)
// is a getreason broadcast. A clause that holds that implication raises its
// query flag; the bank reads its current-level bits (getlvlbits) and then
// each other literal (getvar). A literal set in the current decision level is
// sent as a new Reason query (broadcast, to the source and the central unit);
// an earlier one goes only to the central unit, as a literal of the learned
// clause. Both carry the assignment that falsified the literal in V/P and the
// implied literal in the second variable field.
//
// `my_addr` is the bank's network address, tied off where the bank is
// placed, so that all banks are the same module.
//
// Network port: valid/flit in with a credit pulse out when the receive buffer
// frees an entry; valid/flit out, spent against credits for the router's
// input buffer (OUT_CREDITS) that come back as credit pulses.
//
// Follows the architecture: the blocks of the bank (receive, decode, select
// clause(s), clause array, select propagation, encode, send), implication
// level rules, conflict stop, learning and strengthening message flow,
// one command per clause per cycle, 1024 clauses per bank. This design's own:
// the priority order above, the three-register pipeline (the architecture's
// controller has four stages), the message encodings (see satin_pkg) and
// the use of CompleteDL to restart implication levels.
module clause_bank
  import satin_pkg::*;
#(
  parameter int unsigned NCLAUSE     = 1024,
  parameter int unsigned NCTX        = 2,
  parameter int unsigned RX_DEPTH    = 4,
  parameter int unsigned TX_DEPTH    = 4,
  parameter int unsigned OUT_CREDITS = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  naddr_t          my_addr,      // this bank's node id (strap)
  // from the router
  input  logic            in_valid,
  input  netflit_t        in_flit,
  output logic            in_credit,
  // to the router
  output logic            out_valid,
  output netflit_t        out_flit,
  input  logic            out_credit,
  // status
  output logic [NCTX-1:0] idle,
  output logic [NCTX-1:0] stopped_o
);

  localparam int unsigned CW = (NCLAUSE > 1) ? $clog2(NCLAUSE) : 1;

  // ------------------------------------------------------------ receive buffer
  logic     rx_pop, rx_empty, rx_full;
  netflit_t rx_head;
  logic [$clog2(RX_DEPTH+1)-1:0] rx_cnt;

  msg_fifo #(.WIDTH($bits(netflit_t)), .DEPTH(RX_DEPTH)) u_rx (
    .clk, .rst_n, .push(in_valid), .din(in_flit), .pop(rx_pop),
    .dout(rx_head), .empty(rx_empty), .full(rx_full), .count(rx_cnt)
  );
  assign in_credit = rx_pop;

  // ------------------------------------------------------------ decode stage
  typedef struct packed {
    ccmd_t          cmd;
    logic           per_clause;   // command acts on clause `cidx` only
    logic [CW-1:0]  cidx;
    logic           is_prop;      // update implication level
    ilvl_t          lvl;
    logic           set_stop;
    logic           clr_stop;
    logic           clr_lvl;
  } dec_t;

  dec_t dreg, dnext;
  logic dreg_valid, dreg_take;

  function automatic dec_t decode(input flit_t m);
    dec_t d;
    d = '0;
    d.cmd.op  = CMD_NOP;
    d.cmd.ctx = m.ctx;
    d.cmd.v   = m.v;
    d.cmd.p   = m.p;
    d.cidx    = CW'(m.c);
    d.lvl     = m.i;
    unique case (m.mtype)
      MSG_ADDCLAUSE: begin
        unique case (ac_op_e'(m.i[10:9]))
          AC_SETVAR: begin
            d.cmd.op = CMD_SETVAR;
            d.cmd.idx = m.i[13 -: IDX_W];
            d.per_clause = 1'b1;
          end
          AC_VALIDATE: begin
            d.cmd.op = CMD_VALIDATE;
            d.cmd.mask = m.v[NLIT-1:0];
            d.cmd.conn = m.i[8:7];
            d.per_clause = 1'b1;
          end
          AC_CHKRES: d.cmd.op = CMD_CHKRES;
          default: d.cmd.op = CMD_NOP;
        endcase
      end
      MSG_PROPLIT: begin
        d.cmd.op  = CMD_PROVAR;
        d.is_prop = 1'b1;
      end
      MSG_CANCELVAR: begin
        d.cmd.op     = CMD_CLEARVAR;
        d.cmd.allcur = m.flag;
        d.clr_stop   = 1'b1;
      end
      MSG_COMPLETEDL: begin
        d.cmd.op  = CMD_COMPLETEDL;
        d.clr_lvl = 1'b1;
      end
      MSG_CONFLICT:  d.set_stop = 1'b1;
      MSG_NOTREASON: begin
        d.cmd.op = CMD_CLEARREASON;
        d.per_clause = 1'b1;
      end
      MSG_REASON:     d.cmd.op = CMD_GETREASON;
      MSG_STRENGTHEN: d.cmd.op = m.flag ? CMD_COPYSTR : CMD_STRPROVAR;
      default: ;
    endcase
    return d;
  endfunction

  assign dnext  = decode(rx_head.msg);
  assign rx_pop = !rx_empty && (!dreg_valid || dreg_take);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dreg_valid <= 1'b0;
      dreg       <= '0;
    end else if (rx_pop) begin
      dreg_valid <= 1'b1;
      dreg       <= dnext;
    end else if (dreg_take) begin
      dreg_valid <= 1'b0;
    end
  end

  // ------------------------------------------------------------ clause array
  ccmd_t                cmd;
  logic [NCLAUSE-1:0]   sel;
  logic [NCTX-1:0]      f_valid [NCLAUSE];
  logic [NCTX-1:0]      f_prop  [NCLAUSE];
  logic [NCTX-1:0]      f_conf  [NCLAUSE];
  logic [NCTX-1:0]      f_str   [NCLAUSE];
  logic [NCTX-1:0]      f_rq    [NCLAUSE];
  logic [NCLAUSE-1:0]   f_chain;
  cdout_t               douts   [NCLAUSE];
  logic [NCTX-1:0]      cn_p2n  [NCLAUSE+1];  // clause k-1 next connector -> clause k
  logic [NCTX-1:0]      cn_n2p  [NCLAUSE+1];  // clause k prev connector -> clause k-1

  assign cn_p2n[0]       = '0;
  assign cn_n2p[NCLAUSE] = '0;

  for (genvar k = 0; k < NCLAUSE; k++) begin : g_clause
    clause_unit #(.NCTX(NCTX)) u_clause (
      .clk, .rst_n,
      .cmd        (cmd),
      .sel        (sel[k]),
      .cn_prev_in (cn_p2n[k]),
      .cn_next_in (cn_n2p[k+1]),
      .cn_prev_out(cn_n2p[k]),
      .cn_next_out(cn_p2n[k+1]),
      .valid_o    (f_valid[k]),
      .prop_o     (f_prop[k]),
      .conflict_o (f_conf[k]),
      .str_o      (f_str[k]),
      .rq_o       (f_rq[k]),
      .chain_busy (f_chain[k]),
      .dout       (douts[k])
    );
  end

  // ------------------------------------------------------------ select propagation
  // First clause (lowest index) raising each flag, per context.
  logic [NCTX-1:0] any_prop, any_conf, any_str, any_rq;
  logic [CW-1:0]   prop_idx [NCTX];
  logic [CW-1:0]   conf_idx [NCTX];
  logic [CW-1:0]   str_idx  [NCTX];
  logic [CW-1:0]   rq_idx   [NCTX];

  always_comb begin
    for (int c = 0; c < NCTX; c++) begin
      any_prop[c] = 1'b0; any_conf[c] = 1'b0; any_str[c] = 1'b0; any_rq[c] = 1'b0;
      prop_idx[c] = '0;   conf_idx[c] = '0;   str_idx[c] = '0;   rq_idx[c] = '0;
      for (int k = NCLAUSE - 1; k >= 0; k--) begin
        if (f_prop[k][c]) begin any_prop[c] = 1'b1; prop_idx[c] = CW'(k); end
        if (f_conf[k][c]) begin any_conf[c] = 1'b1; conf_idx[c] = CW'(k); end
        if (f_str[k][c])  begin any_str[c]  = 1'b1; str_idx[c]  = CW'(k); end
        if (f_rq[k][c])   begin any_rq[c]   = 1'b1; rq_idx[c]   = CW'(k); end
      end
    end
  end

  // ------------------------------------------------------------ execute stage
  logic [NCTX-1:0] stopped;
  ilvl_t           lvl [NCTX];

  // learning readout in progress
  logic            lr_active;
  logic            lr_ctx;
  logic [CW-1:0]   lr_clause;
  logic [NLIT-1:0] lr_todo;      // literals still to read
  logic [NLIT-1:0] lr_cur;       // current-level bits
  var_t            lr_rv;        // implied (reason) literal
  logic            lr_rp;

  // encode register
  logic     enc_valid;
  netflit_t enc_flit;
  logic [$clog2(TX_DEPTH+1)-1:0] tx_cnt;
  logic     tx_room;
  assign tx_room = (32'(tx_cnt) + (enc_valid ? 32'd1 : 32'd0)) < TX_DEPTH;

  typedef enum logic [2:0] {
    ACT_IDLE, ACT_LRN_VAR, ACT_LRN_LVL, ACT_GETPRO, ACT_CONFLICT, ACT_STR, ACT_DEC
  } act_e;

  act_e            act;
  logic            act_ctx;
  logic [CW-1:0]   act_idx;
  logic [IDX_W-1:0] lr_next;

  always_comb begin
    lr_next = '0;
    for (int i = NLIT - 1; i >= 0; i--) if (lr_todo[i]) lr_next = IDX_W'(i);
  end

  always_comb begin
    act     = ACT_IDLE;
    act_ctx = 1'b0;
    act_idx = '0;
    if (lr_active) begin
      if (tx_room) begin
        act = ACT_LRN_VAR; act_ctx = lr_ctx; act_idx = lr_clause;
      end
    end else begin
      for (int c = NCTX - 1; c >= 0; c--)
        if (any_rq[c]) begin act = ACT_LRN_LVL; act_ctx = 1'(c); act_idx = rq_idx[c]; end
    end
    if (act == ACT_IDLE && !lr_active && tx_room) begin
      for (int c = NCTX - 1; c >= 0; c--)
        if (any_prop[c] && !stopped[c]) begin act = ACT_GETPRO; act_ctx = 1'(c); act_idx = prop_idx[c]; end
      if (act == ACT_IDLE)
        for (int c = NCTX - 1; c >= 0; c--)
          if (any_conf[c] && !stopped[c]) begin act = ACT_CONFLICT; act_ctx = 1'(c); act_idx = conf_idx[c]; end
      if (act == ACT_IDLE)
        for (int c = NCTX - 1; c >= 0; c--)
          if (any_str[c]) begin act = ACT_STR; act_ctx = 1'(c); act_idx = str_idx[c]; end
    end
    if (act == ACT_IDLE && dreg_valid) begin
      act = ACT_DEC; act_ctx = dreg.cmd.ctx; act_idx = dreg.cidx;
    end
  end

  assign dreg_take = (act == ACT_DEC);

  // command to the clauses and clause select
  logic per_clause;
  always_comb begin
    cmd = '0;
    cmd.op  = CMD_NOP;
    cmd.ctx = act_ctx;
    per_clause = 1'b1;
    unique case (act)
      ACT_LRN_VAR: begin cmd.op = CMD_GETVAR; cmd.idx = lr_next; end
      ACT_LRN_LVL: cmd.op = CMD_GETLVLBITS;
      ACT_GETPRO:  cmd.op = CMD_GETPRO;
      ACT_STR:     cmd.op = CMD_STRGETPRO;
      ACT_DEC: begin
        cmd = dreg.cmd;
        per_clause = dreg.per_clause;
      end
      default: per_clause = 1'b0;
    endcase
    sel = '0;
    if (per_clause && (32'(act_idx) < NCLAUSE)) sel[act_idx] = 1'b1;
  end

  cdout_t sdout;
  assign sdout = douts[act_idx];

  // encode
  function automatic netflit_t mk(input msg_type_e t, input route_t r, input logic ctx);
    netflit_t f;
    f = '0;
    f.src       = my_addr;
    f.msg.mtype = t;
    f.msg.route = r;
    f.msg.n     = my_addr;
    f.msg.ctx   = ctx;
    return f;
  endfunction

  localparam route_t R_ALL = '{to_src: 1'b1, bcast: 1'b1, to_cu: 1'b1};
  localparam route_t R_CU  = '{to_src: 1'b0, bcast: 1'b0, to_cu: 1'b1};

  netflit_t enc_next;
  logic     enc_load;
  always_comb begin
    enc_next = '0;
    enc_load = 1'b0;
    unique case (act)
      ACT_GETPRO: begin
        enc_load = 1'b1;
        enc_next = mk(MSG_PROPLIT, R_ALL, act_ctx);
        enc_next.msg.c = caddr_t'(act_idx);
        enc_next.msg.v = sdout.v;
        enc_next.msg.p = sdout.p;
        enc_next.msg.i = lvl[act_ctx] + 1'b1;
      end
      ACT_CONFLICT: begin
        enc_load = 1'b1;
        enc_next = mk(MSG_CONFLICT, R_ALL, act_ctx);
        enc_next.msg.c = caddr_t'(act_idx);
        enc_next.msg.i = lvl[act_ctx];
      end
      ACT_STR: begin
        enc_load = 1'b1;
        enc_next = mk(MSG_STRENGTHEN, R_ALL, act_ctx);
        enc_next.msg.c = caddr_t'(act_idx);
        enc_next.msg.v = sdout.v;
        enc_next.msg.p = sdout.p;
      end
      ACT_LRN_VAR: begin
        enc_load = 1'b1;
        enc_next = mk(MSG_REASON, lr_cur[lr_next] ? R_ALL : R_CU, act_ctx);
        enc_next.msg.v = sdout.v;
        enc_next.msg.p = ~sdout.p;                       // assignment that falsified it
        {enc_next.msg.n, enc_next.msg.c} = lr_rv;        // second variable: implied literal
        enc_next.msg.e = lr_rp;
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------ state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stopped   <= '0;
      for (int c = 0; c < NCTX; c++) lvl[c] <= '0;
      lr_active <= 1'b0;
      lr_ctx    <= 1'b0;
      lr_clause <= '0;
      lr_todo   <= '0;
      lr_cur    <= '0;
      lr_rv     <= '0;
      lr_rp     <= 1'b0;
      enc_valid <= 1'b0;
      enc_flit  <= '0;
    end else begin
      enc_valid <= enc_load;
      if (enc_load) enc_flit <= enc_next;
      unique case (act)
        ACT_CONFLICT: stopped[act_ctx] <= 1'b1;
        ACT_LRN_LVL: begin
          lr_active <= (sdout.present & ~(NLIT'(1) << sdout.idx)) != '0;
          lr_ctx    <= act_ctx;
          lr_clause <= act_idx;
          lr_todo   <= sdout.present & ~(NLIT'(1) << sdout.idx);
          lr_cur    <= sdout.bits;
          lr_rv     <= sdout.v;
          lr_rp     <= sdout.p;
        end
        ACT_LRN_VAR: begin
          lr_todo[lr_next] <= 1'b0;
          if ((lr_todo & ~(NLIT'(1) << lr_next)) == '0) lr_active <= 1'b0;
        end
        ACT_DEC: begin
          if (dreg.set_stop) stopped[dreg.cmd.ctx] <= 1'b1;
          if (dreg.clr_stop) stopped[dreg.cmd.ctx] <= 1'b0;
          if (dreg.clr_lvl)  lvl[dreg.cmd.ctx] <= '0;
          if (dreg.is_prop && (dreg.lvl > lvl[dreg.cmd.ctx])) lvl[dreg.cmd.ctx] <= dreg.lvl;
        end
        default: ;
      endcase
    end
  end

  // ------------------------------------------------------------ send buffer
  logic     tx_empty, tx_full, tx_pop;
  netflit_t tx_head;
  logic [$clog2(OUT_CREDITS+1)-1:0] credits;

  msg_fifo #(.WIDTH($bits(netflit_t)), .DEPTH(TX_DEPTH)) u_tx (
    .clk, .rst_n, .push(enc_valid), .din(enc_flit), .pop(tx_pop),
    .dout(tx_head), .empty(tx_empty), .full(tx_full), .count(tx_cnt)
  );

  assign tx_pop    = !tx_empty && (credits != 0);
  assign out_valid = tx_pop;
  assign out_flit  = tx_head;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) credits <= ($clog2(OUT_CREDITS+1))'(OUT_CREDITS);
    else        credits <= credits - $bits(credits)'(tx_pop) + $bits(credits)'(out_credit);
  end

  // ------------------------------------------------------------ idle
  logic busy_shared;
  assign busy_shared = !rx_empty || dreg_valid || enc_valid || !tx_empty || lr_active ||
                       (any_rq != '0) || (f_chain != '0);
  always_comb
    for (int c = 0; c < NCTX; c++)
      idle[c] = !busy_shared && !any_str[c] &&
                (stopped[c] || (!any_prop[c] && !any_conf[c]));
  assign stopped_o = stopped;

  a_credit_bound: assert property (@(posedge clk) disable iff (!rst_n)
                                   32'(credits) <= OUT_CREDITS);

endmodule
