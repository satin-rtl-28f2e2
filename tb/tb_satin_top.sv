// tb_satin_top: end-to-end test of the accelerator on a small mesh.
//
// The testbench plays the central unit's processor (the host). It loads
// clauses into several banks with unicast AddClause messages, then runs a
// short solver episode through the host ports, waiting for quiet after each
// step and draining the implication sorter and the message queue:
//   A  decide x20=1: a chain of two-literal clauses in four different banks
//      implies x21..x24 at levels 2..5; the host must receive them in level
//      order. Reason query for x21 (answered), NotReason for its reason
//      clause, the same query again (no longer answered).
//   B  new level, decide x10..x16=0: a 9-literal clause split over two
//      neighbouring clause units of one bank by a connecting variable
//      implies x17=1 through the connector chain.
//   C  new level, decide x1=0; new level, decide x2=0: the three-clause
//      example (x1|x2|x3), (x2|~x4), (~x3|x4), one clause per bank, ends in a
//      conflict; the context stops.
//   D  learning: Reason queries for x4=0 and x3=1 produce the learned
//      literal x1=0 (earlier level, sent to the central unit only) and the
//      current-level x2=0; strengthening with the learned clause (x1|x2)
//      reports removable literals.
//   E  backtrack: CancelVar of the whole current level restarts the context.
//   F  context 1: chkres enables the second context and decide x20=1 there
//      reproduces the chain in context 1.
// Throughout, the testbench counts how often each mechanism happened:
// quiet detection, implications, level-ordered delivery, broadcast delivery
// to every bank, connector chaining, conflict stop, reason replies,
// NotReason, strengthening, backtrack, second context and network credit
// stalls (an output of some router with no credit while it has a flit
// waiting for it). A mechanism that never happened is a failure.
//
// Size: 3 x 3 mesh (central unit in the middle, eight banks), 8 clauses per
// bank, 2 contexts, buffer depth 2 so that the credit flow control is
// exercised.
module tb_satin_top;
  import satin_pkg::*;
  localparam int MX = 3, MY = 3, NC = 8, BD = 2;
  localparam int NN = MX * MY, CU = (MY / 2) * MX + MX / 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       host_tx_valid, host_tx_ready, impl_valid, impl_pop, msg_valid, msg_pop;
  flit_t      host_tx_msg, impl_msg, msg_msg;
  logic [1:0] quiet, bank_stopped_any;

  satin_top #(.MX(MX), .MY(MY), .NCLAUSE(NC), .NCTX(2), .BUF_DEPTH(BD)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- host model
  flit_t hostq[$];
  flit_t impls[$];
  flit_t msgs[$];
  int    cyc = 0;

  always @(negedge clk) begin
    cyc++;
    if (!rst_n) begin
      host_tx_valid = 0; host_tx_msg = '0; impl_pop = 0; msg_pop = 0;
    end else begin
      host_tx_valid = 0;
      if (hostq.size() > 0 && host_tx_ready) begin
        host_tx_valid = 1;
        host_tx_msg   = hostq.pop_front();
      end
      impl_pop = 0;
      if (impl_valid) begin
        impls.push_back(impl_msg);
        impl_pop = 1;
      end
      msg_pop = 0;
      if (msg_valid) begin
        msgs.push_back(msg_msg);
        msg_pop = 1;
      end
    end
  end

  // ---------------------------------------------------------------- mechanism counters
  int n_quiet = 0, n_impl = 0, n_order = 0, n_bcast = 0, n_chain = 0, n_conflict = 0;
  int n_reason = 0, n_notreason = 0, n_strengthen = 0, n_backtrack = 0, n_ctx1 = 0;
  int n_stall = 0;

  // broadcast delivery: every bank node sees the host's decisions
  int bank_props [NN];
  for (genvar n = 0; n < NN; n++) begin : g_mon
    always @(posedge clk)
      if (rst_n && dut.loc_out_valid[n] && dut.loc_out_flit[n].msg.mtype == MSG_PROPLIT)
        bank_props[n]++;
  end

  // credit stall: some router holds a flit for an output that has no credit
  for (genvar y = 0; y < MY; y++) begin : g_sy
    for (genvar x = 0; x < MX; x++) begin : g_sx
      always @(posedge clk)
        if (rst_n)
          for (int o = 0; o < 5; o++)
            for (int q = 0; q < 5; q++)
              if (dut.u_net.g_y[y].g_x[x].u_router.need[q][o] &&
                  dut.u_net.g_y[y].g_x[x].u_router.credits[o] == 0)
                n_stall++;
    end
  end

  // ---------------------------------------------------------------- message helpers
  function automatic flit_t mk(input msg_type_e t, input int v = 0, input bit p = 0,
                               input int lvl = 0, input bit ctx = 0, input bit flag = 0);
    flit_t f;
    f       = '0;
    f.mtype = t;
    f.route = '{to_src: 0, bcast: 1, to_cu: 0};
    f.n     = NADDR_W'(CU);
    f.v     = VAR_W'(v);
    f.p     = p;
    f.i     = ILVL_W'(lvl);
    f.ctx   = ctx;
    f.flag  = flag;
    return f;
  endfunction

  function automatic flit_t to_bank(input flit_t f, input int bank, input int c);
    f.route = '{to_src: 0, bcast: 0, to_cu: 0};
    f.n     = NADDR_W'(bank);
    f.c     = CADDR_W'(c);
    return f;
  endfunction

  task automatic add_lit(input int bank, input int c, input int idx, input int v, input bit p);
    flit_t f;
    f = to_bank(mk(MSG_ADDCLAUSE, v, p), bank, c);
    f.i = '0;
    f.i[13 -: IDX_W] = IDX_W'(idx);
    f.i[10:9] = AC_SETVAR;
    hostq.push_back(f);
  endtask

  task automatic validate(input int bank, input int c, input logic [7:0] mask,
                          input logic [1:0] conn = 2'b00);
    flit_t f;
    f = to_bank(mk(MSG_ADDCLAUSE, int'(mask)), bank, c);
    f.i = '0;
    f.i[10:9] = AC_VALIDATE;
    f.i[8:7]  = conn;
    hostq.push_back(f);
  endtask

  task automatic wait_quiet(input int ctx);
    int t;
    t = 0;
    while (hostq.size() > 0) @(negedge clk);
    repeat (4) @(negedge clk);
    while (!quiet[ctx] && t < 5000) begin @(negedge clk); t++; end
    check(quiet[ctx] == 1, "context becomes quiet");
    if (quiet[ctx]) n_quiet++;
    repeat (4) @(negedge clk);                 // drain the host queues
  endtask

  function automatic int find(ref flit_t q[$], input msg_type_e t, input int v, input bit p,
                              input int from = 0);
    for (int k = from; k < q.size(); k++)
      if (q[k].mtype == t && int'(q[k].v) == v && q[k].p == p) return k;
    return -1;
  endfunction

  function automatic int count_type(ref flit_t q[$], input msg_type_e t, input int from = 0);
    int n = 0;
    for (int k = from; k < q.size(); k++) if (q[k].mtype == t) n++;
    return n;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bank nodes of the 3 x 3 mesh (node 4 is the central unit)
  localparam int B0 = 0, B1 = 1, B2 = 2, B3 = 3, B5 = 5, B6 = 6, B7 = 7, B8 = 8;

  int k, k0, k1, mark, imark, bcast0;
  bit ordered;

  initial begin
    for (int n = 0; n < NN; n++) bank_props[n] = 0;
    host_tx_valid = 0; host_tx_msg = '0; impl_pop = 0; msg_pop = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------------- load
    // chain (~x20|x21) B1, (~x21|x22) B3, (~x22|x23) B5, (~x23|x24) B7
    add_lit(B1, 0, 0, 20, 0); add_lit(B1, 0, 1, 21, 1); validate(B1, 0, 8'b011);
    add_lit(B3, 0, 0, 21, 0); add_lit(B3, 0, 1, 22, 1); validate(B3, 0, 8'b011);
    add_lit(B5, 0, 0, 22, 0); add_lit(B5, 0, 1, 23, 1); validate(B5, 0, 8'b011);
    add_lit(B7, 0, 0, 23, 0); add_lit(B7, 0, 1, 24, 1); validate(B7, 0, 8'b011);
    // (x10|..|x16|x17) split in bank B6: clause 2 = x10..x16 + next connector,
    // clause 3 = previous connector + x17
    for (int j = 0; j < 7; j++) add_lit(B6, 2, j, 10 + j, 1);
    validate(B6, 2, 8'b1111_1111, 2'b10);
    add_lit(B6, 3, 1, 17, 1);
    validate(B6, 3, 8'b0000_0011, 2'b01);
    // learning example, one clause per bank
    add_lit(B0, 0, 0, 1, 1); add_lit(B0, 0, 1, 2, 1); add_lit(B0, 0, 2, 3, 1); validate(B0, 0, 8'b111);
    add_lit(B8, 0, 0, 2, 1); add_lit(B8, 0, 1, 4, 0);                          validate(B8, 0, 8'b011);
    add_lit(B2, 0, 0, 3, 0); add_lit(B2, 0, 1, 4, 1);                          validate(B2, 0, 8'b011);
    wait_quiet(0);
    check(impls.size() == 0 && msgs.size() == 0, "loading produces no messages");
    check(bank_stopped_any == 0, "no bank stopped after loading");

    // ---------------- A: chain across four banks
    imark  = impls.size();
    bcast0 = bank_props[B8];
    hostq.push_back(mk(MSG_PROPLIT, 20, 1, 1));
    wait_quiet(0);
    check(impls.size() - imark == 4, "four implications x21..x24");
    ordered = 1;
    for (int j = 0; j < 4; j++) begin
      if (imark + j < impls.size()) begin
        if (int'(impls[imark+j].v) != 21 + j || impls[imark+j].p != 1 || int'(impls[imark+j].i) != 2 + j)
          ordered = 0;
      end else ordered = 0;
    end
    check(ordered, "implications delivered in level order 2,3,4,5");
    if (ordered) n_order++;
    n_impl += impls.size() - imark;
    if (impls.size() > imark) begin
      k = find(impls, MSG_PROPLIT, 21, 1, imark);
      check(k >= 0 && int'(impls[k].n) == B1 && impls[k].c == 0, "x21 reason is bank 1 clause 0");
    end
    // every bank saw the decision and the four implications
    begin
      bit all_seen = 1;
      for (int n = 0; n < NN; n++) if (n != CU && bank_props[n] < 5) all_seen = 0;
      check(all_seen, "broadcasts reached every bank");
      if (all_seen) n_bcast++;
    end
    check(bank_props[B8] - bcast0 == 5, "bank 8 received exactly 5 PropLits");

    // reason of x21 answered by bank 1 with the antecedent x20=1
    mark = msgs.size();
    hostq.push_back(mk(MSG_REASON, 21, 1));
    wait_quiet(0);
    k = find(msgs, MSG_REASON, 20, 1, mark);
    check(k >= 0, "reason of x21 is x20=1");
    if (k >= 0) n_reason++;
    // NotReason for that clause, then the query finds nothing
    hostq.push_back(to_bank(mk(MSG_NOTREASON), B1, 0));
    mark = msgs.size();
    hostq.push_back(mk(MSG_REASON, 21, 1));
    wait_quiet(0);
    check(count_type(msgs, MSG_REASON, mark) == 0, "NotReason clause no longer answers");
    if (count_type(msgs, MSG_REASON, mark) == 0) n_notreason++;

    // ---------------- B: connector chain
    hostq.push_back(mk(MSG_COMPLETEDL));
    imark = impls.size();
    for (int j = 0; j < 7; j++) hostq.push_back(mk(MSG_PROPLIT, 10 + j, 0, 1));
    wait_quiet(0);
    k = find(impls, MSG_PROPLIT, 17, 1, imark);
    check(k >= 0, "x17 implied through the connector");
    if (k >= 0) begin
      n_chain++;
      check(int'(impls[k].n) == B6 && impls[k].c == 3, "x17 from bank 6 clause 3");
    end
    check(impls.size() - imark == 1, "only x17 implied");
    n_impl += impls.size() - imark;

    // ---------------- C: conflict
    hostq.push_back(mk(MSG_COMPLETEDL));
    hostq.push_back(mk(MSG_PROPLIT, 1, 0, 1));
    wait_quiet(0);
    hostq.push_back(mk(MSG_COMPLETEDL));
    imark = impls.size();
    mark  = msgs.size();
    hostq.push_back(mk(MSG_PROPLIT, 2, 0, 1));
    wait_quiet(0);
    n_impl += impls.size() - imark;
    check(find(impls, MSG_PROPLIT, 3, 1, imark) >= 0, "x3=1 implied");
    check(count_type(msgs, MSG_CONFLICT, mark) >= 1, "conflict reported");
    if (count_type(msgs, MSG_CONFLICT, mark) >= 1 && bank_stopped_any[0]) n_conflict++;
    check(bank_stopped_any == 2'b01, "context 0 stopped");

    // ---------------- D: learning and strengthening
    mark = msgs.size();
    hostq.push_back(mk(MSG_REASON, 3, 1));
    wait_quiet(0);
    k0 = find(msgs, MSG_REASON, 1, 0, mark);
    k1 = find(msgs, MSG_REASON, 2, 0, mark);
    check(k0 >= 0, "learned literal x1=0 reported");
    check(k1 >= 0, "current-level x2=0 reported");
    if (k0 >= 0) begin
      check(msgs[k0].route == '{to_src: 0, bcast: 0, to_cu: 1}, "earlier-level literal to central unit only");
      n_reason++;
    end
    mark = msgs.size();
    hostq.push_back(mk(MSG_STRENGTHEN, 0, 0, 0, 0, 1));
    hostq.push_back(mk(MSG_STRENGTHEN, 1, 1));
    hostq.push_back(mk(MSG_STRENGTHEN, 2, 1));
    wait_quiet(0);
    check(find(msgs, MSG_STRENGTHEN, 3, 0, mark) >= 0, "~x3 removable from (x1|x2|x3)");
    check(find(msgs, MSG_STRENGTHEN, 4, 1, mark) >= 0, "x4 removable from (x2|~x4)");
    n_strengthen += count_type(msgs, MSG_STRENGTHEN, mark);

    // ---------------- E: backtrack
    imark = impls.size();
    hostq.push_back(mk(MSG_CANCELVAR, 0, 0, 0, 0, 1));
    wait_quiet(0);
    check(bank_stopped_any == 2'b00, "backtrack restarts context 0");
    check(impls.size() == imark, "nothing implied after backtrack (x1=0 alone)");
    if (bank_stopped_any == 2'b00) n_backtrack++;
    // after backtrack x2=1 is consistent: decide it, nothing conflicts
    mark = msgs.size();
    hostq.push_back(mk(MSG_PROPLIT, 2, 1, 1));
    wait_quiet(0);
    check(count_type(msgs, MSG_CONFLICT, mark) == 0, "no conflict after backtrack");

    // ---------------- F: second context
    begin
      flit_t f;
      f = mk(MSG_ADDCLAUSE, 0, 0, 0, 1);
      f.i[10:9] = AC_CHKRES;
      hostq.push_back(f);
    end
    imark = impls.size();
    hostq.push_back(mk(MSG_PROPLIT, 20, 1, 1, 1));
    wait_quiet(1);
    k = find(impls, MSG_PROPLIT, 24, 1, imark);
    check(k >= 0 && impls[k].ctx == 1, "context 1 implies x24");
    if (k >= 0 && impls[k].ctx == 1) n_ctx1++;
    n_impl += impls.size() - imark;

    // ---------------- every mechanism happened
    $display("mechanisms: quiet=%0d impl=%0d order=%0d bcast=%0d chain=%0d conflict=%0d",
             n_quiet, n_impl, n_order, n_bcast, n_chain, n_conflict);
    $display("            reason=%0d notreason=%0d strengthen=%0d backtrack=%0d ctx1=%0d stall=%0d",
             n_reason, n_notreason, n_strengthen, n_backtrack, n_ctx1, n_stall);
    check(n_quiet > 0,      "mechanism: quiet detection");
    check(n_impl > 0,       "mechanism: implication");
    check(n_order > 0,      "mechanism: level-ordered delivery");
    check(n_bcast > 0,      "mechanism: broadcast");
    check(n_chain > 0,      "mechanism: connector chain");
    check(n_conflict > 0,   "mechanism: conflict stop");
    check(n_reason > 0,     "mechanism: reason query");
    check(n_notreason > 0,  "mechanism: NotReason");
    check(n_strengthen > 0, "mechanism: strengthening");
    check(n_backtrack > 0,  "mechanism: backtrack");
    check(n_ctx1 > 0,       "mechanism: second context");
    check(n_stall > 0,      "mechanism: credit stall");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
