// tb_clause_bank: a bank of eight clauses driven through its network port.
//
// The testbench plays the network: it sends messages against the bank's
// receive credits, takes every message the bank sends (returning a credit
// for each) and loops propagations marked "back to source" into the bank
// again, as the router would. The clauses are the three-clause learning
// example (x1|x2|x3), (x2|~x4), (~x3|x4) on variables 1..4:
//   decide x1=0 (level 1), new level, decide x2=0 ->
//   the bank implies x3=1 (clause 0) and x4=0 (clause 1) at level 2 in
//   consecutive cycles, then clause 2 implies x4=1, and the two implications
//   of x4 collide: one Conflict leaves the bank and it goes quiet.
// Then the learning readout (Reason queries for x4=0 and x3=1),
// strengthening of the learned clause (x1|x2), backtrack of the current
// level, NotReason, implication-level bookkeeping and the second context
// (chkres) are checked, each against messages worked out by hand.
module tb_clause_bank;
  import satin_pkg::*;
  localparam int NC = 8, RXD = 4, ME = 7;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     in_valid, in_credit, out_valid, out_credit;
  netflit_t in_flit, out_flit;
  logic [1:0] idle, stopped_o;

  naddr_t my_addr;
  assign my_addr = NADDR_W'(ME);
  clause_bank #(.NCLAUSE(NC), .NCTX(2), .RX_DEPTH(RXD), .TX_DEPTH(4), .OUT_CREDITS(4)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- network model
  netflit_t sendq[$];
  flit_t    rcvd[$];
  int       rcvd_cycle[$];
  int       cyc = 0;
  int       credits = RXD;
  bit       loopback = 1;

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    credits += in_credit ? 1 : 0;
    in_valid = 0;
    if (sendq.size() > 0 && credits > 0) begin
      in_valid = 1;
      in_flit  = sendq.pop_front();
      credits--;
    end
  end

  always @(posedge clk) begin
    out_credit <= rst_n && out_valid;
    if (rst_n && out_valid) begin
      rcvd.push_back(out_flit.msg);
      rcvd_cycle.push_back(cyc);
      if (loopback && out_flit.msg.route.to_src && out_flit.msg.mtype == MSG_PROPLIT)
        sendq.push_back(out_flit);
    end
  end

  function automatic netflit_t msg(input msg_type_e t, input int v = 0, input bit p = 0,
                                   input int lvl = 0, input int c = 0, input bit ctx = 0,
                                   input bit flag = 0);
    netflit_t f;
    f = '0;
    f.src       = NADDR_W'(55);
    f.msg.mtype = t;
    f.msg.route = '{to_src: 0, bcast: 1, to_cu: 0};
    f.msg.n     = NADDR_W'(ME);
    f.msg.c     = CADDR_W'(c);
    f.msg.v     = VAR_W'(v);
    f.msg.p     = p;
    f.msg.i     = ILVL_W'(lvl);
    f.msg.ctx   = ctx;
    f.msg.flag  = flag;
    return f;
  endfunction

  task automatic add_lit(input int c, input int idx, input int v, input bit p);
    netflit_t f;
    f = msg(MSG_ADDCLAUSE, v, p, 0, c);
    f.msg.i = '0;
    f.msg.i[13 -: IDX_W] = IDX_W'(idx);
    f.msg.i[10:9] = AC_SETVAR;
    sendq.push_back(f);
  endtask

  task automatic validate(input int c, input logic [7:0] mask);
    netflit_t f;
    f = msg(MSG_ADDCLAUSE, int'(mask), 0, 0, c);
    f.msg.i = '0;
    f.msg.i[10:9] = AC_VALIDATE;
    sendq.push_back(f);
  endtask

  task automatic settle(input int n = 40);
    repeat (n) @(negedge clk);
  endtask

  // find a received message; returns index or -1
  function automatic int find(input msg_type_e t, input int v, input bit p, input int from = 0);
    for (int k = from; k < rcvd.size(); k++)
      if (rcvd[k].mtype == t && int'(rcvd[k].v) == v && rcvd[k].p == p) return k;
    return -1;
  endfunction

  function automatic int count_type(input msg_type_e t, input int from = 0);
    int n = 0;
    for (int k = from; k < rcvd.size(); k++) if (rcvd[k].mtype == t) n++;
    return n;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int k0, k1, mark;

  initial begin
    in_valid = 0; in_flit = '0; out_credit = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---- load (x1|x2|x3), (x2|~x4), (~x3|x4)
    add_lit(0, 0, 1, 1); add_lit(0, 1, 2, 1); add_lit(0, 2, 3, 1); validate(0, 8'b111);
    add_lit(1, 0, 2, 1); add_lit(1, 1, 4, 0);                     validate(1, 8'b011);
    add_lit(2, 0, 3, 0); add_lit(2, 1, 4, 1);                     validate(2, 8'b011);
    settle();
    check(rcvd.size() == 0, "loading sends nothing");
    check(idle == 2'b11, "bank idle after loading");

    // ---- decision level 1: x1 = 0
    sendq.push_back(msg(MSG_PROPLIT, 1, 0, 1));
    settle();
    check(rcvd.size() == 0, "x1=0 implies nothing");
    sendq.push_back(msg(MSG_COMPLETEDL, 0, 0));
    // ---- decision level 2: x2 = 0
    sendq.push_back(msg(MSG_PROPLIT, 2, 0, 1));
    settle(60);
    k0 = find(MSG_PROPLIT, 3, 1);
    k1 = find(MSG_PROPLIT, 4, 0);
    check(k0 >= 0 && k1 >= 0, "implications x3=1 and x4=0 sent");
    if (k0 >= 0 && k1 >= 0) begin
      check(rcvd[k0].c == 0 && rcvd[k1].c == 1, "reason clause addresses 0 and 1");
      check(rcvd[k0].n == ME && rcvd[k0].i == 2 && rcvd[k1].i == 2, "source bank and level l_p+1 = 2");
      check(rcvd[k0].route == '{to_src: 1, bcast: 1, to_cu: 1}, "implication broadcast to all");
      check(rcvd_cycle[k1] - rcvd_cycle[k0] == 1, "one getpro per cycle: consecutive implications");
    end
    check(find(MSG_PROPLIT, 4, 1) >= 0, "clause 2 implies x4=1 from x3=1");
    check(count_type(MSG_CONFLICT) == 1, "exactly one Conflict");
    check(stopped_o[0] == 1, "context 0 stopped");
    check(idle[0] == 1, "stopped bank idle in ctx0");

    // ---- learning readout: reason of x4=0 (clause 1: x2|~x4, x2 set this level)
    mark = rcvd.size();
    loopback = 0;
    sendq.push_back(msg(MSG_REASON, 4, 0));
    settle();
    check(rcvd.size() - mark == 1, "one reason literal from clause 1");
    k0 = find(MSG_REASON, 2, 0, mark);
    check(k0 >= 0, "query for x2=0");
    if (k0 >= 0) begin
      check(rcvd[k0].route == '{to_src: 1, bcast: 1, to_cu: 1}, "current-level literal queried further");
      check({rcvd[k0].n, rcvd[k0].c} == 20'd4 && rcvd[k0].e == 0, "second literal is the implied ~x4");
    end
    // reason of x3=1 (clause 0: x1 from level 1, x2 from this level)
    mark = rcvd.size();
    sendq.push_back(msg(MSG_REASON, 3, 1));
    settle();
    check(rcvd.size() - mark == 2, "two reason literals from clause 0");
    k0 = find(MSG_REASON, 1, 0, mark);
    k1 = find(MSG_REASON, 2, 0, mark);
    check(k0 >= 0 && k1 >= 0, "x1=0 and x2=0 reported");
    if (k0 >= 0) check(rcvd[k0].route == '{to_src: 0, bcast: 0, to_cu: 1}, "earlier-level literal to central only");
    if (k1 >= 0) check(rcvd[k1].route == '{to_src: 1, bcast: 1, to_cu: 1}, "current-level literal broadcast");

    // ---- strengthening with learned clause (x1 | x2)
    mark = rcvd.size();
    sendq.push_back(msg(MSG_STRENGTHEN, 0, 0, 0, 0, 0, 1));   // begin: copystr
    sendq.push_back(msg(MSG_STRENGTHEN, 1, 1));
    settle();
    check(rcvd.size() == mark, "nothing removable yet");
    sendq.push_back(msg(MSG_STRENGTHEN, 2, 1));
    settle();
    check(find(MSG_STRENGTHEN, 3, 0, mark) >= 0, "~x3 removable (clause 0)");
    check(find(MSG_STRENGTHEN, 4, 1, mark) >= 0, "x4 removable (clause 1)");
    check(rcvd.size() - mark == 2, "exactly two strengthen messages");

    // ---- backtrack the current level
    mark = rcvd.size();
    loopback = 1;
    sendq.push_back(msg(MSG_CANCELVAR, 0, 0, 0, 0, 0, 1));
    settle();
    check(stopped_o[0] == 0, "CancelVar restarts the context");
    check(rcvd.size() == mark, "nothing unit after backtrack");
    check(idle == 2'b11, "idle after backtrack");

    // ---- implication levels and NotReason
    sendq.push_back(msg(MSG_COMPLETEDL, 0, 0));
    sendq.push_back(msg(MSG_PROPLIT, 3, 1, 7));               // x3=1 at level 7
    settle();
    k0 = find(MSG_PROPLIT, 4, 1, mark);
    check(k0 >= 0, "clause 2 implies x4=1");
    if (k0 >= 0) check(rcvd[k0].i == 8 && rcvd[k0].c == 2, "level max(7)+1 = 8 from clause 2");
    mark = rcvd.size();
    begin
      netflit_t f;
      f = msg(MSG_NOTREASON, 0, 0, 0, 2);
      f.msg.route = '{to_src: 0, bcast: 0, to_cu: 0};
      sendq.push_back(f);
    end
    sendq.push_back(msg(MSG_REASON, 4, 1));
    settle();
    check(count_type(MSG_REASON, mark) == 0, "NotReason: clause 2 no longer answers");

    // ---- second context through chkres
    mark = rcvd.size();
    begin
      netflit_t f;
      f = msg(MSG_ADDCLAUSE, 0, 0, 0, 0, 1);
      f.msg.i = '0;
      f.msg.i[10:9] = AC_CHKRES;
      sendq.push_back(f);
    end
    sendq.push_back(msg(MSG_PROPLIT, 1, 0, 1, 0, 1));
    sendq.push_back(msg(MSG_PROPLIT, 2, 0, 1, 0, 1));
    settle(60);
    k0 = find(MSG_PROPLIT, 3, 1, mark);
    check(k0 >= 0 && rcvd[k0].ctx == 1, "context 1 implies x3=1");
    check(count_type(MSG_CONFLICT, mark) == 1, "context 1 reaches the same conflict");
    check(stopped_o == 2'b10, "context 1 stopped, context 0 running");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
