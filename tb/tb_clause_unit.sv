// tb_clause_unit: directed test of one clause unit.
//
// Drives the command set on a single clause and checks the flags and the
// output bus against values worked out by hand for each step: loading and
// validating a clause, propagation to a unit clause and getpro, conflict by
// all-false and by opposite assignment, reason query and level bits,
// strengthening (copystr / strprovar / strgetpro), completedl, clearvar of a
// variable and of the whole current level, context independence and chkres,
// and connector chaining with its withdrawal and the two-sided race.
module tb_clause_unit;
  import satin_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ccmd_t cmd;
  logic  sel;
  logic [1:0] cn_prev_in, cn_next_in, cn_prev_out, cn_next_out;
  logic [1:0] valid_o, prop_o, conflict_o, str_o, rq_o;
  logic       chain_busy;
  cdout_t     dout;

  clause_unit #(.NCTX(2)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // apply one command for one cycle; returns the output bus seen during it
  task automatic do_cmd(input ccmd_e op, input logic ctx, input var_t v = '0, input logic p = 0,
                        input int idx = 0, input logic s = 1, input logic [7:0] mask = '0,
                        input logic [1:0] conn = '0, input logic allcur = 0,
                        output cdout_t seen);
    @(negedge clk);
    cmd        = '0;
    cmd.op     = op;
    cmd.ctx    = ctx;
    cmd.v      = v;
    cmd.p      = p;
    cmd.idx    = IDX_W'(idx);
    cmd.mask   = mask;
    cmd.conn   = conn;
    cmd.allcur = allcur;
    sel        = s;
    #1 seen = dout;
    @(negedge clk);
    cmd = '0;
    sel = 0;
  endtask

  cdout_t o;

  task automatic load3(input logic [1:0] conn, input logic ctx);
    // (x1 | ~x2 | x3) in literals 1..3, literal 0 reserved for a connector
    do_cmd(CMD_SETVAR, 0, 20'd1, 1, 1, .seen(o));
    do_cmd(CMD_SETVAR, 0, 20'd2, 0, 2, .seen(o));
    do_cmd(CMD_SETVAR, 0, 20'd3, 1, 3, .seen(o));
    do_cmd(CMD_VALIDATE, ctx, .mask({4'b0000, 3'b111, conn[0]}), .conn(conn), .seen(o));
  endtask

  initial begin
    #20000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd = '0; sel = 0; cn_prev_in = '0; cn_next_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---------------- load and validate in context 0
    load3(2'b00, 0);
    check(valid_o == 2'b01, "valid in ctx0 only");
    check(prop_o == 0 && conflict_o == 0, "fresh clause quiet");

    // ---------------- propagation to unit
    do_cmd(CMD_PROVAR, 0, 20'd1, 0, .seen(o));          // x1 = 0: literal x1 false
    check(prop_o == 0, "two open literals, no prop");
    do_cmd(CMD_PROVAR, 0, 20'd5, 1, .seen(o));          // unrelated variable
    check(prop_o == 0, "unrelated variable ignored");
    do_cmd(CMD_PROVAR, 0, 20'd2, 1, .seen(o));          // x2 = 1: ~x2 false
    check(prop_o == 2'b01, "unit after second false literal");
    check(conflict_o == 0, "unit is not conflict");
    do_cmd(CMD_GETVAR, 0, .idx(2), .s(1), .seen(o));
    check(o.v == 20'd2 && o.p == 0, "getvar literal 2");
    do_cmd(CMD_GETPRO, 0, .seen(o));
    check(o.v == 20'd3 && o.p == 1 && o.idx == 3, "getpro returns x3 true");
    check(prop_o == 0, "getpro clears prop");

    // the implication coming back from the network changes nothing
    do_cmd(CMD_PROVAR, 0, 20'd3, 1, .seen(o));
    check(prop_o == 0 && conflict_o == 0, "echo of own implication harmless");

    // ---------------- learning
    do_cmd(CMD_GETREASON, 0, 20'd3, 0, .seen(o));       // wrong polarity
    check(rq_o == 0, "getreason with other polarity does not match");
    do_cmd(CMD_GETREASON, 0, 20'd3, 1, .seen(o));
    check(rq_o == 2'b01, "getreason matches reason literal");
    do_cmd(CMD_GETLVLBITS, 0, .seen(o));
    check(o.bits == 8'b0000_1110 && o.idx == 3 && o.present == 8'b0000_1110,
          "level bits are literals 1..3, reason idx 3");
    check(rq_o == 0, "getlvlbits clears query flag");

    // ---------------- strengthening
    do_cmd(CMD_COPYSTR, 0, .seen(o));
    check(str_o == 0, "copystr alone raises nothing");
    do_cmd(CMD_STRPROVAR, 0, 20'd1, 1, .seen(o));       // learned literal x1
    check(str_o == 0, "one antecedent left");
    do_cmd(CMD_STRPROVAR, 0, 20'd2, 1, .seen(o));       // x2, but clause holds ~x2
    check(str_o == 0, "polarity must match");
    do_cmd(CMD_STRPROVAR, 0, 20'd2, 0, .seen(o));       // learned literal ~x2
    check(str_o == 2'b01, "only reason literal left: removable");
    do_cmd(CMD_STRGETPRO, 0, .seen(o));
    check(o.v == 20'd3 && o.p == 0, "strgetpro gives ~x3");
    check(str_o == 0, "strgetpro clears flag");

    // ---------------- completedl and cancel current level
    do_cmd(CMD_COMPLETEDL, 0, .seen(o));
    do_cmd(CMD_GETREASON, 0, 20'd3, 1, .seen(o));
    do_cmd(CMD_GETLVLBITS, 0, .seen(o));
    check(o.bits == 0, "completedl clears current bits");
    do_cmd(CMD_CLEARVAR, 0, 20'd2, .seen(o));           // cancel x2 (earlier level)
    check(prop_o == 0, "cancelled antecedent: x3 still true so no prop");
    do_cmd(CMD_GETREASON, 0, 20'd3, 1, .seen(o));
    check(rq_o == 2'b01, "reason survives cancel of antecedent");
    do_cmd(CMD_GETLVLBITS, 0, .seen(o));
    do_cmd(CMD_CLEARVAR, 0, 20'd3, .seen(o));           // cancel x3
    do_cmd(CMD_GETREASON, 0, 20'd3, 1, .seen(o));
    check(rq_o == 0, "cancelling the implied literal drops the reason");
    do_cmd(CMD_PROVAR, 0, 20'd2, 1, .seen(o));
    check(prop_o == 2'b01, "unit again");
    do_cmd(CMD_CLEARVAR, 0, .allcur(1), .seen(o));      // cancel current level: x2
    check(prop_o == 0, "allcur clears current-level x2");
    do_cmd(CMD_PROVAR, 0, 20'd2, 1, .seen(o));
    check(prop_o == 2'b01, "x1 (older level) still false after allcur");

    // ---------------- conflicts
    do_cmd(CMD_PROVAR, 0, 20'd3, 0, .seen(o));          // x3 = 0: all false
    check(conflict_o == 2'b01 && prop_o == 0, "all literals false is conflict");
    do_cmd(CMD_CLEARVAR, 0, 20'd3, .seen(o));
    check(conflict_o == 0 && prop_o == 2'b01, "clearvar resolves conflict");
    do_cmd(CMD_PROVAR, 0, 20'd1, 1, .seen(o));          // x1 = 1 while x1 = 0 held
    check(conflict_o == 2'b01, "opposite assignment of a decided variable is conflict");
    do_cmd(CMD_CLEARVAR, 0, 20'd1, .seen(o));
    check(conflict_o == 0, "cleared");

    // ---------------- second context is independent
    check(valid_o == 2'b01, "ctx1 invalid");
    do_cmd(CMD_PROVAR, 1, 20'd1, 0, .seen(o));
    do_cmd(CMD_PROVAR, 1, 20'd2, 1, .seen(o));
    check(prop_o[1] == 0, "invalid context ignores propagation");
    do_cmd(CMD_CHKRES, 1, .s(0), .seen(o));
    check(valid_o == 2'b11, "chkres validates ctx1");
    do_cmd(CMD_PROVAR, 1, 20'd1, 0, .seen(o));
    check(prop_o == 2'b00, "ctx1 one false literal");
    do_cmd(CMD_PROVAR, 1, 20'd2, 1, .seen(o));
    check(prop_o == 2'b10, "ctx1 unit, ctx0 not unit (x2 cleared there? no: x1 cleared)");
    do_cmd(CMD_SETVAR, 0, 20'd7, 1, 3, .s(0), .seen(o));
    check(dut.lvar[3] == 20'd3, "setvar without select ignored");

    // ---------------- connectors
    rst_n = 0; @(negedge clk); rst_n = 1;
    load3(2'b01, 0);                                     // literal 0 = previous connector
    do_cmd(CMD_PROVAR, 0, 20'd1, 0, .seen(o));
    do_cmd(CMD_PROVAR, 0, 20'd2, 1, .seen(o));
    check(prop_o == 0, "two open (x3 and connector)");
    do_cmd(CMD_PROVAR, 0, 20'd3, 0, .seen(o));          // only connector open
    check(prop_o == 0, "connector is not propagated to the network");
    check(chain_busy == 1 && cn_prev_out[0] == 0, "connector implication pending");
    @(negedge clk);
    check(cn_prev_out[0] == 1, "clause makes its connector true");
    check(chain_busy == 0, "chain settled");
    do_cmd(CMD_CLEARVAR, 0, 20'd3, .seen(o));
    @(negedge clk);
    check(cn_prev_out[0] == 0, "connector implication withdrawn on cancel");
    // neighbour makes the shared connector true: literal 0 false here
    cn_prev_in = 2'b01;
    do_cmd(CMD_NOP, 0, .seen(o));
    check(prop_o == 2'b01, "connector false from neighbour: x3 unit");
    do_cmd(CMD_GETPRO, 0, .seen(o));
    check(o.v == 20'd3 && o.p == 1, "chained implication x3");
    do_cmd(CMD_CLEARVAR, 0, 20'd3, .seen(o));
    // race: both sides make the connector true
    cn_prev_in = 2'b00;
    do_cmd(CMD_PROVAR, 0, 20'd3, 0, .seen(o));
    @(negedge clk);
    check(cn_prev_out[0] == 1, "connector set again");
    cn_prev_in = 2'b01;
    @(negedge clk);
    check(conflict_o[0] == 1, "both sides set connector: conflict");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
