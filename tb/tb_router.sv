// tb_router: routing, broadcast, arbitration and credit flow of one router.
//
// The router under test is the centre of a 3 x 3 mesh (x=1, y=1) with the
// central unit placed at (0,0). Directed cases inject one flit on a chosen
// input and compare the set of outputs it leaves on with the set worked out
// by hand from the routing rules (dimension-order broadcast, to-central,
// to-source, unicast). A stall case withholds the east credits and checks
// that no more than BUF_DEPTH flits leave before credits return, and a
// contention case injects broadcasts on all five inputs at once and checks
// every copy arrives exactly once.
module tb_router;
  import satin_pkg::*;
  localparam int BD = 4;
  localparam int L = 0, N = 1, E = 2, S = 3, W = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     in_valid  [5];
  netflit_t in_flit   [5];
  logic     in_credit [5];
  logic     out_valid [5];
  netflit_t out_flit  [5];
  logic     out_credit[5];
  logic     idle;

  naddr_t my_x, my_y;
  assign my_x = NADDR_W'(1);
  assign my_y = NADDR_W'(1);
  router #(.MX(3), .MY(3), .CU_X(0), .CU_Y(0), .BUF_DEPTH(BD), .LOCAL_CREDITS(BD)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // received copies per tag and port
  int got [int][5];
  logic hold_e = 0;
  int   e_sent_while_held = 0;
  int   credits_owed_e = 0;

  // sinks: return a credit the cycle after each flit (except east while held)
  always @(posedge clk) begin
    for (int p = 0; p < 5; p++) begin
      out_credit[p] <= 1'b0;
      if (out_valid[p]) begin
        int tag;
        tag = int'(out_flit[p].msg.v);
        if (!got.exists(tag)) for (int q = 0; q < 5; q++) got[tag][q] = 0;
        got[tag][p]++;
      end
    end
    if (out_valid[E] && hold_e) e_sent_while_held++;
    if (hold_e) begin
      if (out_valid[E]) credits_owed_e++;
    end else begin
      for (int p = 0; p < 5; p++)
        if (out_valid[p] && p != E) out_credit[p] <= 1'b1;
      if (credits_owed_e > 0) begin
        out_credit[E] <= 1'b1;
        credits_owed_e--;
      end else if (out_valid[E]) out_credit[E] <= 1'b1;
      else out_credit[E] <= 1'b0;
    end
  end

  task automatic inject(input int port, input int tag, input bit b, input bit ts, input bit cu,
                        input int n, input int src);
    @(negedge clk);
    in_valid[port] = 1;
    in_flit[port] = '0;
    in_flit[port].msg.mtype = MSG_PROPLIT;
    in_flit[port].msg.route = '{to_src: ts, bcast: b, to_cu: cu};
    in_flit[port].msg.n = NADDR_W'(n);
    in_flit[port].msg.v = VAR_W'(tag);
    in_flit[port].src = NADDR_W'(src);
    @(negedge clk);
    in_valid[port] = 0;
  endtask

  task automatic expect_mask(input int tag, input logic [4:0] m, input string what);
    for (int p = 0; p < 5; p++) begin
      int g;
      g = got.exists(tag) ? got[tag][p] : 0;
      check(g == int'(m[p]), $sformatf("%s: port %0d got %0d copies", what, p, g));
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 5; p++) begin in_valid[p] = 0; in_flit[p] = '0; out_credit[p] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;

    //      port tag bcast to_src to_cu n src
    inject(L, 1, 1, 0, 0, 0, 4);  repeat (4) @(negedge clk); expect_mask(1, 5'b11110, "bcast from local");
    inject(L, 2, 1, 1, 0, 0, 4);  repeat (4) @(negedge clk); expect_mask(2, 5'b11111, "bcast to_src from local");
    inject(W, 3, 1, 0, 0, 0, 3);  repeat (4) @(negedge clk); expect_mask(3, 5'b01111, "bcast from west");
    inject(E, 4, 1, 0, 0, 0, 5);  repeat (4) @(negedge clk); expect_mask(4, 5'b11011, "bcast from east");
    inject(N, 5, 1, 0, 0, 0, 1);  repeat (4) @(negedge clk); expect_mask(5, 5'b01001, "bcast from north");
    inject(S, 6, 1, 0, 0, 0, 7);  repeat (4) @(negedge clk); expect_mask(6, 5'b00011, "bcast from south");
    inject(L, 7, 0, 0, 1, 0, 4);  repeat (4) @(negedge clk); expect_mask(7, 5'b10000, "to central (0,0): west first");
    inject(L, 8, 0, 0, 0, 5, 4);  repeat (4) @(negedge clk); expect_mask(8, 5'b00100, "unicast to (2,1)");
    inject(W, 9, 0, 0, 0, 7, 3);  repeat (4) @(negedge clk); expect_mask(9, 5'b01000, "unicast to (1,2)");
    inject(E, 10, 0, 0, 0, 4, 5); repeat (4) @(negedge clk); expect_mask(10, 5'b00001, "unicast to self");
    inject(L, 11, 0, 1, 0, 0, 1); repeat (4) @(negedge clk); expect_mask(11, 5'b00010, "to source (1,0)");
    check(idle, "idle after single flits");

    // ---- credit stall on the east output
    hold_e = 1;
    for (int k = 0; k < 6; k++) inject(L, 100 + k, 0, 0, 0, 5, 4);
    repeat (10) @(negedge clk);
    check(e_sent_while_held == BD, $sformatf("east sent %0d flits without credit return", e_sent_while_held));
    check(!idle, "router busy while stalled");
    hold_e = 0;
    repeat (12) @(negedge clk);
    for (int k = 0; k < 6; k++) expect_mask(100 + k, 5'b00100, "stalled unicast delivered");
    check(idle, "idle after stall");

    // ---- all inputs broadcast in the same cycle
    @(negedge clk);
    for (int p = 0; p < 5; p++) begin
      in_valid[p] = 1;
      in_flit[p] = '0;
      in_flit[p].msg.route = '{to_src: 0, bcast: 1, to_cu: 0};
      in_flit[p].msg.v = VAR_W'(200 + p);
    end
    @(negedge clk);
    for (int p = 0; p < 5; p++) in_valid[p] = 0;
    repeat (12) @(negedge clk);
    expect_mask(200 + L, 5'b11110, "contention: local");
    expect_mask(200 + N, 5'b01001, "contention: from north");
    expect_mask(200 + E, 5'b11011, "contention: from east");
    expect_mask(200 + S, 5'b00011, "contention: from south");
    expect_mask(200 + W, 5'b01111, "contention: from west");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
