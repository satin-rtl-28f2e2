// tb_central_unit: host/network interface of the central unit.
//
// Checks that host messages leave on the network port tagged with the
// central unit's node and stop when router credits run out; that received
// propagations come out lowest implication level first while other messages
// come out in arrival order; that the receive credit is returned per
// message; and that `quiet` rises only after the idle tree has reported idle
// for IDLE_LAT+1 cycles with nothing sent, and falls when the host sends.
module tb_central_unit;
  import satin_pkg::*;
  localparam int LAT = 3, SELF = 44;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_tx_valid, host_tx_ready, impl_valid, impl_pop, msg_valid, msg_pop;
  flit_t host_tx_msg, impl_msg, msg_msg;
  logic [1:0] quiet, local_idle, net_idle;
  logic in_valid, in_credit, out_valid, out_credit;
  netflit_t in_flit, out_flit;

  central_unit #(.NCTX(2), .SELF(NADDR_W'(SELF)), .RX_DEPTH(4), .TX_DEPTH(8), .MSG_DEPTH(8),
                 .SORT_DEPTH(8), .OUT_CREDITS(2), .IDLE_LAT(LAT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  flit_t sent[$];
  int rx_credits_back = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      sent.push_back(out_flit.msg);
      if (out_flit.src != NADDR_W'(SELF)) begin failures++; $display("FAIL: src tag"); end
    end
    if (in_credit) rx_credits_back++;
  end

  task automatic net_send(input msg_type_e t, input int v, input int lvl);
    @(negedge clk);
    in_valid = 1;
    in_flit = '0;
    in_flit.msg.mtype = t;
    in_flit.msg.v = VAR_W'(v);
    in_flit.msg.i = ILVL_W'(lvl);
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    host_tx_valid = 0; host_tx_msg = '0; impl_pop = 0; msg_pop = 0;
    in_valid = 0; in_flit = '0; out_credit = 0; net_idle = 2'b11;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---- quiet after LAT+1 idle cycles
    repeat (LAT) @(negedge clk);
    check(quiet == 2'b00, "not quiet before LAT+1 idle cycles");
    repeat (2) @(negedge clk);
    check(quiet == 2'b11, "quiet after idle tree settled");

    // ---- host sends three messages; only two credits
    for (int k = 0; k < 3; k++) begin
      @(negedge clk);
      host_tx_valid = 1;
      host_tx_msg = '0;
      host_tx_msg.mtype = MSG_PROPLIT;
      host_tx_msg.v = VAR_W'(10 + k);
    end
    @(negedge clk);
    host_tx_valid = 0;
    check(quiet == 2'b00, "sending clears quiet");
    repeat (5) @(negedge clk);
    check(sent.size() == 2, "two credits: two messages out");
    @(negedge clk); out_credit = 1; @(negedge clk); out_credit = 0;
    repeat (3) @(negedge clk);
    check(sent.size() == 3 && sent[2].v == 12, "third message after credit return");

    // ---- quiet needs the tree to be idle
    net_idle = 2'b01;
    repeat (LAT + 3) @(negedge clk);
    check(quiet == 2'b01, "context 1 busy in the tree, context 0 quiet");
    net_idle = 2'b11;

    // ---- received messages
    net_send(MSG_PROPLIT, 1, 5);
    net_send(MSG_CONFLICT, 0, 6);
    net_send(MSG_PROPLIT, 2, 2);
    net_send(MSG_PROPLIT, 3, 9);
    net_send(MSG_REASON, 7, 0);
    net_send(MSG_PROPLIT, 4, 1);
    repeat (3) @(negedge clk);
    check(rx_credits_back == 6, "one receive credit per message");
    begin
      int exp_v[4] = '{4, 2, 1, 3};
      for (int k = 0; k < 4; k++) begin
        check(impl_valid && int'(impl_msg.v) == exp_v[k], $sformatf("implication %0d in level order", k));
        impl_pop = 1; @(negedge clk); impl_pop = 0;
      end
      check(!impl_valid, "sorter empty");
    end
    check(msg_valid && msg_msg.mtype == MSG_CONFLICT, "conflict first");
    msg_pop = 1; @(negedge clk); msg_pop = 0;
    check(msg_valid && msg_msg.mtype == MSG_REASON && msg_msg.v == 7, "reason second");
    msg_pop = 1; @(negedge clk); msg_pop = 0;
    check(!msg_valid, "message queue empty");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
