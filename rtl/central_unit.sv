// central_unit: network side of the central unit.
//
// The central unit runs the solver's control flow (load clauses, decide,
// propagate, wait for quiet, learn, backtrack, restart) in software on a
// general purpose processor. This module is the hardware between that
// processor (the "host") and the network:
//
//  * host -> network: the host queues complete messages (host_tx_*); they
//    are sent from the central unit's node (SELF) against credits for the
//    router's local input buffer.
//  * network -> host: received messages pass a receive buffer. Propagations
//    (PropLit) go into the implication sorter, which hands them to the host
//    lowest implication level first (impl_*). All other messages (Conflict,
//    Reason, Strengthen) go into a FIFO in arrival order (msg_*). A received
//    message leaves the receive buffer, and its credit goes back to the
//    router, only when its destination has room.
//  * quiet detection: `local_idle` tells the idle tree that this node holds
//    nothing; `net_idle` is the tree's answer. Because the tree is IDLE_LAT
//    cycles deep, `quiet[c]` is raised only after the tree has reported idle
//    for context c for IDLE_LAT+1 cycles with nothing sent or received here
//    in that time, so a stale idle from before the last send is never used.
//
// Follows the architecture: central unit at a network node, received
// implication sorter, synchronisation on global idle. The host interface,
// buffer sizes and the quiet rule are this design's own.
module central_unit
  import satin_pkg::*;
#(
  parameter int unsigned NCTX        = 2,
  parameter logic [NADDR_W-1:0] SELF = '0,
  parameter int unsigned RX_DEPTH    = 4,
  parameter int unsigned TX_DEPTH    = 8,
  parameter int unsigned MSG_DEPTH   = 16,
  parameter int unsigned SORT_DEPTH  = 64,
  parameter int unsigned OUT_CREDITS = 4,
  parameter int unsigned IDLE_LAT    = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  // host side
  input  logic            host_tx_valid,
  input  flit_t           host_tx_msg,
  output logic            host_tx_ready,
  output logic            impl_valid,
  output flit_t           impl_msg,
  input  logic            impl_pop,
  output logic            msg_valid,
  output flit_t           msg_msg,
  input  logic            msg_pop,
  output logic [NCTX-1:0] quiet,
  // network side (local port of the router)
  input  logic            in_valid,
  input  netflit_t        in_flit,
  output logic            in_credit,
  output logic            out_valid,
  output netflit_t        out_flit,
  input  logic            out_credit,
  // idle tree
  output logic [NCTX-1:0] local_idle,
  input  logic [NCTX-1:0] net_idle
);

  // ------------------------------------------------------------ transmit
  logic     tx_empty, tx_full, tx_pop;
  netflit_t tx_head, tx_din;
  logic [$clog2(TX_DEPTH+1)-1:0] tx_cnt;
  logic [$clog2(OUT_CREDITS+1)-1:0] credits;

  always_comb begin
    tx_din     = '0;
    tx_din.src = SELF;
    tx_din.msg = host_tx_msg;
  end
  assign host_tx_ready = !tx_full;

  msg_fifo #(.WIDTH($bits(netflit_t)), .DEPTH(TX_DEPTH)) u_tx (
    .clk, .rst_n, .push(host_tx_valid && !tx_full), .din(tx_din), .pop(tx_pop),
    .dout(tx_head), .empty(tx_empty), .full(tx_full), .count(tx_cnt)
  );

  assign tx_pop    = !tx_empty && (credits != 0);
  assign out_valid = tx_pop;
  assign out_flit  = tx_head;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) credits <= ($clog2(OUT_CREDITS+1))'(OUT_CREDITS);
    else        credits <= credits - $bits(credits)'(tx_pop) + $bits(credits)'(out_credit);
  end

  // ------------------------------------------------------------ receive
  logic     rx_empty, rx_full, rx_pop;
  netflit_t rx_head;
  logic [$clog2(RX_DEPTH+1)-1:0] rx_cnt;

  msg_fifo #(.WIDTH($bits(netflit_t)), .DEPTH(RX_DEPTH)) u_rx (
    .clk, .rst_n, .push(in_valid), .din(in_flit), .pop(rx_pop),
    .dout(rx_head), .empty(rx_empty), .full(rx_full), .count(rx_cnt)
  );
  assign in_credit = rx_pop;

  logic is_prop, sort_full, msgq_full;
  assign is_prop = (rx_head.msg.mtype == MSG_PROPLIT);
  assign rx_pop  = !rx_empty && (is_prop ? !sort_full : !msgq_full);

  logic [$clog2(SORT_DEPTH+1)-1:0] sort_cnt;
  impl_sorter #(.DEPTH(SORT_DEPTH)) u_sorter (
    .clk, .rst_n,
    .push(rx_pop && is_prop), .din(rx_head.msg),
    .pop(impl_pop), .out_valid(impl_valid), .out(impl_msg),
    .full(sort_full), .count(sort_cnt)
  );

  logic msgq_empty;
  logic [$clog2(MSG_DEPTH+1)-1:0] msgq_cnt;
  msg_fifo #(.WIDTH($bits(flit_t)), .DEPTH(MSG_DEPTH)) u_msgq (
    .clk, .rst_n, .push(rx_pop && !is_prop), .din(rx_head.msg), .pop(msg_pop && !msgq_empty),
    .dout(msg_msg), .empty(msgq_empty), .full(msgq_full), .count(msgq_cnt)
  );
  assign msg_valid = !msgq_empty;

  // ------------------------------------------------------------ quiet detection
  logic here_busy;
  assign here_busy  = !tx_empty || !rx_empty || host_tx_valid || in_valid;
  assign local_idle = {NCTX{!here_busy}};

  localparam int unsigned QW = $clog2(IDLE_LAT + 2) + 1;
  logic [QW-1:0] qcnt [NCTX];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCTX; c++) qcnt[c] <= '0;
    end else begin
      for (int c = 0; c < NCTX; c++) begin
        if (here_busy || !net_idle[c])           qcnt[c] <= '0;
        else if (32'(qcnt[c]) <= IDLE_LAT)       qcnt[c] <= qcnt[c] + 1'b1;
      end
    end
  end

  always_comb
    for (int c = 0; c < NCTX; c++) quiet[c] = (32'(qcnt[c]) > IDLE_LAT);

endmodule
