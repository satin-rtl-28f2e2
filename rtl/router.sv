// router: single-cycle five-port mesh router with broadcast.
//
// Ports are numbered P_L (local: a clause bank or the central unit), P_N, P_E,
// P_S, P_W; north is towards y-1, east towards x+1. Every input has a buffer
// of BUF_DEPTH single-flit messages, and every output keeps a credit count of
// the free entries in the buffer it feeds; a credit pulse comes back each time
// that buffer releases an entry. All messages are one flit, so there are no
// virtual channels.
//
// Routing is dimension order. A broadcast travels along its row first and
// then along every column: a flit injected locally goes E, W, N and S; one
// arriving from the west goes E, N, S and to the local port, from the east
// W, N, S and local, from the north S and local, from the south N and local.
// The source's own local port gets a broadcast only when the route bit
// `to_src` is set. A non-broadcast flit goes X then Y to one node: the
// central unit (CU_X, CU_Y) if `to_cu`, else its source node if `to_src`,
// else network address N (node id = y * MX + x).
//
// In one cycle the router computes the outputs wanted by each input's head
// flit, arbitrates every output round robin among inputs that want it while
// the output has a credit, and writes the winners into the output registers;
// the flit is on the output channel the next cycle. A head flit wanting
// several outputs may win them in different cycles; the router remembers
// which it has served and releases the flit (and returns its credit) when all
// are served. `idle` is high when every input buffer and output register is
// empty.
//
// Follows the architecture: one-flit messages, no virtual channels,
// credit-based flow control with input buffers, dimension-order broadcast
// (row, then columns), route bits back-to-source / broadcast / central unit,
// route + switch traversal + arbitration in one cycle. This design's own:
// buffer depth, round-robin arbitration, partial multicast service, and the
// router's position given as strap inputs (my_x, my_y) so that every router
// is the same module.
module router
  import satin_pkg::*;
#(
  parameter int unsigned MX        = 10,
  parameter int unsigned MY        = 10,
  parameter int unsigned CU_X      = 5,
  parameter int unsigned CU_Y      = 5,
  parameter int unsigned BUF_DEPTH = 4,
  parameter int unsigned LOCAL_CREDITS = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  naddr_t   my_x,             // position of this router (strap)
  input  naddr_t   my_y,
  input  logic     in_valid  [5],
  input  netflit_t in_flit   [5],
  output logic     in_credit [5],   // to upstream: an input entry was freed
  output logic     out_valid [5],
  output netflit_t out_flit  [5],
  input  logic     out_credit[5],   // from downstream
  output logic     idle
);

  localparam int unsigned P_L = 0, P_N = 1, P_E = 2, P_S = 3, P_W = 4;
  localparam int unsigned CRW = $clog2((BUF_DEPTH > LOCAL_CREDITS ? BUF_DEPTH : LOCAL_CREDITS) + 1);

  // which neighbours exist
  logic [4:0] exists;
  always_comb begin
    exists      = 5'b00001;
    exists[P_N] = (my_y != 0);
    exists[P_E] = (32'(my_x) + 1 < MX);
    exists[P_S] = (32'(my_y) + 1 < MY);
    exists[P_W] = (my_x != 0);
  end

  // ------------------------------------------------------------ input buffers
  netflit_t   head  [5];
  logic [4:0] empty;
  logic [4:0] pop;

  for (genvar p = 0; p < 5; p++) begin : g_in
    logic full_unused;
    logic [$clog2(BUF_DEPTH+1)-1:0] cnt_unused;
    msg_fifo #(.WIDTH($bits(netflit_t)), .DEPTH(BUF_DEPTH)) u_buf (
      .clk, .rst_n, .push(in_valid[p]), .din(in_flit[p]), .pop(pop[p]),
      .dout(head[p]), .empty(empty[p]), .full(full_unused), .count(cnt_unused)
    );
    assign in_credit[p] = pop[p];
  end

  // ------------------------------------------------------------ route computation
  function automatic logic [4:0] xy_to(input int unsigned dx, input int unsigned dy);
    logic [4:0] m;
    m = '0;
    if (dx > 32'(my_x))      m[P_E] = 1'b1;
    else if (dx < 32'(my_x)) m[P_W] = 1'b1;
    else if (dy > 32'(my_y)) m[P_S] = 1'b1;
    else if (dy < 32'(my_y)) m[P_N] = 1'b1;
    else             m[P_L] = 1'b1;
    return m;
  endfunction

  function automatic logic [4:0] route(input int unsigned ip, input netflit_t f);
    logic [4:0] m;
    int unsigned d;
    m = '0;
    if (f.msg.route.bcast) begin
      unique case (ip)
        P_L: begin
          m = 5'b11110;
          m[P_L] = f.msg.route.to_src;
        end
        P_W: begin m[P_E] = 1'b1; m[P_N] = 1'b1; m[P_S] = 1'b1; m[P_L] = 1'b1; end
        P_E: begin m[P_W] = 1'b1; m[P_N] = 1'b1; m[P_S] = 1'b1; m[P_L] = 1'b1; end
        P_N: begin m[P_S] = 1'b1; m[P_L] = 1'b1; end
        default: begin m[P_N] = 1'b1; m[P_L] = 1'b1; end
      endcase
    end else begin
      if (f.msg.route.to_cu)       m = xy_to(CU_X, CU_Y);
      else begin
        d = f.msg.route.to_src ? int'(f.src) : int'(f.msg.n);
        m = xy_to(d % MX, d / MX);
      end
    end
    return m & exists;
  endfunction

  // ------------------------------------------------------------ arbitration
  logic [4:0] served [5];      // outputs already given the head flit of input p
  logic [4:0] need   [5];      // outputs input p still needs
  logic [4:0] grant  [5];      // grant[o][p]
  logic [2:0] rr     [5];      // round-robin pointer per output
  logic [CRW-1:0] credits [5];

  logic [4:0] got [5];         // got[p][o] = grant[o][p]

  always_comb begin
    for (int p = 0; p < 5; p++)
      need[p] = empty[p] ? 5'b0 : (route(p, head[p]) & ~served[p]);
  end

  always_comb begin
    int unsigned q;
    for (int o = 0; o < 5; o++) begin
      grant[o] = '0;
      for (int k = 4; k >= 0; k--) begin
        q = (int'(rr[o]) + k) % 5;
        if (need[q][o] && (credits[o] != 0)) grant[o] = 5'(1) << q;
      end
    end
  end

  always_comb begin
    for (int p = 0; p < 5; p++) begin
      for (int o = 0; o < 5; o++) got[p][o] = grant[o][p];
      pop[p] = !empty[p] && ((need[p] & ~got[p]) == '0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 5; i++) begin
        served[i]    <= '0;
        rr[i]        <= '0;
        out_valid[i] <= 1'b0;
        out_flit[i]  <= '0;
        credits[i]   <= (i == P_L) ? CRW'(LOCAL_CREDITS) : CRW'(BUF_DEPTH);
      end
    end else begin
      for (int p = 0; p < 5; p++)
        served[p] <= pop[p] ? 5'b0 : (served[p] | got[p]);
      for (int o = 0; o < 5; o++) begin
        out_valid[o] <= (grant[o] != '0);
        for (int p = 0; p < 5; p++)
          if (grant[o][p]) begin
            out_flit[o] <= head[p];
            rr[o]       <= 3'((p + 1) % 5);
          end
        credits[o] <= credits[o] - CRW'(grant[o] != '0) + CRW'(out_credit[o]);
      end
    end
  end

  always_comb begin
    idle = (empty == 5'b11111);
    for (int o = 0; o < 5; o++) idle &= !out_valid[o];
  end

  // an output carries at most one flit per cycle
  for (genvar o = 0; o < 5; o++) begin : g_chk
    a_onehot_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant[o]));
  end

endmodule
