// satin_top: the SAT accelerator.
//
// A central unit and MX*MY-1 clause banks sit on an MX x MY mesh. The central
// unit takes the node in the middle of the mesh (CU_X, CU_Y); every other
// node holds a clause bank of NCLAUSE clause units, so the chip holds
// (MX*MY-1)*NCLAUSE clauses of eight literals. The local idle signals of all
// banks, routers and the central unit meet in an AND tree whose output tells
// the central unit when a context has gone quiet.
//
// The processor that runs the solver's heuristics is not part of this
// design; its connection is the host_* / impl_* / msg_* / quiet ports of the
// central unit, brought out here. A typical step: the host sends a PropLit
// decision (broadcast), waits for quiet, pops the implications in level
// order from impl_*, and reads Conflict / Reason / Strengthen messages from
// msg_*.
//
// Follows the architecture: central unit, interconnection network (mesh,
// central unit in the middle), clause banks of 1024 clauses, two contexts,
// global idle by AND tree. The 10 x 10 default mesh is this design's reading
// of the stated 100k-clause chip.
//
// Size: the architecture's banks hold 1024 clauses (about 101k clauses on the
// 10 x 10 mesh). At that size the design cannot be elaborated by the lint and
// elaboration tools on a workstation: their memory grows by about 1.25 MB per
// clause unit (measured 0.77 GB for 8 banks of 64, 2.6 GB for 8 banks of 256,
// 1.5 GB for 99 banks of 8, 9.0 GB for 99 banks of 64, 10.3 GB for 99 banks
// of 80), i.e. about 130 GB for the full chip. The top therefore defaults to
// NCLAUSE = 128 clauses per bank on the full 10 x 10 mesh (about 16 GB, which
// leaves room for a synthesis run of the same design beside it in a 32 GB
// machine); clause_bank itself keeps its 1024 default, and NCLAUSE = 1024
// gives the architecture's chip unchanged.
module satin_top
  import satin_pkg::*;
#(
  parameter int unsigned MX        = 10,
  parameter int unsigned MY        = 10,
  parameter int unsigned NCLAUSE   = 128,    // 1024 in the architecture, see above
  parameter int unsigned NCTX      = 2,
  parameter int unsigned BUF_DEPTH = 4
) (
  input  logic            clk,
  input  logic            rst_n,
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
  output logic [NCTX-1:0] bank_stopped_any
);

  localparam int unsigned NN    = MX * MY;
  localparam int unsigned CU_X  = MX / 2;
  localparam int unsigned CU_Y  = MY / 2;
  localparam int unsigned CU_ID = CU_Y * MX + CU_X;
  localparam int unsigned NIDLE = 2 * NN;            // a node and a router per id
  localparam int unsigned FANIN = 4;
  localparam int unsigned IDLE_LAT = tree_levels(NIDLE, FANIN);

  logic     loc_in_valid   [NN];
  netflit_t loc_in_flit    [NN];
  logic     loc_in_credit  [NN];
  logic     loc_out_valid  [NN];
  netflit_t loc_out_flit   [NN];
  logic     loc_out_credit [NN];
  logic     router_idle    [NN];

  mesh_network #(
    .MX(MX), .MY(MY), .CU_X(CU_X), .CU_Y(CU_Y),
    .BUF_DEPTH(BUF_DEPTH), .LOCAL_CREDITS(BUF_DEPTH)
  ) u_net (
    .clk, .rst_n,
    .loc_in_valid, .loc_in_flit, .loc_in_credit,
    .loc_out_valid, .loc_out_flit, .loc_out_credit,
    .router_idle
  );

  logic [NCTX-1:0] node_idle [NN];
  logic [NCTX-1:0] node_stop [NN];
  logic [NCTX-1:0] all_idle  [NIDLE];
  logic [NCTX-1:0] net_idle;

  for (genvar n = 0; n < NN; n++) begin : g_node
    if (n == CU_ID) begin : g_cu
      central_unit #(
        .NCTX(NCTX), .SELF(NADDR_W'(n)), .RX_DEPTH(BUF_DEPTH),
        .OUT_CREDITS(BUF_DEPTH), .IDLE_LAT(IDLE_LAT)
      ) u_cu (
        .clk, .rst_n,
        .host_tx_valid, .host_tx_msg, .host_tx_ready,
        .impl_valid, .impl_msg, .impl_pop,
        .msg_valid, .msg_msg, .msg_pop,
        .quiet,
        .in_valid  (loc_out_valid[n]),
        .in_flit   (loc_out_flit[n]),
        .in_credit (loc_out_credit[n]),
        .out_valid (loc_in_valid[n]),
        .out_flit  (loc_in_flit[n]),
        .out_credit(loc_in_credit[n]),
        .local_idle(node_idle[n]),
        .net_idle  (net_idle)
      );
      assign node_stop[n] = '0;
    end else begin : g_bank
      clause_bank #(
        .NCLAUSE(NCLAUSE), .NCTX(NCTX), .RX_DEPTH(BUF_DEPTH),
        .OUT_CREDITS(BUF_DEPTH)
      ) u_bank (
        .clk, .rst_n,
        .my_addr   (NADDR_W'(n)),
        .in_valid  (loc_out_valid[n]),
        .in_flit   (loc_out_flit[n]),
        .in_credit (loc_out_credit[n]),
        .out_valid (loc_in_valid[n]),
        .out_flit  (loc_in_flit[n]),
        .out_credit(loc_in_credit[n]),
        .idle      (node_idle[n]),
        .stopped_o (node_stop[n])
      );
    end
    assign all_idle[2*n]   = node_idle[n];
    assign all_idle[2*n+1] = {NCTX{router_idle[n]}};
  end

  idle_tree #(.NIN(NIDLE), .NCTX(NCTX), .FANIN(FANIN)) u_idle (
    .clk, .rst_n, .local_idle(all_idle), .idle(net_idle)
  );

  always_comb begin
    bank_stopped_any = '0;
    for (int n = 0; n < NN; n++) bank_stopped_any |= node_stop[n];
  end

endmodule
