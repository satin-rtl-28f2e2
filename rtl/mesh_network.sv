// mesh_network: MX x MY mesh of routers joining the clause banks and the
// central unit.
//
// Node id = y * MX + x. Neighbouring routers are joined by a flit channel in
// each direction, with a credit wire running back beside it; adjacent routers
// are one cycle apart (the output register of the sender). Each node's local
// port is brought out as loc_* arrays indexed by node id: loc_in_* is what
// the node injects, loc_out_* what the network delivers to it. Credits: the
// node returns loc_out_credit when it frees an entry of its receive buffer
// (the router starts with LOCAL_CREDITS) and receives loc_in_credit when the
// router's local input buffer frees one. router_idle is each router's idle.
//
// Follows the architecture: a 2-D mesh with the central unit at the centre
// (the router parameters CU_X, CU_Y). The default 10 x 10 size is this
// design's reading of 100k clauses in 1024-clause banks (see the README);
// the text also quotes a 16 x 16 network for its wire-power estimate.
module mesh_network
  import satin_pkg::*;
#(
  parameter int unsigned MX            = 10,
  parameter int unsigned MY            = 10,
  parameter int unsigned CU_X          = MX / 2,
  parameter int unsigned CU_Y          = MY / 2,
  parameter int unsigned BUF_DEPTH     = 4,
  parameter int unsigned LOCAL_CREDITS = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     loc_in_valid   [MX*MY],
  input  netflit_t loc_in_flit    [MX*MY],
  output logic     loc_in_credit  [MX*MY],
  output logic     loc_out_valid  [MX*MY],
  output netflit_t loc_out_flit   [MX*MY],
  input  logic     loc_out_credit [MX*MY],
  output logic     router_idle    [MX*MY]
);

  localparam int unsigned NN = MX * MY;
  localparam int unsigned P_L = 0, P_N = 1, P_E = 2, P_S = 3, P_W = 4;

  logic     r_in_valid   [NN][5];
  netflit_t r_in_flit    [NN][5];
  logic     r_in_credit  [NN][5];
  logic     r_out_valid  [NN][5];
  netflit_t r_out_flit   [NN][5];
  logic     r_out_credit [NN][5];

  for (genvar y = 0; y < MY; y++) begin : g_y
    for (genvar x = 0; x < MX; x++) begin : g_x
      localparam int unsigned ID = y * MX + x;

      router #(
        .MX(MX), .MY(MY), .CU_X(CU_X), .CU_Y(CU_Y),
        .BUF_DEPTH(BUF_DEPTH), .LOCAL_CREDITS(LOCAL_CREDITS)
      ) u_router (
        .clk, .rst_n,
        .my_x      (NADDR_W'(x)),
        .my_y      (NADDR_W'(y)),
        .in_valid  (r_in_valid[ID]),
        .in_flit   (r_in_flit[ID]),
        .in_credit (r_in_credit[ID]),
        .out_valid (r_out_valid[ID]),
        .out_flit  (r_out_flit[ID]),
        .out_credit(r_out_credit[ID]),
        .idle      (router_idle[ID])
      );

      // local port
      assign r_in_valid[ID][P_L]   = loc_in_valid[ID];
      assign r_in_flit[ID][P_L]    = loc_in_flit[ID];
      assign loc_in_credit[ID]     = r_in_credit[ID][P_L];
      assign loc_out_valid[ID]     = r_out_valid[ID][P_L];
      assign loc_out_flit[ID]      = r_out_flit[ID][P_L];
      assign r_out_credit[ID][P_L] = loc_out_credit[ID];

      // west input comes from the east output of the router to the west
      if (x > 0) begin : g_w
        assign r_in_valid[ID][P_W]   = r_out_valid[ID-1][P_E];
        assign r_in_flit[ID][P_W]    = r_out_flit[ID-1][P_E];
        assign r_out_credit[ID][P_W] = r_in_credit[ID-1][P_E];
      end else begin : g_w_edge
        assign r_in_valid[ID][P_W]   = 1'b0;
        assign r_in_flit[ID][P_W]    = '0;
        assign r_out_credit[ID][P_W] = 1'b0;
      end
      if (x + 1 < MX) begin : g_e
        assign r_in_valid[ID][P_E]   = r_out_valid[ID+1][P_W];
        assign r_in_flit[ID][P_E]    = r_out_flit[ID+1][P_W];
        assign r_out_credit[ID][P_E] = r_in_credit[ID+1][P_W];
      end else begin : g_e_edge
        assign r_in_valid[ID][P_E]   = 1'b0;
        assign r_in_flit[ID][P_E]    = '0;
        assign r_out_credit[ID][P_E] = 1'b0;
      end
      if (y > 0) begin : g_n
        assign r_in_valid[ID][P_N]   = r_out_valid[ID-MX][P_S];
        assign r_in_flit[ID][P_N]    = r_out_flit[ID-MX][P_S];
        assign r_out_credit[ID][P_N] = r_in_credit[ID-MX][P_S];
      end else begin : g_n_edge
        assign r_in_valid[ID][P_N]   = 1'b0;
        assign r_in_flit[ID][P_N]    = '0;
        assign r_out_credit[ID][P_N] = 1'b0;
      end
      if (y + 1 < MY) begin : g_s
        assign r_in_valid[ID][P_S]   = r_out_valid[ID+MX][P_N];
        assign r_in_flit[ID][P_S]    = r_out_flit[ID+MX][P_N];
        assign r_out_credit[ID][P_S] = r_in_credit[ID+MX][P_N];
      end else begin : g_s_edge
        assign r_in_valid[ID][P_S]   = 1'b0;
        assign r_in_flit[ID][P_S]    = '0;
        assign r_out_credit[ID][P_S] = 1'b0;
      end
    end
  end

endmodule
