// tb_mesh_network: end-to-end delivery on a 4 x 3 mesh.
//
// Every node injects broadcasts (some with to_src) and unicasts to random
// nodes, plus messages to the central unit at (2,1), all at once so that
// routers contend. Each local port sinks and returns credits at once. The
// test counts, per message and node, how many copies arrived and compares
// with the rule: a broadcast reaches every node exactly once (its source
// only with to_src), a unicast reaches only its target, a to-central message
// only the central node. It also checks the network goes idle afterwards.
module tb_mesh_network;
  import satin_pkg::*;
  localparam int MX = 4, MY = 3, NN = MX * MY, CU = 1 * MX + 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     loc_in_valid   [NN];
  netflit_t loc_in_flit    [NN];
  logic     loc_in_credit  [NN];
  logic     loc_out_valid  [NN];
  netflit_t loc_out_flit   [NN];
  logic     loc_out_credit [NN];
  logic     router_idle    [NN];

  mesh_network #(.MX(MX), .MY(MY), .CU_X(2), .CU_Y(1), .BUF_DEPTH(4), .LOCAL_CREDITS(4)) dut (.*);

  int checks = 0, failures = 0;
  int copies [int][NN];
  int expect_nodes [int][$];
  netflit_t q [NN][$];
  int credit [NN];

  always @(posedge clk)
    for (int n = 0; n < NN; n++) begin
      loc_out_credit[n] <= loc_out_valid[n];
      if (loc_out_valid[n]) begin
        int tag;
        tag = int'(loc_out_flit[n].msg.v);
        if (!copies.exists(tag)) for (int m = 0; m < NN; m++) copies[tag][m] = 0;
        copies[tag][n]++;
      end
    end

  always @(negedge clk) if (rst_n)
    for (int n = 0; n < NN; n++) begin
      if (loc_in_credit[n]) credit[n]++;
      loc_in_valid[n] = 0;
      if (q[n].size() > 0 && credit[n] > 0) begin
        loc_in_valid[n] = 1;
        loc_in_flit[n] = q[n].pop_front();
        credit[n]--;
      end
    end

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tag;
    tag = 1;
    for (int n = 0; n < NN; n++) begin
      loc_in_valid[n] = 0; loc_in_flit[n] = '0; loc_out_credit[n] = 0; credit[n] = 4;
    end
    // build traffic
    for (int n = 0; n < NN; n++) begin
      for (int r = 0; r < 6; r++) begin
        netflit_t f;
        int kind, dst;
        f = '0;
        f.src = NADDR_W'(n);
        f.msg.v = VAR_W'(tag);
        kind = $urandom_range(0, 3);
        dst = $urandom_range(0, NN - 1);
        unique case (kind)
          0: begin f.msg.route = '{to_src: 0, bcast: 1, to_cu: 0};
                   for (int m = 0; m < NN; m++) if (m != n) expect_nodes[tag].push_back(m); end
          1: begin f.msg.route = '{to_src: 1, bcast: 1, to_cu: 1};
                   for (int m = 0; m < NN; m++) expect_nodes[tag].push_back(m); end
          2: begin f.msg.route = '{to_src: 0, bcast: 0, to_cu: 1}; expect_nodes[tag].push_back(CU); end
          default: begin f.msg.route = '{to_src: 0, bcast: 0, to_cu: 0};
                   f.msg.n = NADDR_W'(dst); expect_nodes[tag].push_back(dst); end
        endcase
        q[n].push_back(f);
        tag++;
      end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (600) @(negedge clk);
    for (int t = 1; t < tag; t++) begin
      for (int m = 0; m < NN; m++) begin
        int want, have;
        want = 0;
        foreach (expect_nodes[t][k]) if (expect_nodes[t][k] == m) want = 1;
        have = copies.exists(t) ? copies[t][m] : 0;
        checks++;
        if (have != want) begin
          failures++;
          $display("FAIL: message %0d at node %0d: %0d copies, expected %0d", t, m, have, want);
        end
      end
    end
    begin
      bit all_idle;
      all_idle = 1;
      for (int n = 0; n < NN; n++) all_idle &= router_idle[n];
      checks++;
      if (!all_idle) begin failures++; $display("FAIL: network not idle"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
