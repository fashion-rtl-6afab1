// tb_sam: three Self-Awareness Modules in a row (0 - 1 - 2) with their
// link-test wires and sideband connected, driven through the manager
// sequence by the testbench. Case A: all links good. Node 1 must be a cut
// vertex, both links bridges (marked at the parent end), depths 0/1/2, root counter 3; a prune step
// removes the leaf node 2 and leaves nodes 0 and 1. Case B: the 1-2 link is
// broken. Its link test must fail on both sides, node 2 must go out of
// service and node 1 is then no cut vertex.
module tb_sam;
  import fashion_pkg::*;
  localparam int TC = 32, NN = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  logic bist_start = 0, reconf_start = 0, dfs_start = 0, round_end = 0, prune = 0, first_round = 0;
  logic broken = 0;
  link_t     t_in [NN][NUM_DIRS], t_out [NN][NUM_DIRS];
  sam_link_t s_in [NN][NUM_DIRS], s_out [NN][NUM_DIRS];
  logic [NUM_DIRS-1:0] link_ok [NN], valid [NN], route_valid [NN], parent [NN], child [NN];
  logic [NUM_DIRS-1:0] bridge [NN], bridge_class [NN];
  logic cut [NN], cut_class [NN], visited [NN], removed [NN], oos [NN], root_done [NN], running [NN];
  logic [CNT_W-1:0] depth [NN], low [NN], counter [NN];
  turn_tbl_t permit [NN];

  for (genvar n = 0; n < NN; n++) begin : g_n
    for (genvar d = 0; d < NUM_DIRS; d++) begin : g_d
      if (d == P_W && n > 0) begin : g_w
        assign t_in[n][d] = (broken && n == 2) ? '0 : t_out[n-1][P_E];
        assign s_in[n][d] = (broken && n == 2) ? '0 : s_out[n-1][P_E];
      end else if (d == P_E && n < NN - 1) begin : g_e
        assign t_in[n][d] = (broken && n == 1) ? '0 : t_out[n+1][P_W];
        assign s_in[n][d] = (broken && n == 1) ? '0 : s_out[n+1][P_W];
      end else begin : g_none
        assign t_in[n][d] = '0;
        assign s_in[n][d] = '0;
      end
    end
    sam #(.NODES(8), .TEST_CYCLES(TC), .SEED(32'hACE0_0000 + n)) u_sam (
      .clk, .rst_n, .is_root(n == 0), .bist_start, .reconf_start, .dfs_start, .round_end, .prune,
      .first_round, .test_in(t_in[n]), .test_out(t_out[n]), .bist_running(running[n]),
      .sam_in(s_in[n]), .sam_out(s_out[n]), .link_ok(link_ok[n]), .valid(valid[n]),
      .route_valid(route_valid[n]), .parent(parent[n]), .child(child[n]), .bridge(bridge[n]),
      .cut(cut[n]), .bridge_class(bridge_class[n]), .cut_class(cut_class[n]), .visited(visited[n]),
      .depth(depth[n]), .low(low[n]), .counter(counter[n]), .removed(removed[n]),
      .out_of_service(oos[n]), .permit(permit[n]), .root_done(root_done[n])
    );
  end

  task automatic pulse(ref logic s);
    s = 1; @(negedge clk); s = 0;
  endtask

  // the manager's first round: BIST, reset, settle, DFS, round end
  task automatic first_dfs_round();
    int t;
    pulse(bist_start);
    repeat (TC + 8) @(negedge clk);
    first_round = 1;
    pulse(reconf_start);
    repeat (3) @(negedge clk);
    pulse(dfs_start);
    t = 0;
    while (!root_done[0] && t < 500) begin @(negedge clk); t++; end
    check(t < 500, "DFS finishes");
    @(negedge clk);
    pulse(round_end);
    @(negedge clk);
  endtask

  initial begin
    // ---- case A: all links good ----
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    first_dfs_round();
    check(link_ok[0] == 4'b1000 && link_ok[1] == 4'b1100 && link_ok[2] == 4'b0100, "A: link tests pass");
    check(depth[0] == 0 && depth[1] == 1 && depth[2] == 2, "A: depths");
    check(counter[0] == 3, "A: root counter");
    check(!cut[0] && cut[1] && !cut[2], "A: node 1 is the cut vertex");
    check(cut_class[1] && !cut_class[0] && !cut_class[2], "A: cut class latched");
    check(bridge_class[0] == 4'b1000 && bridge_class[1] == 4'b1000 && bridge_class[2] == 4'b0000, "A: bridges marked on the parent side");
    check(child[0] == 4'b1000 && parent[1] == 4'b0100 && child[1] == 4'b1000 && parent[2] == 4'b0100, "A: tree");
    check(!oos[0] && !oos[1] && !oos[2], "A: all in service");
    check(route_valid[1] == 4'b1100, "A: routing sees both links");
    first_round = 0;
    pulse(prune);
    @(negedge clk);
    check(removed[2] && !removed[1] && !removed[0], "A: leaf removed");
    @(negedge clk);
    @(negedge clk);
    check(valid[1] == 4'b0100 && route_valid[1] == 4'b1100, "A: pruned neighbour leaves valid but not routing");
    // ---- case B: link 1-2 broken ----
    rst_n = 0; broken = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    first_dfs_round();
    check(link_ok[1] == 4'b0100 && link_ok[2] == 4'b0000, "B: broken link fails its test");
    check(oos[2] && !oos[1] && !oos[0], "B: node 2 out of service");
    check(!cut[1], "B: node 1 no cut vertex");
    check(counter[0] == 2, "B: root counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
