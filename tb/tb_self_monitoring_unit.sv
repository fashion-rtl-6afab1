// tb_self_monitoring_unit: runs the distributed DFS on a grid of
// self_monitoring_unit instances wired to each other directly.
//
// Case 0 is the 12-node example of the paper's classification figure
// (A..L on a 4x3 grid, node G dead, links J-K and L-H dead, root A); the
// depth and low values printed in that figure are checked literally, as
// are its cut vertices B, C, D and bridges B-C, C-D, D-H, and the
// unreached nodes K and L. Further cases use random dead links on a 4x4
// grid and compare every node's depth, low, parent, child, cut and bridge
// bits with a sequential recursive DFS written here (same W, S, E, N
// neighbour order), and cut / bridge also with brute-force connectivity.
module tb_self_monitoring_unit;
  import fashion_pkg::*;
  localparam int R = 4, C = 4, N = R * C;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic dfs_start;
  logic [N-1:0] is_root, enable;
  logic [NUM_DIRS-1:0] nv [N];
  sam_link_t nin [N][NUM_DIRS];
  sam_msg_e  mk [N][NUM_DIRS];
  logic [CNT_W-1:0] mv [N][NUM_DIRS], mc [N][NUM_DIRS];
  logic visited [N];
  logic [CNT_W-1:0] depth [N], low [N], counter [N];
  logic [NUM_DIRS-1:0] parent [N], child [N], bridge [N];
  logic cut [N], root [N], finished [N], root_done [N];

  bit alive [N][4];
  int rows_used, cols_used;

  function automatic int nbr(input int n, input int d);
    int x, y;
    x = n % C; y = n / C;
    if (x >= cols_used || y >= rows_used) return -1;
    case (d)
      0: return (y + 1 < rows_used) ? n + C : -1;
      1: return (y > 0) ? n - C : -1;
      2: return (x > 0) ? n - 1 : -1;
      default: return (x + 1 < cols_used) ? n + 1 : -1;
    endcase
  endfunction
  function automatic int opp(input int d);
    return (d == 0) ? 1 : (d == 1) ? 0 : (d == 2) ? 3 : 2;
  endfunction

  for (genvar n = 0; n < N; n++) begin : g_n
    always_comb begin
      for (int d = 0; d < 4; d++) begin
        int m;
        m = nbr(n, d);
        nv[n][d] = (m >= 0) && alive[n][d];
        if (m >= 0 && alive[n][d]) begin
          nin[n][d].in_service = 1'b1;
          nin[n][d].present = 1'b1;
          nin[n][d].visited = visited[m];
          nin[n][d].depth   = depth[m];
          nin[n][d].kind    = mk[m][opp(d)];
          nin[n][d].val     = mv[m][opp(d)];
          nin[n][d].cnt     = mc[m][opp(d)];
        end else nin[n][d] = '0;
      end
    end
    self_monitoring_unit #(.NODES(N)) u_smu (
      .clk, .rst_n, .dfs_start, .is_root(is_root[n]), .enable(enable[n]),
      .nbr_valid(nv[n]), .nbr_in(nin[n]),
      .msg_kind(mk[n]), .msg_val(mv[n]), .msg_cnt(mc[n]),
      .visited(visited[n]), .depth(depth[n]), .low(low[n]), .counter(counter[n]),
      .parent(parent[n]), .child(child[n]), .bridge(bridge[n]), .cut(cut[n]),
      .root(root[n]), .finished(finished[n]), .root_done(root_done[n])
    );
  end

  // ---------------- reference sequential DFS ----------------
  int r_depth [N], r_low [N], r_par [N], r_nch [N];
  bit r_vis [N], r_cut [N], r_child [N][4], r_bridge [N][4];
  int r_count;
  localparam int ORD [4] = '{2, 1, 3, 0};

  function automatic void rdfs(input int u, input int d0);
    r_vis[u] = 1; r_depth[u] = d0; r_low[u] = d0; r_count++;
    for (int k = 0; k < 4; k++) begin
      int p, m;
      p = ORD[k];
      m = nbr(u, p);
      if (m < 0 || !alive[u][p] || !enable[m]) continue;
      if (!r_vis[m]) begin
        r_par[m] = opp(p); r_child[u][p] = 1; r_nch[u]++;
        rdfs(m, d0 + 1);
        if (r_low[m] < r_low[u]) r_low[u] = r_low[m];
        if (r_depth[u] <= r_low[m]) r_cut[u] = 1;
        if (r_depth[u] <  r_low[m]) r_bridge[u][p] = 1;
      end else if (p != r_par[u]) begin
        if (r_depth[m] < r_low[u]) r_low[u] = r_depth[m];
      end
    end
  endfunction

  function automatic int reach_cnt(input int s, input int skip_n, input int en, input int ed);
    bit seen [N];
    int q [$];
    int c;
    for (int i = 0; i < N; i++) seen[i] = 0;
    seen[s] = 1; q.push_back(s); c = 1;
    while (q.size() > 0) begin
      int u;
      u = q.pop_front();
      for (int d = 0; d < 4; d++) begin
        int m;
        m = nbr(u, d);
        if (m < 0 || !alive[u][d] || !enable[m] || m == skip_n || seen[m]) continue;
        if ((u == en && d == ed) || (m == en && opp(d) == ed)) continue;
        seen[m] = 1; q.push_back(m); c++;
      end
    end
    return c;
  endfunction

  task automatic run(input int rt, output int cyc);
    @(negedge clk);
    is_root = '0; is_root[rt] = 1;
    dfs_start = 1;
    @(negedge clk);
    dfs_start = 0;
    cyc = 0;
    while (!root_done[rt] && cyc < 5000) begin @(negedge clk); cyc++; end
    check(cyc < 5000, "dfs did not finish");
  endtask

  task automatic compare_ref(input int rt);
    int tot;
    for (int i = 0; i < N; i++) begin
      r_vis[i] = 0; r_cut[i] = 0; r_par[i] = -1; r_nch[i] = 0;
      for (int d = 0; d < 4; d++) begin r_child[i][d] = 0; r_bridge[i][d] = 0; end
    end
    r_count = 0;
    rdfs(rt, 0);
    r_cut[rt] = (r_nch[rt] >= 2);
    tot = r_count;
    check(int'(counter[rt]) == tot, $sformatf("counter %0d exp %0d", counter[rt], tot));
    for (int n = 0; n < N; n++) begin
      check(visited[n] == r_vis[n], $sformatf("visited %0d", n));
      if (!r_vis[n]) begin
        check(cut[n] == 1'b1, "unvisited node keeps cut=1 (initial value)");
        continue;
      end
      check(int'(depth[n]) == r_depth[n], $sformatf("depth %0d: %0d exp %0d", n, depth[n], r_depth[n]));
      check(int'(low[n]) == r_low[n], $sformatf("low %0d: %0d exp %0d", n, low[n], r_low[n]));
      for (int d = 0; d < 4; d++) begin
        check(parent[n][d] == (r_par[n] == d), $sformatf("parent %0d/%0d", n, d));
        check(child[n][d] == r_child[n][d], $sformatf("child %0d/%0d", n, d));
        check(bridge[n][d] == r_bridge[n][d], $sformatf("bridge %0d/%0d", n, d));
      end
      check(cut[n] == r_cut[n], $sformatf("cut %0d", n));
      // brute force: removing n (non-root) must split the subgraph iff cut
      if (n != rt) check(cut[n] == (reach_cnt(rt, n, -1, -1) != tot - 1), $sformatf("bf cut %0d", n));
      for (int d = 0; d < 4; d++)
        if (child[n][d]) check(bridge[n][d] == (reach_cnt(rt, -1, n, d) != tot), $sformatf("bf bridge %0d/%0d", n, d));
    end
  endtask

  // figure node letters on a 4x3 grid: A B C D / E F G H / I J K L
  function automatic int L(input byte ch);
    return int'(ch) - int'("A");
  endfunction
  task automatic set_edge(input int a, input int d, input bit v);
    alive[a][d] = v;
    if (nbr(a, d) >= 0) alive[nbr(a, d)][opp(d)] = v;
  endtask

  initial begin
    int cyc;
    dfs_start = 0; is_root = '0; enable = '1;
    for (int n = 0; n < N; n++) for (int d = 0; d < 4; d++) alive[n][d] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- case 0: the paper's example (4 columns used, 3 rows) ----
    rows_used = 3; cols_used = 4;
    // letters map to ids: A..D = 0..3, E..H = 4..7, I..L = 8..11 (C = 4)
    for (int n = 0; n < 12; n++) for (int d = 0; d < 4; d++) if (nbr(n, d) >= 0) alive[n][d] = 1;
    enable[L("G")] = 0;
    for (int d = 0; d < 4; d++) set_edge(L("G"), d, 0);
    set_edge(L("J"), 3, 0);   // J-K
    set_edge(L("L"), 1, 0);   // L-H
    run(L("A"), cyc);
    $display("paper example: DFS finished in %0d cycles", cyc);
    begin
      // (node, depth, low) as printed in the final panel of the figure
      byte nm [9] = '{"A", "B", "C", "D", "H", "F", "E", "I", "J"};
      int  ed [9] = '{0, 1, 2, 3, 4, 2, 3, 4, 5};
      int  el [9] = '{0, 0, 2, 3, 4, 0, 0, 2, 2};
      for (int k = 0; k < 9; k++) begin
        check(int'(depth[L(nm[k])]) == ed[k], $sformatf("fig depth %c", nm[k]));
        check(int'(low[L(nm[k])]) == el[k], $sformatf("fig low %c = %0d exp %0d", nm[k], low[L(nm[k])], el[k]));
      end
      check(int'(counter[L("A")]) == 9, "fig: 9 vertices in the tree");
      check(cut[L("B")] && cut[L("C")] && cut[L("D")], "fig: B, C, D cut vertices");
      check(!cut[L("A")] && !cut[L("E")] && !cut[L("F")] && !cut[L("H")] && !cut[L("I")] && !cut[L("J")],
            "fig: other nodes not cut");
      check(bridge[L("B")][3] && bridge[L("C")][3] && bridge[L("D")][0], "fig: bridges B-C, C-D, D-H");
      check(!visited[L("K")] && !visited[L("L")], "fig: K and L unreached");
    end
    compare_ref(L("A"));
    // ---- random cases on the full 4x4 grid ----
    rows_used = R; cols_used = C;
    for (int t = 0; t < 12; t++) begin
      int rt;
      enable = '1;
      for (int n = 0; n < N; n++) for (int d = 0; d < 4; d++) alive[n][d] = (nbr(n, d) >= 0);
      for (int k = 0; k < 3 + t % 6; k++) set_edge($urandom_range(N-1, 0), $urandom_range(3, 0), 0);
      rt = $urandom_range(N-1, 0);
      @(negedge clk);
      run(rt, cyc);
      compare_ref(rt);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
