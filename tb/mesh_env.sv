// mesh_env: end-to-end test environment for fashion_mesh.
//
// For each fault scenario it: injects link and node faults; starts the
// diagnosis and recovery sequence; checks the SAM results against a
// reference computed here by brute force (reachability from the root for
// the maximal connected subgraph and out-of-service nodes, "remove it and
// test connectivity" for cut vertices and bridges); checks that the turn
// tables written by the SAMs leave every pair of connected nodes
// reachable by a turn-legal route and leave the channel dependency graph
// acyclic (deadlock freedom); programs every routing table with shortest
// turn-legal routes; and sends 8-flit packets between random connected
// pairs through slow sinks, checking that every flit arrives, in order, at
// the right node, with no route-computation violation.
// FULL=1 instantiates the mesh with no parameter override (8x8 default).
module mesh_env #(
  parameter int R      = 4,
  parameter int C      = 4,
  parameter bit FULL   = 0,
  parameter int NSCEN  = 3,
  parameter int NPKT   = 40,
  parameter int WATCHDOG = 400000
) ();
  import fashion_pkg::*;
  localparam int N = R * C;
  localparam int PKT_LEN = 8;

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  logic os_start;
  logic [NODE_W-1:0] root_id;
  logic busy, done, error;
  logic [CNT_W-1:0] gmax_size;
  logic [7:0] rounds;
  logic [15:0] cycles;
  logic [N-1:0][NUM_DIRS-1:0] link_fault;
  logic [N-1:0] node_fault;
  link_t   inj_link   [N];
  credit_t inj_credit [N];
  link_t   ej_link    [N];
  credit_t ej_credit  [N];
  logic cfg_we;
  logic [NODE_W-1:0] cfg_node, cfg_dest;
  logic [2:0] cfg_inport, cfg_port;
  logic [N-1:0][NUM_DIRS-1:0] valid;
  turn_tbl_t permit [N];
  logic [N-1:0] cut_class, removed, out_of_service;
  logic [N-1:0][NUM_DIRS-1:0] bridge_class;
  logic [15:0] rc_violations [N];

  if (FULL) begin : g_full
    fashion_mesh u_dut (.*);
  end else begin : g_small
    fashion_mesh #(.ROWS(R), .COLS(C)) u_dut (.*);
  end

  int checks = 0, failures = 0;
  // mechanism counters
  int m_link_fault_found = 0, m_cut = 0, m_bridge = 0, m_oos = 0, m_multi_round = 0;
  int m_turn_forbidden = 0, m_backpressure = 0, m_rerun = 0, m_node_removed = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- topology reference ----------------
  function automatic int nbr(input int n, input int d);
    int x, y;
    x = n % C; y = n / C;
    case (d)
      0: return (y + 1 < R) ? n + C : -1;
      1: return (y > 0)     ? n - C : -1;
      2: return (x > 0)     ? n - 1 : -1;
      default: return (x + 1 < C) ? n + 1 : -1;
    endcase
  endfunction
  function automatic int opp(input int d);
    return (d == 0) ? 1 : (d == 1) ? 0 : (d == 2) ? 3 : 2;
  endfunction

  bit alive [N][4];      // edge usable in both directions
  function automatic void build_alive();
    for (int n = 0; n < N; n++)
      for (int d = 0; d < 4; d++) begin
        int m;
        m = nbr(n, d);
        alive[n][d] = (m >= 0) && !link_fault[n][d] && !link_fault[m][opp(d)]
                      && !node_fault[n] && !node_fault[m];
      end
  endfunction

  // reachable set from s, skipping node skip_n and edge (skip_e_n, skip_e_d)
  function automatic void reach(input int s, input int skip_n, input int skip_e_n,
                                input int skip_e_d, output bit seen [N]);
    int q [$];
    for (int i = 0; i < N; i++) seen[i] = 0;
    if (s == skip_n) return;
    seen[s] = 1; q.push_back(s);
    while (q.size() > 0) begin
      int u;
      u = q.pop_front();
      for (int d = 0; d < 4; d++) begin
        int m;
        if (!alive[u][d]) continue;
        if (u == skip_e_n && d == skip_e_d) continue;
        m = nbr(u, d);
        if (m == skip_e_n && opp(d) == skip_e_d) continue;
        if (m == skip_n || seen[m]) continue;
        seen[m] = 1; q.push_back(m);
      end
    end
  endfunction

  function automatic int count_seen(input bit seen [N]);
    int c = 0;
    for (int i = 0; i < N; i++) c += seen[i];
    return c;
  endfunction

  // ---------------- turn-legal routing reference ----------------
  // state (node, in-port); in-port 4 = injected locally
  int hops [N][5];
  int nexthop [N][5];
  bit gmax [N];

  function automatic bit legal(input int n, input int p, input int d);
    if (!alive[n][d] || !gmax[nbr(n, d)]) return 0;
    if (p == 4) return 1;
    if (p == d) return 0;
    return permit[n][p][d];
  endfunction

  function automatic void routes_to(input int t);
    bit changed;
    for (int n = 0; n < N; n++)
      for (int p = 0; p < 5; p++) begin
        hops[n][p] = (n == t) ? 0 : 1_000_000;
        nexthop[n][p] = 4;
      end
    changed = 1;
    while (changed) begin
      changed = 0;
      for (int n = 0; n < N; n++) begin
        if (!gmax[n] || n == t) continue;
        for (int p = 0; p < 5; p++)
          for (int d = 0; d < 4; d++)
            if (legal(n, p, d)) begin
              int m, cand;
              m = nbr(n, d);
              cand = hops[m][opp(d)] + 1;
              if (cand < hops[n][p]) begin
                hops[n][p] = cand; nexthop[n][p] = d; changed = 1;
              end
            end
      end
    end
  endfunction

  // Kahn's algorithm on the channel dependency graph of legal turns
  function automatic bit cdg_acyclic();
    int indeg [N][4];
    int q [$];
    int removed_cnt = 0, total = 0;
    for (int n = 0; n < N; n++) for (int d = 0; d < 4; d++) indeg[n][d] = 0;
    // channel (n,d) = link leaving n in direction d; it feeds node m=nbr(n,d)
    // arriving on port opp(d); dependency to (m,e) if legal(m, opp(d), e)
    for (int n = 0; n < N; n++)
      for (int d = 0; d < 4; d++)
        if (gmax[n] && alive[n][d] && gmax[nbr(n, d)]) begin
          int m;
          total++;
          m = nbr(n, d);
          for (int e = 0; e < 4; e++) if (legal(m, opp(d), e)) indeg[m][e]++;
        end
    for (int n = 0; n < N; n++)
      for (int d = 0; d < 4; d++)
        if (gmax[n] && alive[n][d] && gmax[nbr(n, d)] && indeg[n][d] == 0) q.push_back(n*4+d);
    while (q.size() > 0) begin
      int ch, n, d, m;
      ch = q.pop_front(); n = ch / 4; d = ch % 4; m = nbr(n, d);
      removed_cnt++;
      for (int e = 0; e < 4; e++)
        if (legal(m, opp(d), e)) begin
          indeg[m][e]--;
          if (indeg[m][e] == 0) q.push_back(m*4+e);
        end
    end
    return removed_cnt == total;
  endfunction

  // ---------------- traffic ----------------
  typedef struct { int src; int dst; int vc; int id; } pkt_t;
  pkt_t pending [N][$];
  int   inj_cred [N][4];
  int   flit_idx [N];
  int   rx_count [];
  int   rx_dst   [];
  int   sink_hold [N][4];
  int   n_pkts;
  bit   traffic_on = 0;

  always_ff @(posedge clk) begin
    if (traffic_on) begin
      for (int n = 0; n < N; n++) begin
        // injection credits
        if (inj_credit[n].valid) inj_cred[n][inj_credit[n].vc]++;
        // sink: check flit and hold the credit
        if (ej_link[n].valid) begin
          int id, idx;
          id  = int'(ej_link[n].flit.data[31:16]);
          idx = int'(ej_link[n].flit.data[7:0]);
          checks++;
          if (id >= n_pkts || rx_dst[id] != n || idx != rx_count[id] ||
              int'(ej_link[n].flit.dest) != n ||
              ej_link[n].flit.head != (idx == 0) || ej_link[n].flit.tail != (idx == PKT_LEN-1)) begin
            failures++;
            if (failures < 20) $display("FAIL: bad flit at node %0d id %0d idx %0d", n, id, idx);
          end else rx_count[id]++;
          sink_hold[n][ej_link[n].flit.vc]++;
        end
      end
    end
  end

  // injection and credit release, driven on the negative edge
  always @(negedge clk) begin
    for (int n = 0; n < N; n++) begin
      inj_link[n]  = '0;
      ej_credit[n] = '0;
      if (!traffic_on) continue;
      // slow sink: releases at most one credit per cycle, half of the time
      if ($urandom_range(1, 0) == 1) begin
        for (int v = 0; v < 4; v++)
          if (sink_hold[n][v] > 0) begin
            ej_credit[n].valid = 1; ej_credit[n].vc = 2'(v); sink_hold[n][v]--;
            break;
          end
      end
      if (pending[n].size() > 0) begin
        pkt_t pk;
        pk = pending[n][0];
        if (inj_cred[n][pk.vc] > 0) begin
          inj_cred[n][pk.vc]--;
          inj_link[n].valid = 1;
          inj_link[n].flit.head = (flit_idx[n] == 0);
          inj_link[n].flit.tail = (flit_idx[n] == PKT_LEN-1);
          inj_link[n].flit.vc   = 2'(pk.vc);
          inj_link[n].flit.dest = NODE_W'(pk.dst);
          inj_link[n].flit.src  = NODE_W'(pk.src);
          inj_link[n].flit.data = {32'hFA51_0000 | 32'(n), 16'(pk.id), 8'h00, 8'(flit_idx[n])};
          flit_idx[n]++;
          if (flit_idx[n] == PKT_LEN) begin flit_idx[n] = 0; void'(pending[n].pop_front()); end
        end else m_backpressure++;
      end
    end
  end

  // ---------------- scenario ----------------
  task automatic set_faults(input int scen);
    link_fault = '0; node_fault = '0;
    if (scen == 0) begin
      // hand-made: a pendant node behind a bridge, an isolated corner,
      // a dead node
      link_fault[C*(R-1)][3] = 1;             // top-left node loses E link
      link_fault[C-1][2] = 1;                 // bottom-right node loses W
      link_fault[C-1][0] = 1;                 //   and N links -> cut off
      node_fault[N-1] = 1;                    // top-right node dead
      root_id = NODE_W'(C + 1);
    end else begin
      int nl;
      nl = (N / 6) + scen;
      for (int k = 0; k < nl; k++) link_fault[$urandom_range(N-1, 0)][$urandom_range(3, 0)] = 1;
      if (scen % 2 == 0) node_fault[$urandom_range(N-1, 0)] = 1;
      root_id = NODE_W'(C + 1 + scen % (C - 2));
      node_fault[root_id] = 0;
    end
  endtask

  task automatic run_scenario(input int scen);
    bit seen [N];
    int gsize, t0;
    set_faults(scen);
    build_alive();
    @(negedge clk);
    os_start = 1;
    @(negedge clk);
    os_start = 0;
    t0 = 0;
    while (!done || busy) begin @(posedge clk); t0++; end
    $display("scenario %0d: root %0d, G^max %0d nodes, %0d rounds, %0d cycles, error %0d",
             scen, root_id, gmax_size, rounds, cycles, error);
    if (scen > 0) m_rerun++;
    check(!error, "manager error");
    // maximal connected subgraph and out-of-service labels
    reach(int'(root_id), -1, -1, -1, seen);
    gsize = count_seen(seen);
    for (int n = 0; n < N; n++) gmax[n] = seen[n];
    check(int'(gmax_size) == gsize, $sformatf("gmax_size %0d exp %0d", gmax_size, gsize));
    for (int n = 0; n < N; n++) begin
      check(out_of_service[n] == !gmax[n], $sformatf("oos node %0d", n));
      if (!gmax[n]) m_oos++;
      if (removed[n]) m_node_removed++;
    end
    // BIST: faulty links must not be used for routing - seen via the
    // reference 'alive' matching the router's valid set at the first round
    for (int n = 0; n < N; n++)
      for (int d = 0; d < 4; d++)
        if (nbr(n, d) >= 0 && !alive[n][d] && !node_fault[n] && !node_fault[nbr(n, d)]) m_link_fault_found++;
    // cut vertices
    for (int n = 0; n < N; n++) if (gmax[n]) begin
      bit s2 [N];
      bit exp_cut;
      if (n == int'(root_id)) begin
        // root is a cut vertex iff removing it splits the rest
        int first = -1;
        for (int d = 0; d < 4; d++) if (alive[n][d] && first < 0) first = nbr(n, d);
        exp_cut = 0;
        if (first >= 0) begin
          reach(first, n, -1, -1, s2);
          exp_cut = (count_seen(s2) != gsize - 1);
        end
      end else begin
        reach(int'(root_id), n, -1, -1, s2);
        exp_cut = (count_seen(s2) != gsize - 1);
      end
      check(cut_class[n] == exp_cut, $sformatf("cut node %0d got %0d exp %0d", n, cut_class[n], exp_cut));
      if (exp_cut) m_cut++;
    end
    // bridges
    for (int n = 0; n < N; n++) if (gmax[n])
      for (int d = 0; d < 4; d++) if (alive[n][d] && nbr(n, d) > n) begin
        bit s2 [N];
        bit exp_br;
        int m;
        m = nbr(n, d);
        reach(int'(root_id), -1, n, d, s2);
        exp_br = (count_seen(s2) != gsize);
        check((bridge_class[n][d] | bridge_class[m][opp(d)]) == exp_br,
              $sformatf("bridge %0d-%0d", n, m));
        check(!(bridge_class[n][d] & bridge_class[m][opp(d)]), "bridge on both ends");
        if (exp_br) m_bridge++;
      end
    if (rounds > 1) m_multi_round++;
    for (int n = 0; n < N; n++)
      for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++)
        if (a != b && !permit[n][a][b]) m_turn_forbidden++;
    // deadlock freedom and connectivity under the turn tables
    check(cdg_acyclic(), "channel dependency graph has a cycle");
    if ($test$plusargs("dump")) begin
      for (int n = 0; n < N; n++)
        $display("node %0d gmax %0d rem %0d cut %0d alive NSWE %0d%0d%0d%0d permit %b", n, gmax[n], removed[n], cut_class[n],
                 alive[n][0], alive[n][1], alive[n][2], alive[n][3], permit[n]);
    end
    for (int t = 0; t < N; t++) if (gmax[t]) begin
      routes_to(t);
      for (int s = 0; s < N; s++) if (gmax[s])
        check(hops[s][4] < 1_000_000, $sformatf("no turn-legal route %0d->%0d", s, t));
      // program tables
      for (int n = 0; n < N; n++) if (gmax[n])
        for (int p = 0; p < 5; p++) begin
          @(negedge clk);
          cfg_we = 1; cfg_node = NODE_W'(n); cfg_inport = 3'(p); cfg_dest = NODE_W'(t);
          cfg_port = (n == t) ? 3'd4 : 3'(nexthop[n][p]);
        end
    end
    @(negedge clk);
    cfg_we = 0;
    // traffic
    n_pkts = NPKT;
    rx_count = new[n_pkts];
    rx_dst   = new[n_pkts];
    for (int i = 0; i < n_pkts; i++) begin
      pkt_t pk;
      do pk.src = $urandom_range(N-1, 0); while (!gmax[pk.src]);
      do pk.dst = $urandom_range(N-1, 0); while (!gmax[pk.dst] || pk.dst == pk.src);
      pk.vc = i % 4; pk.id = i;
      rx_count[i] = 0; rx_dst[i] = pk.dst;
      pending[pk.src].push_back(pk);
    end
    for (int n = 0; n < N; n++) begin
      flit_idx[n] = 0;
      for (int v = 0; v < 4; v++) begin inj_cred[n][v] = VC_DEPTH; sink_hold[n][v] = 0; end
    end
    traffic_on = 1;
    begin
      int all, guard;
      guard = 0;
      do begin
        @(posedge clk); guard++;
        all = 1;
        for (int i = 0; i < n_pkts; i++) if (rx_count[i] != PKT_LEN) all = 0;
      end while (!all && guard < 20000 + 400 * NPKT);
      check(all == 1, "not all packets delivered");
      $display("scenario %0d: %0d packets delivered in %0d cycles", scen, n_pkts, guard);
    end
    repeat (40) @(posedge clk);
    traffic_on = 0;
    for (int n = 0; n < N; n++) check(rc_violations[n] == 0, $sformatf("rc violation node %0d", n));
  endtask

  initial begin
    os_start = 0; cfg_we = 0; cfg_node = 0; cfg_inport = 0; cfg_dest = 0; cfg_port = 0;
    link_fault = '0; node_fault = '0; root_id = 0;
    for (int n = 0; n < N; n++) begin inj_link[n] = '0; ej_credit[n] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < NSCEN; s++) run_scenario(s);
    $display("mechanisms: link_faults_found=%0d cut_vertices=%0d bridges=%0d out_of_service=%0d multi_round_runs=%0d forbidden_turns=%0d removed_nodes=%0d backpressure=%0d reruns=%0d",
             m_link_fault_found, m_cut, m_bridge, m_oos, m_multi_round, m_turn_forbidden, m_node_removed, m_backpressure, m_rerun);
    check(m_link_fault_found > 0, "no link fault exercised");
    check(m_cut > 0, "no cut vertex exercised");
    check(m_bridge > 0, "no bridge exercised");
    check(m_oos > 0, "no out-of-service node exercised");
    check(m_multi_round > 0, "no multi-round reconfiguration");
    check(m_turn_forbidden > 0, "no forbidden turn");
    check(m_node_removed > 0, "no pruned node");
    check(m_backpressure > 0, "no backpressure");
    check(m_rerun > 0, "no re-run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
