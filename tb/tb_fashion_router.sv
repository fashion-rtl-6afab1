// tb_fashion_router: one router whose four neighbours are modelled by BIST
// units that answer its link test. After the test the router's valid bits
// must all be set. The routing table is then filled at random (no U-turns)
// and each of the five inputs sends random multi-flit packets on random
// VCs, honouring credits; the sinks return credits slowly so that buffers
// fill. Checks: every flit leaves on the port the table names, flits of a
// packet stay together and in order on one output VC, every packet is
// delivered once, zero-load latency, no switching while stall is high,
// no rc_violations for legal routes, and one violation for a U-turn.
module tb_fashion_router;
  import fashion_pkg::*;
  localparam int TC = 32, NPKT = 150, DESTS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  logic bist_start = 0, bist_mode = 0, stall = 0;
  logic cfg_we = 0;
  logic [2:0] cfg_inport = 0, cfg_port = 0;
  logic [NODE_W-1:0] cfg_dest = 0;
  link_t   in_link [NUM_PORTS], out_link [NUM_PORTS], src_link [NUM_PORTS];
  credit_t out_credit [NUM_PORTS], in_credit [NUM_PORTS];
  sam_link_t sam_in [NUM_DIRS], sam_out [NUM_DIRS];
  logic [NUM_DIRS-1:0] valid, bridge_class;
  turn_tbl_t permit;
  logic cut_class, removed, out_of_service, root_done;
  logic [CNT_W-1:0] counter;
  logic [15:0] rc_violations;

  fashion_router #(.NODES(DESTS), .TEST_CYCLES(TC)) dut (
    .clk, .rst_n, .is_root(1'b0), .bist_start, .bist_mode, .stall,
    .reconf_start(1'b0), .dfs_start(1'b0), .round_end(1'b0), .prune(1'b0), .first_round(1'b0),
    .in_link, .out_credit, .out_link, .in_credit, .sam_in, .sam_out,
    .cfg_we, .cfg_inport, .cfg_dest, .cfg_port,
    .valid, .permit, .cut_class, .bridge_class, .removed, .out_of_service, .root_done,
    .counter, .rc_violations
  );

  // neighbour BIST units: neighbour d sees our port d on its opposite side
  link_t nb_in [NUM_DIRS][NUM_DIRS], nb_out [NUM_DIRS][NUM_DIRS];
  for (genvar d = 0; d < NUM_DIRS; d++) begin : g_nb
    localparam int OD = (d == 0) ? 1 : (d == 1) ? 0 : (d == 2) ? 3 : 2;
    for (genvar k = 0; k < NUM_DIRS; k++) begin : g_k
      assign nb_in[d][k] = (k == OD) ? out_link[d] : '0;
    end
    bist_unit #(.TEST_CYCLES(TC), .SEED(32'h5EED_0000 + d)) u_nb (
      .clk, .rst_n, .start(bist_start), .running(), .done(), .in_link(nb_in[d]),
      .out_link(nb_out[d]), .link_ok()
    );
    assign in_link[d] = bist_mode ? nb_out[d][OD] : src_link[d];
    assign sam_in[d] = '{in_service: 1'b1, present: 1'b1, visited: 1'b0, depth: '0, kind: SM_NONE, val: '0, cnt: '0};
  end
  assign in_link[P_L] = src_link[P_L];

  // ---------------- model state ----------------
  int tbl [NUM_PORTS][DESTS];
  int src_credit [NUM_PORTS][NUM_VC];
  int sent_pkts = 0, got_pkts = 0, got_flits = 0, sent_flits = 0;
  int pkt_len [int];
  bit pkt_seen [int];
  int cur_pkt [NUM_PORTS][NUM_VC], cur_seq [NUM_PORTS][NUM_VC];
  int pending [NUM_PORTS][$];          // out VCs of flits held by each sink
  int sink_rate = 2;                   // return a credit with prob 1/sink_rate
  bit traffic = 0;
  int stall_flits = 0;
  int srcs_done = 0;
  int full_seen = 0;

  // credits coming back to the sources
  always @(posedge clk) begin
    for (int p = 0; p < NUM_PORTS; p++)
      if (rst_n && out_credit[p].valid) src_credit[p][out_credit[p].vc]++;
  end

  // sinks: check each flit and return its credit later
  always @(posedge clk) begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      in_credit[p] <= '0;
      if (pending[p].size() > 0 && $urandom_range(sink_rate - 1, 0) == 0) begin
        in_credit[p] <= '{valid: 1'b1, vc: VC_W'(pending[p].pop_front())};
      end
      if (rst_n && out_link[p].valid && !bist_mode) begin
        flit_t f;
        int id, seq, ip, ov;
        f = out_link[p].flit;
        id = int'(f.data[63:32]); seq = int'(f.data[31:0]); ip = int'(f.src);
        ov = int'(f.vc);
        got_flits++;
        if (stall) stall_flits++;
        pending[p].push_back(ov);
        if (pending[p].size() >= NUM_VC * VC_DEPTH - 2) full_seen++;
        check(tbl[ip][f.dest] == p, "flit leaves on the table's port");
        if (f.head) begin
          check(cur_pkt[p][ov] < 0, "head only on a free output VC");
          check(seq == 0 && !pkt_seen.exists(id), "head starts an unseen packet");
          cur_pkt[p][ov] = id; cur_seq[p][ov] = 0;
        end else begin
          cur_seq[p][ov]++;
          check(cur_pkt[p][ov] == id && cur_seq[p][ov] == seq, "body in order on its VC");
        end
        if (f.tail) begin
          check(pkt_len.exists(id) && seq == pkt_len[id] - 1, "tail at packet length");
          pkt_seen[id] = 1; got_pkts++;
          cur_pkt[p][ov] = -1;
        end
      end
    end
  end

  task automatic send_packet(input int ip, input int id, input int dest, input int len);
    int vc;
    vc = $urandom_range(NUM_VC - 1, 0);
    pkt_len[id] = len;
    for (int s = 0; s < len; s++) begin
      while (src_credit[ip][vc] == 0) @(negedge clk);
      src_credit[ip][vc]--;
      src_link[ip].valid = 1'b1; src_link[ip].test = 1'b0;
      src_link[ip].flit.head = (s == 0); src_link[ip].flit.tail = (s == len - 1);
      src_link[ip].flit.vc = VC_W'(vc); src_link[ip].flit.dest = NODE_W'(dest);
      src_link[ip].flit.src = NODE_W'(ip);
      src_link[ip].flit.data = {32'(id), 32'(s)};
      sent_flits++;
      @(negedge clk);
      src_link[ip] = '0;
    end
    sent_pkts++;
  endtask

  task automatic write_route(input int ip, input int dest, input int port);
    cfg_we = 1; cfg_inport = 3'(ip); cfg_dest = NODE_W'(dest); cfg_port = 3'(port);
    tbl[ip][dest] = port;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    int t0, lat;
    for (int p = 0; p < NUM_PORTS; p++) begin
      src_link[p] = '0; in_credit[p] = '0;
      for (int v = 0; v < NUM_VC; v++) begin src_credit[p][v] = VC_DEPTH; cur_pkt[p][v] = -1; end
      for (int d = 0; d < DESTS; d++) tbl[p][d] = P_L;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // link test
    bist_mode = 1; bist_start = 1;
    @(negedge clk);
    bist_start = 0;
    repeat (TC + 8) @(negedge clk);
    bist_mode = 0;
    repeat (3) @(negedge clk);
    check(valid == 4'hF, "all four links pass the test");
    check(permit[P_N][P_E] && permit[P_W][P_S] && !permit[P_N][P_N], "all turns permitted, no U-turn");
    // routing table: no U-turns
    for (int ip = 0; ip < NUM_PORTS; ip++)
      for (int d = 0; d < DESTS; d++) begin
        int port;
        do port = $urandom_range(NUM_PORTS - 1, 0); while (port == ip && ip != P_L);
        write_route(ip, d, port);
      end
    // zero-load latency: one flit from local to east
    write_route(P_L, 0, P_E);
    sink_rate = 1;
    fork
      send_packet(P_L, 1000, 0, 1);
      begin
        @(posedge clk iff src_link[P_L].valid);
        t0 = $time;
        @(posedge clk iff out_link[P_E].valid);
        lat = int'(($time - t0) / 10);
      end
    join
    $display("zero-load latency %0d cycles", lat);
    check(lat == 4, "zero-load latency of four cycles");
    // stall: nothing is switched while stall is high
    repeat (2) @(negedge clk);
    stall = 1;
    fork send_packet(P_W, 1001, 3, 2); join_none
    repeat (20) @(negedge clk);
    check(got_pkts == 1, "no delivery while stalled");
    stall = 0;
    repeat (20) @(negedge clk);
    check(got_pkts == 2, "delivery after stall");
    // random traffic with slow sinks
    sink_rate = 3;
    for (int ip = 0; ip < NUM_PORTS; ip++) begin
      automatic int i = ip;
      fork
        begin
          for (int k = 0; k < NPKT; k++)
            send_packet(i, i * 10000 + k, $urandom_range(DESTS - 1, 0), $urandom_range(6, 1));
          srcs_done++;
        end
      join_none
    end
    wait (srcs_done == NUM_PORTS);
    sink_rate = 1;
    repeat (300) @(negedge clk);
    check(got_pkts == sent_pkts, "every packet delivered");
    check(got_flits == sent_flits, "every flit delivered");
    check(stall_flits == 0, "no flit while stalled");
    check(full_seen > 0, "sinks were backed up");
    check(rc_violations == 0, "legal routes give no violation");
    // a U-turn entry is flagged
    write_route(P_N, 5, P_N);
    send_packet(P_N, 2000, 5, 1);
    repeat (20) @(negedge clk);
    check(rc_violations == 1, "U-turn counted as a violation");
    $display("packets %0d flits %0d", got_pkts, got_flits);
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
