// sam: Self-Awareness Module of one Fashion router.
//
// Holds the three SAM units around the shared neighbor list table (one
// entry per direction N, S, W, E with parent, child, bridge and valid
// bits):
//   - bist_unit tests the four links and yields link_ok;
//   - self_monitoring_unit runs this node's part of the distributed DFS
//     and owns the parent / child / bridge columns and the cut bit;
//   - self_reconfiguring_unit prunes the node and writes the node-based
//     routing (turn) table.
// The valid column is a register: valid[p] = link_ok[p] and the neighbour
// in direction p is still present (neither pruned nor out of service).
// Pruning is only a device of the turn-prohibition procedure, so routing
// uses route_valid[p] = link_ok[p] and the neighbour is in service. The
// module drives the SAM sideband towards each neighbour with its present,
// visited and depth status and the DFS tokens. cut_class / bridge_class
// keep the first DFS round's labels (the classification of the original
// maximal connected subgraph); cut / bridge follow the latest round.
// All control inputs are one-cycle pulses from the sam_manager except
// first_round (level).
module sam
  import fashion_pkg::*;
#(
  parameter int          NODES       = 64,
  parameter int          TEST_CYCLES = 32,
  parameter logic [31:0] SEED        = 32'h1D2C_3B4A
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                is_root,
  // manager controls
  input  logic                bist_start,
  input  logic                reconf_start,
  input  logic                dfs_start,
  input  logic                round_end,
  input  logic                prune,
  input  logic                first_round,
  // BIST access to the physical links
  input  link_t               test_in  [NUM_DIRS],
  output link_t               test_out [NUM_DIRS],
  output logic                bist_running,
  // SAM sideband
  input  sam_link_t           sam_in   [NUM_DIRS],
  output sam_link_t           sam_out  [NUM_DIRS],
  // neighbor list table and status
  output logic [NUM_DIRS-1:0] link_ok,
  output logic [NUM_DIRS-1:0] valid,
  output logic [NUM_DIRS-1:0] route_valid,
  output logic [NUM_DIRS-1:0] parent,
  output logic [NUM_DIRS-1:0] child,
  output logic [NUM_DIRS-1:0] bridge,
  output logic                cut,
  output logic [NUM_DIRS-1:0] bridge_class,
  output logic                cut_class,
  output logic                visited,
  output logic [CNT_W-1:0]    depth,
  output logic [CNT_W-1:0]    low,
  output logic [CNT_W-1:0]    counter,
  output logic                removed,
  output logic                out_of_service,
  output turn_tbl_t           permit,
  output logic                root_done
);
  logic bist_done;
  logic root_q, finished;
  logic present;
  logic [2:0] degree;
  logic leaf, min_degree;
  sam_msg_e         msg_kind [NUM_DIRS];
  logic [CNT_W-1:0] msg_val  [NUM_DIRS];
  logic [CNT_W-1:0] msg_cnt  [NUM_DIRS];

  assign present = !removed && !out_of_service;

  bist_unit #(.TEST_CYCLES(TEST_CYCLES), .SEED(SEED)) u_bist (
    .clk, .rst_n, .start(bist_start), .running(bist_running), .done(bist_done),
    .in_link(test_in), .out_link(test_out), .link_ok
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid       <= '0;
      route_valid <= '0;
    end else begin
      for (int p = 0; p < NUM_DIRS; p++) begin
        valid[p]       <= link_ok[p] && sam_in[p].present;
        route_valid[p] <= link_ok[p] && sam_in[p].in_service;
      end
    end
  end

  self_monitoring_unit #(.NODES(NODES)) u_mon (
    .clk, .rst_n, .dfs_start, .is_root, .enable(present),
    .nbr_valid(valid), .nbr_in(sam_in),
    .msg_kind, .msg_val, .msg_cnt,
    .visited, .depth, .low, .counter, .parent, .child, .bridge, .cut,
    .root(root_q), .finished, .root_done
  );

  self_reconfiguring_unit u_rec (
    .clk, .rst_n, .reconf_start, .prune, .round_end, .first_round,
    .nbr_valid(valid), .visited, .child, .cut, .root(root_q),
    .degree, .leaf, .min_degree, .removed, .out_of_service, .permit
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cut_class    <= 1'b0;
      bridge_class <= '0;
    end else if (round_end && first_round) begin
      cut_class    <= cut && visited;
      bridge_class <= bridge;
    end
  end

  always_comb begin
    for (int p = 0; p < NUM_DIRS; p++) begin
      sam_out[p].in_service = !out_of_service;
      sam_out[p].present = present;
      sam_out[p].visited = visited;
      sam_out[p].depth   = depth;
      sam_out[p].kind    = msg_kind[p];
      sam_out[p].val     = msg_val[p];
      sam_out[p].cnt     = msg_cnt[p];
    end
  end
endmodule
