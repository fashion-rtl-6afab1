// fashion_mesh: a ROWS x COLS 2D mesh of Fashion routers with the system
// manager beside the root node - the top of the design.
//
// Node id = y*COLS + x. Port N leads to y+1, S to y-1, W to x-1, E to x+1;
// edge ports see a permanently silent neighbour, which their BIST reports
// as not valid. Each direction between two nodes carries the flit channel,
// the credit channel of the opposite flit channel and the SAM sideband.
// Fault injection for test: link_fault[id][d] silences every wire leaving
// node id in direction d (stuck-at-0), node_fault[id] silences every wire
// leaving the node. The BIST finds such faults the next time it runs.
//
// sam_manager runs the diagnosis and recovery sequence on os_start (or its
// period timer) with the root given by root_id, and stalls all routers
// while it runs. The local ports (injection and ejection links with their
// credits) and the routing table write port are brought out for the
// processing elements and system software, which the paper does not
// design. Status outputs expose the SAM results of every node.
// Default size 8x8 with 4 VCs of 8 flits and 64-bit payload, the paper's
// evaluated configuration.
module fashion_mesh
  import fashion_pkg::*;
#(
  parameter int ROWS        = 8,
  parameter int COLS        = 8,
  parameter int TEST_CYCLES = 32,
  parameter int PERIOD      = 0,
  parameter int DFS_TIMEOUT = 8192
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // system manager
  input  logic                           os_start,
  input  logic [NODE_W-1:0]              root_id,
  output logic                           busy,
  output logic                           done,
  output logic                           error,
  output logic [CNT_W-1:0]               gmax_size,
  output logic [7:0]                     rounds,
  output logic [15:0]                    cycles,
  // fault injection
  input  logic [ROWS*COLS-1:0][NUM_DIRS-1:0] link_fault,
  input  logic [ROWS*COLS-1:0]           node_fault,
  // local ports
  input  link_t                          inj_link   [ROWS*COLS],
  output credit_t                        inj_credit [ROWS*COLS],
  output link_t                          ej_link    [ROWS*COLS],
  input  credit_t                        ej_credit  [ROWS*COLS],
  // routing table programming
  input  logic                           cfg_we,
  input  logic [NODE_W-1:0]              cfg_node,
  input  logic [2:0]                     cfg_inport,
  input  logic [NODE_W-1:0]              cfg_dest,
  input  logic [2:0]                     cfg_port,
  // per-node SAM status
  output logic [ROWS*COLS-1:0][NUM_DIRS-1:0] valid,
  output turn_tbl_t                      permit       [ROWS*COLS],
  output logic [ROWS*COLS-1:0]           cut_class,
  output logic [ROWS*COLS-1:0][NUM_DIRS-1:0] bridge_class,
  output logic [ROWS*COLS-1:0]           removed,
  output logic [ROWS*COLS-1:0]           out_of_service,
  output logic [15:0]                    rc_violations [ROWS*COLS]
);
  localparam int N = ROWS * COLS;

  logic bist_start, bist_mode, reconf_start, dfs_start, round_end, prune, first_round;
  logic [N-1:0]     root_done;
  logic [CNT_W-1:0] counter [N];
  logic             any_root_done;

  link_t     r_in_link    [N][NUM_PORTS];
  credit_t   r_out_credit [N][NUM_PORTS];
  link_t     r_out_link   [N][NUM_PORTS];
  credit_t   r_in_credit  [N][NUM_PORTS];
  sam_link_t r_sam_in     [N][NUM_DIRS];
  sam_link_t r_sam_out    [N][NUM_DIRS];

  // neighbour of node n in direction d, or -1 at the mesh edge
  function automatic int nbr(input int n, input int d);
    int x, y;
    x = n % COLS;
    y = n / COLS;
    case (d)
      0:       return (y + 1 < ROWS) ? n + COLS : -1;   // N
      1:       return (y > 0)        ? n - COLS : -1;   // S
      2:       return (x > 0)        ? n - 1    : -1;   // W
      default: return (x + 1 < COLS) ? n + 1    : -1;   // E
    endcase
  endfunction

  for (genvar n = 0; n < N; n++) begin : g_node
    for (genvar d = 0; d < NUM_DIRS; d++) begin : g_dir
      localparam int M = nbr(n, d);
      if (M < 0) begin : g_edge
        assign r_in_link[n][d]   = '0;
        assign r_in_credit[n][d] = '0;
        assign r_sam_in[n][d]    = '0;
      end else begin : g_link
        // wires leaving M towards n travel in M's opposite direction
        localparam int OD = (d == 0) ? 1 : (d == 1) ? 0 : (d == 2) ? 3 : 2;
        logic dead;
        assign dead = link_fault[M][OD] || node_fault[M];
        assign r_in_link[n][d]   = dead ? '0 : r_out_link[M][OD];
        assign r_in_credit[n][d] = dead ? '0 : r_out_credit[M][OD];
        assign r_sam_in[n][d]    = dead ? '0 : r_sam_out[M][OD];
      end
    end

    assign r_in_link[n][P_L]   = inj_link[n];
    assign inj_credit[n]       = r_out_credit[n][P_L];
    assign ej_link[n]          = r_out_link[n][P_L];
    assign r_in_credit[n][P_L] = ej_credit[n];

    fashion_router #(
      .NODES(N), .TEST_CYCLES(TEST_CYCLES),
      .SEED(32'h1D2C_3B4A ^ (32'(n) * 32'h0100_0193) | 32'h1)
    ) u_router (
      .clk, .rst_n,
      .is_root(root_id == NODE_W'(n)),
      .bist_start, .bist_mode, .stall(busy), .reconf_start, .dfs_start,
      .round_end, .prune, .first_round,
      .in_link(r_in_link[n]), .out_credit(r_out_credit[n]),
      .out_link(r_out_link[n]), .in_credit(r_in_credit[n]),
      .sam_in(r_sam_in[n]), .sam_out(r_sam_out[n]),
      .cfg_we(cfg_we && cfg_node == NODE_W'(n)), .cfg_inport, .cfg_dest, .cfg_port,
      .valid(valid[n]), .permit(permit[n]), .cut_class(cut_class[n]),
      .bridge_class(bridge_class[n]), .removed(removed[n]),
      .out_of_service(out_of_service[n]), .root_done(root_done[n]),
      .counter(counter[n]), .rc_violations(rc_violations[n])
    );
  end

  logic [CNT_W-1:0] root_counter;

  always_comb begin
    root_counter = '0;
    for (int n = 0; n < N; n++) if (root_id == NODE_W'(n)) root_counter = counter[n];
  end

  assign any_root_done = |root_done;

  sam_manager #(
    .PERIOD(PERIOD), .BIST_WAIT(TEST_CYCLES + 8), .DFS_TIMEOUT(DFS_TIMEOUT)
  ) u_mgr (
    .clk, .rst_n, .os_start, .root_done(any_root_done),
    .root_counter,
    .bist_start, .bist_mode, .reconf_start, .dfs_start, .round_end, .prune,
    .first_round, .busy, .done, .error, .gmax_size, .rounds, .cycles
  );
endmodule
