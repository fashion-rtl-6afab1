// fashion_pkg: types and constants shared by the Fashion router, its
// Self-Awareness Module (SAM) and the mesh.
//
// Port numbering follows the row order of the neighbor list table in the
// SAM (N, S, W, E), with the local port last. Flit width (64-bit payload),
// 4 VCs per port and 8-flit VC buffers are the paper's evaluated
// configuration. Everything else here (header layout, SAM sideband message
// format, 9-bit depth/low/counter fields, enough for 256 nodes) is this
// design's own choice.
package fashion_pkg;

  localparam int NUM_PORTS = 5;     // N, S, W, E, Local
  localparam int NUM_DIRS  = 4;     // mesh directions
  localparam int NUM_VC    = 4;     // virtual channels per port
  localparam int VC_W      = 2;
  localparam int VC_DEPTH  = 8;     // flits per VC
  localparam int NODE_W    = 8;     // node id width, up to 256 nodes (16x16)
  localparam int DATA_W    = 64;    // flit payload
  localparam int CNT_W     = 9;     // DFS depth / low / counter width (holds 256)

  typedef enum logic [2:0] {
    P_N = 3'd0,
    P_S = 3'd1,
    P_W = 3'd2,
    P_E = 3'd3,
    P_L = 3'd4
  } port_e;

  typedef struct packed {
    logic              head;
    logic              tail;
    logic [VC_W-1:0]   vc;
    logic [NODE_W-1:0] dest;
    logic [NODE_W-1:0] src;
    logic [DATA_W-1:0] data;
  } flit_t;

  // Forward half of a physical channel. In BIST mode (test=1) the payload
  // carries {own signature[63:32], echoed neighbour signature[31:0]}.
  typedef struct packed {
    logic  valid;
    logic  test;
    flit_t flit;
  } link_t;

  // Backward half of a physical channel: one credit per dequeued flit.
  typedef struct packed {
    logic            valid;
    logic [VC_W-1:0] vc;
  } credit_t;

  typedef enum logic [1:0] {
    SM_NONE = 2'd0,
    SM_FWD  = 2'd1,   // forward search token: val = sender depth
    SM_BWD  = 2'd2    // backward search token: val = sender low
  } sam_msg_e;

  // SAM-to-SAM sideband of one direction: the sender's status plus a
  // one-cycle message.
  typedef struct packed {
    logic             in_service; // node reached by the first DFS round
    logic             present;   // node in service and not pruned
    logic             visited;   // node visited in the current DFS round
    logic [CNT_W-1:0] depth;     // node depth in the current DFS round
    sam_msg_e         kind;
    logic [CNT_W-1:0] val;
    logic [CNT_W-1:0] cnt;       // DFS counter carried with the token
  } sam_link_t;

  // Turn table: permit[from][to] over the four mesh directions.
  typedef logic [NUM_DIRS-1:0][NUM_DIRS-1:0] turn_tbl_t;

  function automatic logic [1:0] opposite(input logic [1:0] p);
    case (p)
      2'd0:    return 2'd1;
      2'd1:    return 2'd0;
      2'd2:    return 2'd3;
      default: return 2'd2;
    endcase
  endfunction

endpackage
