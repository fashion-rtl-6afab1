// route_computation: node-table route computation (RC stage).
//
// The router keeps a routing table indexed by {input port, destination}
// whose entries hold the output port that leads to the next downstream
// node. System software writes the table through the cfg_* port before
// traffic starts (the paper: routing tables are programmed alongside the
// SAM units). NL lookups are served in parallel, one per input VC.
// Each lookup is also checked against the SAM state: the output port must
// be the local port or a port whose neighbor-table valid bit is set, and a
// turn between two mesh ports must be permitted by the node-based routing
// (turn) table written by the Self-Reconfiguring unit. A lookup that fails
// either check reports ok=0; the router counts it as a violation.
// Indexing by input port as well as destination is this design's choice:
// it lets software express turn-restricted routes that a destination-only
// table cannot. Lookup is combinational; writes take effect next cycle.
module route_computation
  import fashion_pkg::*;
#(
  parameter int NODES = 64,
  parameter int NL    = NUM_PORTS * NUM_VC
) (
  input  logic              clk,
  input  logic              rst_n,
  // table programming
  input  logic              cfg_we,
  input  logic [2:0]        cfg_inport,
  input  logic [NODE_W-1:0] cfg_dest,
  input  logic [2:0]        cfg_port,
  // SAM state
  input  logic [NUM_DIRS-1:0] nbr_valid,
  input  turn_tbl_t         permit,
  // lookups
  input  logic [2:0]        lk_inport [NL],
  input  logic [NODE_W-1:0] lk_dest   [NL],
  output logic [2:0]        lk_port   [NL],
  output logic [NL-1:0]     lk_ok
);
  localparam int ENTRIES = NUM_PORTS * NODES;

  logic [2:0] table_q [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) table_q[e] <= P_L;
    end else if (cfg_we && int'(cfg_dest) < NODES && int'(cfg_inport) < NUM_PORTS) begin
      table_q[int'(cfg_inport) * NODES + int'(cfg_dest)] <= cfg_port;
    end
  end

  always_comb begin
    for (int l = 0; l < NL; l++) begin
      logic [2:0] op;
      logic       turn_ok, port_ok;
      op = (int'(lk_dest[l]) < NODES && int'(lk_inport[l]) < NUM_PORTS)
           ? table_q[int'(lk_inport[l]) * NODES + int'(lk_dest[l])] : P_L;
      port_ok = (op == P_L) || (op < 3'd4 && nbr_valid[op[1:0]]);
      turn_ok = (op == P_L) || (lk_inport[l] == P_L) || (op > 3'd3) || (lk_inport[l] > 3'd3)
                || permit[lk_inport[l][1:0]][op[1:0]];
      lk_port[l] = op;
      lk_ok[l]   = port_ok && turn_ok;
    end
  end
endmodule
