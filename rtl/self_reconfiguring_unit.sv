// self_reconfiguring_unit: one node's share of the turn-prohibition
// procedure that makes routing in the maximal connected subgraph
// deadlock-free while keeping it connected.
//
// The unit sums the valid bits of the neighbor list table (the node's
// degree in the remaining graph) and compares the sum with 1 and 2, as in
// the paper's Self-Reconfiguring figure (degree, leaf and min_degree are
// status outputs). At each prune pulse, issued by the manager after a DFS
// round, a visited non-root node that is a leaf of this round's depth
// first tree (no child entry set) and not a cut vertex removes itself from
// the graph. Before it goes it forbids, in the node-based routing table
// (permit[from][to], 1 = allowed), every turn (i,x,j) and (j,x,i) between
// two of its still-valid neighbours i and j - for a degree-2 node exactly
// the one pair of the paper's figure. Neighbours see the removal on the
// sideband and clear their valid bit for this node; the next DFS round
// then runs on the smaller graph. At the end of the first round a node the
// DFS never reached marks itself out of service. reconf_start restores a
// fully permitting table and clears removed / out_of_service. The turn
// table is a register that changes only on the cycle after a prune pulse.
//
// Departure from the paper: its procedure removes the tree leaves
// without restricting their turns and also removes, in the same round,
// every non-cut node of minimal degree (with its turns forbidden). Here a
// removed leaf forbids its turns, since a tree leaf may still have several
// mesh neighbours. Removing several adjacent
// such nodes at once can cut routes: on a 4-cycle a-b-c-d whose nodes b,
// c, d all have degree 2, all three are removed together and each forbids
// its only turn, so c can no longer be reached from a. Removing only
// depth-first-tree leaves avoids this: two leaves are never adjacent (a
// non-tree edge always joins an ancestor to a descendant), the remaining
// tree stays connected, and the paper's labelling proof of deadlock
// freedom then holds with strictly increasing labels. The root (system
// manager) is never removed, as in the paper; U-turns are never permitted
// (the figure leaves them as don't-care).
module self_reconfiguring_unit
  import fashion_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                reconf_start,
  input  logic                prune,
  input  logic                round_end,
  input  logic                first_round,
  input  logic [NUM_DIRS-1:0] nbr_valid,
  input  logic                visited,
  input  logic [NUM_DIRS-1:0] child,
  input  logic                cut,
  input  logic                root,
  output logic [2:0]          degree,
  output logic                leaf,
  output logic                min_degree,
  output logic                removed,
  output logic                out_of_service,
  output turn_tbl_t           permit
);
  localparam turn_tbl_t ALL_TURNS = '{
    '{1'b0, 1'b1, 1'b1, 1'b1},   // outer index 3 (E) first; 0 on the diagonal
    '{1'b1, 1'b0, 1'b1, 1'b1},
    '{1'b1, 1'b1, 1'b0, 1'b1},
    '{1'b1, 1'b1, 1'b1, 1'b0}
  };

  always_comb begin
    degree = '0;
    for (int p = 0; p < NUM_DIRS; p++) degree = degree + 3'(nbr_valid[p]);
    leaf       = (degree == 3'd1);
    min_degree = (degree == 3'd2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      removed        <= 1'b0;
      out_of_service <= 1'b0;
      permit         <= ALL_TURNS;
    end else if (reconf_start) begin
      removed        <= 1'b0;
      out_of_service <= 1'b0;
      permit         <= ALL_TURNS;
    end else begin
      if (round_end && first_round && !visited) out_of_service <= 1'b1;
      if (prune && visited && !root && !cut && !removed && child == '0) begin
        removed <= 1'b1;
        for (int a = 0; a < NUM_DIRS; a++)
          for (int b = 0; b < NUM_DIRS; b++)
            if (a != b && nbr_valid[a] && nbr_valid[b]) permit[a][b] <= 1'b0;
      end
    end
  end
endmodule
