// self_monitoring_unit: one node's share of the distributed depth-first
// search that builds the connectivity map and labels cut elements.
//
// State per node, as in the paper: depth, low, counter, the parent / child
// / bridge columns of the neighbor list table (one bit per direction) and
// the cut and root status bits. At dfs_start every node returns to
// UNVISITED with cut=1 and depth=low=N (the paper's initial values). The
// root then sets depth=low=0, counter=1 and explores. A node explores its
// valid, unvisited neighbours in the order W, S, E, N (the order printed in
// the paper's worked example): it sends a forward token {depth, counter} to
// one of them, marks it as child and waits for the backward token
// {low, counter}. On a backward token from child j it takes
// low = min(low, j.low), sets cut if depth <= j.low (non-root, Lemma 1) and
// marks the edge a bridge if depth < j.low (Lemma 2). With no unvisited
// neighbour left, it folds the depths of its visited non-parent
// neighbours into low (formula (1)), fixes its cut bit (a root is a cut
// vertex iff it has two or more children) and returns the backward token
// to its parent; the root instead pulses root_done with the final counter,
// the size of the maximal connected subgraph.
// Neighbour depth and visited status are read from the SAM sideband, which
// every node drives continuously; tokens are one-cycle messages on the same
// sideband. The sideband and its message format are this design's choice.
// One token is in flight network-wide, so each hop costs two cycles.
module self_monitoring_unit
  import fashion_pkg::*;
#(
  parameter int NODES = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                dfs_start,
  input  logic                is_root,
  input  logic                enable,            // node in service, not pruned
  input  logic [NUM_DIRS-1:0] nbr_valid,
  input  sam_link_t           nbr_in [NUM_DIRS],
  // message outputs, one per direction
  output sam_msg_e            msg_kind [NUM_DIRS],
  output logic [CNT_W-1:0]    msg_val  [NUM_DIRS],
  output logic [CNT_W-1:0]    msg_cnt  [NUM_DIRS],
  // node state
  output logic                visited,
  output logic [CNT_W-1:0]    depth,
  output logic [CNT_W-1:0]    low,
  output logic [CNT_W-1:0]    counter,
  output logic [NUM_DIRS-1:0] parent,
  output logic [NUM_DIRS-1:0] child,
  output logic [NUM_DIRS-1:0] bridge,
  output logic                cut,
  output logic                root,
  output logic                finished,
  output logic                root_done
);
  typedef enum logic [1:0] {S_UNVISITED, S_EXPLORE, S_WAIT, S_DONE} state_e;

  state_e          state;
  logic [1:0]      wait_port;
  logic            cut_flag;
  logic [2:0]      nchild;

  // DFS exploration order W, S, E, N
  localparam logic [1:0] ORDER [4] = '{2'd2, 2'd1, 2'd3, 2'd0};

  logic            fwd_found;
  logic [1:0]      fwd_port;
  logic [CNT_W-1:0] nbr_min;
  logic            fwd_hit;
  logic [1:0]      fwd_src;

  always_comb begin
    fwd_found = 1'b0;
    fwd_port  = '0;
    for (int k = 3; k >= 0; k--) begin
      if (nbr_valid[ORDER[k]] && !nbr_in[ORDER[k]].visited && !parent[ORDER[k]]) begin
        fwd_found = 1'b1;
        fwd_port  = ORDER[k];
      end
    end
    nbr_min = low;
    for (int p = 0; p < NUM_DIRS; p++) begin
      if (nbr_valid[p] && !parent[p] && nbr_in[p].visited && nbr_in[p].depth < nbr_min)
        nbr_min = nbr_in[p].depth;
    end
    fwd_hit = 1'b0;
    fwd_src = '0;
    for (int p = NUM_DIRS-1; p >= 0; p--) begin
      if (nbr_valid[p] && nbr_in[p].kind == SM_FWD) begin
        fwd_hit = 1'b1;
        fwd_src = 2'(p);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_UNVISITED;
      visited   <= 1'b0;
      depth     <= CNT_W'(NODES);
      low       <= CNT_W'(NODES);
      counter   <= '0;
      parent    <= '0;
      child     <= '0;
      bridge    <= '0;
      cut       <= 1'b1;
      cut_flag  <= 1'b0;
      root      <= 1'b0;
      nchild    <= '0;
      wait_port <= '0;
      finished  <= 1'b0;
      root_done <= 1'b0;
      for (int p = 0; p < NUM_DIRS; p++) begin
        msg_kind[p] <= SM_NONE;
        msg_val[p]  <= '0;
        msg_cnt[p]  <= '0;
      end
    end else begin
      root_done <= 1'b0;
      for (int p = 0; p < NUM_DIRS; p++) msg_kind[p] <= SM_NONE;
      if (dfs_start) begin
        visited  <= 1'b0;
        depth    <= CNT_W'(NODES);
        low      <= CNT_W'(NODES);
        counter  <= '0;
        parent   <= '0;
        child    <= '0;
        bridge   <= '0;
        cut      <= 1'b1;
        cut_flag <= 1'b0;
        nchild   <= '0;
        finished <= 1'b0;
        root     <= is_root && enable;
        if (is_root && enable) begin
          state   <= S_EXPLORE;
          visited <= 1'b1;
          depth   <= '0;
          low     <= '0;
          counter <= CNT_W'(1);
        end else begin
          state <= S_UNVISITED;
        end
      end else begin
        unique case (state)
          S_UNVISITED: begin
            if (enable && fwd_hit) begin
              visited       <= 1'b1;
              parent[fwd_src] <= 1'b1;
              depth         <= nbr_in[fwd_src].val + 1'b1;
              low           <= nbr_in[fwd_src].val + 1'b1;
              counter       <= nbr_in[fwd_src].cnt + 1'b1;
              state         <= S_EXPLORE;
            end
          end
          S_EXPLORE: begin
            if (fwd_found) begin
              msg_kind[fwd_port] <= SM_FWD;
              msg_val[fwd_port]  <= depth;
              msg_cnt[fwd_port]  <= counter;
              child[fwd_port]    <= 1'b1;
              wait_port          <= fwd_port;
              state              <= S_WAIT;
            end else begin
              low      <= nbr_min;
              cut      <= root ? (nchild >= 3'd2) : cut_flag;
              finished <= 1'b1;
              state    <= S_DONE;
              if (root) begin
                root_done <= 1'b1;
              end else begin
                for (int p = 0; p < NUM_DIRS; p++) begin
                  if (parent[p]) begin
                    msg_kind[p] <= SM_BWD;
                    msg_val[p]  <= nbr_min;
                    msg_cnt[p]  <= counter;
                  end
                end
              end
            end
          end
          S_WAIT: begin
            if (nbr_in[wait_port].kind == SM_BWD) begin
              counter <= nbr_in[wait_port].cnt;
              if (nbr_in[wait_port].val < low) low <= nbr_in[wait_port].val;
              if (depth <= nbr_in[wait_port].val) cut_flag <= 1'b1;
              if (depth <  nbr_in[wait_port].val) bridge[wait_port] <= 1'b1;
              nchild <= nchild + 1'b1;
              state  <= S_EXPLORE;
            end
          end
          default: ;
        endcase
      end
    end
  end

  a_one_parent: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(parent));
endmodule
