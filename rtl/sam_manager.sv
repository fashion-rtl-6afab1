// sam_manager: the system-manager side of the fault diagnosis and
// recovery sequence, placed beside the root node.
//
// A run starts on an OS request (os_start) or when the built-in period
// timer expires (PERIOD cycles, 0 disables it). The manager then
//   1. stalls the routers and starts every BIST unit (bist_start), waiting
//      BIST_WAIT cycles for the link tests to finish;
//   2. clears all SAM state (reconf_start), waits three cycles for the
//      valid bits to settle and launches a DFS round from the root
//      (dfs_start);
//   3. on the root's root_done takes the counter, the number of nodes the
//      round reached; the first round's counter is the size of the maximal
//      connected subgraph (gmax_size);
//   4. pulses round_end, and also prune unless the counter has reached 2
//      (the paper's stop rule), the round removed no node, or ROUND_LIMIT
//      rounds have run; after a prune it waits two cycles for the valid
//      bits to settle and launches the next round without clearing the
//      tables.
// A DFS round that does not finish within DFS_TIMEOUT cycles (dead root)
// ends the run with error set. busy covers the whole run, bist_mode only
// step 1. cycles counts the cycles from the first dfs_start to done.
// The sequencing follows the paper's algorithm; the global start/prune
// wires, timeouts and the no-progress stop are this design's choices.
module sam_manager
  import fashion_pkg::*;
#(
  parameter int PERIOD      = 0,
  parameter int BIST_WAIT   = 40,
  parameter int DFS_TIMEOUT = 4096,
  parameter int ROUND_LIMIT = 255
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             os_start,
  input  logic             root_done,
  input  logic [CNT_W-1:0] root_counter,
  output logic             bist_start,
  output logic             bist_mode,
  output logic             reconf_start,
  output logic             dfs_start,
  output logic             round_end,
  output logic             prune,
  output logic             first_round,
  output logic             busy,
  output logic             done,
  output logic             error,
  output logic [CNT_W-1:0] gmax_size,
  output logic [7:0]       rounds,
  output logic [15:0]      cycles
);
  typedef enum logic [2:0] {M_IDLE, M_BIST, M_DFS, M_WAIT, M_SETTLE} mstate_e;

  mstate_e          state;
  logic [15:0]      timer;
  logic [15:0]      wait_cnt;
  logic [CNT_W-1:0] prev_count;
  logic             timer_fire;

  assign timer_fire = (PERIOD != 0) && (timer == 16'(PERIOD - 1));
  assign busy       = (state != M_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= M_IDLE;
      timer        <= '0;
      wait_cnt     <= '0;
      prev_count   <= '0;
      bist_start   <= 1'b0;
      bist_mode    <= 1'b0;
      reconf_start <= 1'b0;
      dfs_start    <= 1'b0;
      round_end    <= 1'b0;
      prune        <= 1'b0;
      first_round  <= 1'b0;
      done         <= 1'b0;
      error        <= 1'b0;
      gmax_size    <= '0;
      rounds       <= '0;
      cycles       <= '0;
    end else begin
      bist_start   <= 1'b0;
      reconf_start <= 1'b0;
      dfs_start    <= 1'b0;
      round_end    <= 1'b0;
      prune        <= 1'b0;
      timer        <= (timer_fire || state != M_IDLE) ? '0 : timer + 1'b1;
      if (state != M_IDLE && state != M_BIST) cycles <= cycles + 1'b1;
      unique case (state)
        M_IDLE: begin
          if (os_start || timer_fire) begin
            state      <= M_BIST;
            bist_start <= 1'b1;
            bist_mode  <= 1'b1;
            done       <= 1'b0;
            error      <= 1'b0;
            wait_cnt   <= '0;
          end
        end
        M_BIST: begin
          wait_cnt <= wait_cnt + 1'b1;
          if (wait_cnt == 16'(BIST_WAIT)) begin
            bist_mode    <= 1'b0;
            reconf_start <= 1'b1;
            first_round  <= 1'b1;
            rounds       <= '0;
            cycles       <= '0;
            prev_count   <= '0;
            wait_cnt     <= '0;
            state        <= M_SETTLE;
          end
        end
        M_DFS: begin
          dfs_start <= 1'b1;
          if (rounds != 8'd0) first_round <= 1'b0;
          rounds    <= rounds + 1'b1;
          wait_cnt  <= '0;
          state     <= M_WAIT;
        end
        M_WAIT: begin
          wait_cnt <= wait_cnt + 1'b1;
          if (root_done) begin
            round_end  <= 1'b1;
            prev_count <= root_counter;
            if (first_round) gmax_size <= root_counter;
            if (root_counter <= CNT_W'(2) || root_counter == prev_count ||
                rounds == 8'(ROUND_LIMIT)) begin
              state <= M_IDLE;
              done  <= 1'b1;
            end else begin
              prune    <= 1'b1;
              wait_cnt <= '0;
              state    <= M_SETTLE;
            end
          end else if (wait_cnt == 16'(DFS_TIMEOUT)) begin
            state <= M_IDLE;
            done  <= 1'b1;
            error <= 1'b1;
          end
        end
        M_SETTLE: begin
          wait_cnt    <= wait_cnt + 1'b1;
          if (wait_cnt == 16'd2) state <= M_DFS;
        end
        default: state <= M_IDLE;
      endcase
    end
  end
endmodule
