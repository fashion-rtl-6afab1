// tb_sam_manager: drives the manager with a model of the root that answers
// each DFS round after a fixed delay with a scripted counter. Checks the
// sequence BIST -> reconf_start -> dfs_start -> round_end/prune -> ...,
// the stop rule counter <= 2 (a run passing through 3 must go on), the
// no-progress stop, gmax_size (first
// round's counter), the round count, the BIST wait, the DFS timeout error
// and the period timer.
module tb_sam_manager;
  import fashion_pkg::*;
  localparam int BW = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic os_start, root_done;
  logic [CNT_W-1:0] root_counter;
  logic bist_start, bist_mode, reconf_start, dfs_start, round_end, prune, first_round;
  logic busy, done, error;
  logic [CNT_W-1:0] gmax_size;
  logic [7:0] rounds;
  logic [15:0] cycles;
  logic timer_busy;

  sam_manager #(.PERIOD(0), .BIST_WAIT(BW), .DFS_TIMEOUT(200)) dut (.*);
  // second instance with the period timer
  logic t_bist_start, t_busy;
  sam_manager #(.PERIOD(50), .BIST_WAIT(BW), .DFS_TIMEOUT(20)) dut_t (
    .clk, .rst_n, .os_start(1'b0), .root_done(1'b0), .root_counter('0),
    .bist_start(t_bist_start), .bist_mode(), .reconf_start(), .dfs_start(), .round_end(),
    .prune(), .first_round(), .busy(t_busy), .done(), .error(), .gmax_size(), .rounds(), .cycles()
  );

  int script [$];
  int n_dfs, n_prune, n_end, n_bist, n_reconf, n_first_end;
  int t_bist_at, t_dfs_at, cyc;
  bit answer = 1;

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (bist_start) begin n_bist++; t_bist_at = cyc; end
    if (reconf_start) n_reconf++;
    if (prune) n_prune++;
    if (round_end) begin n_end++; if (first_round) n_first_end++; end
    if (dfs_start) begin
      n_dfs++;
      if (n_dfs == 1) t_dfs_at = cyc;
      check(!bist_mode, "dfs after BIST");
    end
  end

  // root model: answer 7 cycles after dfs_start
  initial begin
    root_done = 0; root_counter = 0;
    forever begin
      @(posedge clk);
      if (rst_n && dfs_start && answer) begin
        repeat (6) @(posedge clk);
        @(negedge clk);
        root_done = 1; root_counter = CNT_W'(script.pop_front());
        @(negedge clk);
        root_done = 0;
      end
    end
  end

  task automatic go(input int exp_rounds, input int exp_gmax, input bit exp_err);
    n_dfs = 0; n_prune = 0; n_end = 0; n_bist = 0; n_reconf = 0; n_first_end = 0;
    @(negedge clk); os_start = 1; @(negedge clk); os_start = 0;
    check(busy && bist_mode, "busy and bist_mode after start");
    wait (done);
    repeat (2) @(negedge clk);
    check(!busy, "idle after done");
    check(n_bist == 1 && n_reconf == 1, "one BIST and one clear per run");
    check(t_dfs_at - t_bist_at >= BW, "DFS waits for the BIST");
    check(error == exp_err, "error flag");
    if (!exp_err) begin
      check(int'(rounds) == exp_rounds && n_dfs == exp_rounds, $sformatf("rounds %0d exp %0d", rounds, exp_rounds));
      check(n_end == exp_rounds && n_prune == exp_rounds - 1, "round_end / prune counts");
      check(n_first_end == 1, "first_round only on the first round_end");
      check(int'(gmax_size) == exp_gmax, "gmax_size");
    end
  endtask

  initial begin
    os_start = 0; cyc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // counters 10, 7, 4, 2 -> four rounds
    script = '{10, 7, 4, 2};
    go(4, 10, 0);
    // 6, 3, 2: three nodes left is not yet the end
    script = '{6, 3, 2};
    go(3, 6, 0);
    // no progress: 5, 5 -> stop after two rounds
    script = '{5, 5};
    go(2, 5, 0);
    // single node: counter 1 -> one round
    script = '{1};
    go(1, 1, 0);
    // dead root: no answer -> timeout error
    answer = 0;
    go(0, 0, 1);
    answer = 1;
    // period timer of the second instance fires on its own
    begin
      int seen = 0;
      repeat (120) begin @(posedge clk); if (t_bist_start) seen++; end
      check(seen >= 1, "period timer starts a run");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
