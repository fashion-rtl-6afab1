// tb_self_reconfiguring_unit: directed cases for the pruning / turn
// prohibition rule. Checks the degree comparators, that only a visited,
// non-root, non-cut depth-first-tree leaf is removed on a prune pulse,
// that exactly the turns between its valid neighbours are forbidden (one
// pair for degree 2, three pairs for degree 3), that unreached nodes go
// out of service at the end of the first round, and that reconf_start
// restores the table. The table changes on the cycle after the pulse.
module tb_self_reconfiguring_unit;
  import fashion_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic reconf_start, prune, round_end, first_round;
  logic [3:0] nbr_valid, child;
  logic visited, cut, root;
  logic [2:0] degree;
  logic leaf, min_degree, removed, out_of_service;
  turn_tbl_t permit;

  self_reconfiguring_unit dut (.*);

  function automatic turn_tbl_t expect_tbl(input logic [3:0] v, input bit rem);
    turn_tbl_t t;
    for (int a = 0; a < 4; a++)
      for (int b = 0; b < 4; b++)
        t[a][b] = (a != b) && !(rem && v[a] && v[b]);
    return t;
  endfunction

  task automatic pulse_prune();
    @(negedge clk); prune = 1; @(negedge clk); prune = 0;
  endtask
  task automatic restart();
    @(negedge clk); reconf_start = 1; @(negedge clk); reconf_start = 0;
    check(!removed && !out_of_service && permit == expect_tbl(4'b0, 0), "reconf_start clears");
  endtask

  initial begin
    reconf_start = 0; prune = 0; round_end = 0; first_round = 0;
    nbr_valid = 0; child = 0; visited = 0; cut = 0; root = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // comparators
    for (int v = 0; v < 16; v++) begin
      nbr_valid = 4'(v);
      #1;
      check(int'(degree) == $countones(4'(v)), "degree");
      check(leaf == ($countones(4'(v)) == 1) && min_degree == ($countones(4'(v)) == 2), "comparators");
    end
    check(permit == expect_tbl(4'b0, 0), "reset table allows all non-U turns");
    // degree-2 leaf (valid W and N): forbids W->N and N->W only
    nbr_valid = 4'b0101; visited = 1; child = 0;
    pulse_prune();
    check(removed, "degree-2 leaf removed");
    check(permit == expect_tbl(4'b0101, 1), "degree-2 leaf forbids one pair");
    check(!permit[0][2] && !permit[2][0] && permit[0][1] && permit[3][2], "pair N<->W");
    // a second prune pulse changes nothing
    nbr_valid = 4'b1111;
    pulse_prune();
    check(permit == expect_tbl(4'b0101, 1), "removed node keeps its table");
    restart();
    // degree-3 leaf: three pairs
    nbr_valid = 4'b1011;
    pulse_prune();
    check(removed && permit == expect_tbl(4'b1011, 1), "degree-3 leaf forbids three pairs");
    restart();
    // not removed: has a child, is root, is cut, not visited
    nbr_valid = 4'b0011; child = 4'b0001;
    pulse_prune();
    check(!removed && permit == expect_tbl(4'b0, 0), "node with child kept");
    child = 0; root = 1;
    pulse_prune();
    check(!removed, "root kept");
    root = 0; cut = 1;
    pulse_prune();
    check(!removed, "cut vertex kept");
    cut = 0; visited = 0;
    pulse_prune();
    check(!removed, "unvisited kept");
    // out of service only at the end of the first round
    @(negedge clk); round_end = 1; first_round = 0; @(negedge clk); round_end = 0;
    check(!out_of_service, "no oos on later rounds");
    @(negedge clk); round_end = 1; first_round = 1; @(negedge clk); round_end = 0;
    check(out_of_service, "unreached node out of service");
    restart();
    // degree-1 leaf: removed, no turn to forbid
    visited = 1; nbr_valid = 4'b1000;
    pulse_prune();
    check(removed && permit == expect_tbl(4'b0, 0), "degree-1 leaf removed, table unchanged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
