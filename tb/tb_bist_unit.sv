// tb_bist_unit: two BIST units joined by one link (E port of A to W port
// of B) through a channel model that can break either direction or flip
// a bit. Ports with no partner see a silent link. Checks link_ok for
// every port after a good link, a dead A->B wire, a dead B->A wire, a
// corrupted B->A wire and a single-sided test (B not started), and that
// done comes TEST_CYCLES+2 cycles after start.
module tb_bist_unit;
  import fashion_pkg::*;
  localparam int TC = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic start_a, start_b, run_a, run_b, done_a, done_b;
  link_t a_in [4], a_out [4], b_in [4], b_out [4];
  logic [3:0] ok_a, ok_b;
  bit cut_ab, cut_ba, flip_ba;

  bist_unit #(.TEST_CYCLES(TC), .SEED(32'hACE1_0001)) u_a (
    .clk, .rst_n, .start(start_a), .running(run_a), .done(done_a),
    .in_link(a_in), .out_link(a_out), .link_ok(ok_a));
  bist_unit #(.TEST_CYCLES(TC), .SEED(32'h0BAD_F00D)) u_b (
    .clk, .rst_n, .start(start_b), .running(run_b), .done(done_b),
    .in_link(b_in), .out_link(b_out), .link_ok(ok_b));

  always_comb begin
    for (int p = 0; p < 4; p++) begin a_in[p] = '0; b_in[p] = '0; end
    b_in[P_W] = cut_ab ? '0 : a_out[P_E];
    a_in[P_E] = cut_ba ? '0 : b_out[P_W];
    if (flip_ba) a_in[P_E].flit.data[5] = ~a_in[P_E].flit.data[5];
  end

  task automatic test(input bit both, output int lat);
    @(negedge clk); start_a = 1; start_b = both; @(negedge clk); start_a = 0; start_b = 0;
    lat = 1;
    while (!done_a) begin @(negedge clk); lat++; end
    @(negedge clk);
  endtask

  initial begin
    int lat;
    start_a = 0; start_b = 0; cut_ab = 0; cut_ba = 0; flip_ba = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(ok_a == 0 && ok_b == 0, "no link valid before a test");
    test(1, lat);
    check(lat == TC + 2, $sformatf("done after %0d cycles, exp %0d", lat, TC + 2));
    check(ok_a == 4'b1000 && ok_b == 4'b0100, "good link passes, open ports fail");
    cut_ab = 1; test(1, lat);
    check(ok_a == 4'b0000 && ok_b == 4'b0000, "dead A->B wire fails at both ends");
    cut_ab = 0; cut_ba = 1; test(1, lat);
    check(ok_a == 4'b0000 && ok_b == 4'b0000, "dead B->A wire fails at both ends");
    cut_ba = 0; flip_ba = 1; test(1, lat);
    check(ok_a[P_E] == 1'b0, "corrupted echo fails");
    flip_ba = 0; test(1, lat);
    check(ok_a == 4'b1000 && ok_b == 4'b0100, "repaired link passes again");
    test(0, lat);
    check(ok_a == 4'b0000, "silent neighbour fails");
    check(!run_a && a_out[P_E].test == 1'b0, "test mode off after the test");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
