// tb_vc_allocator: random requests and free-VC masks; checks that every
// grant answers a request, gives a VC that is free on the requested port
// (the lowest free one), that each output port grants at most once, and
// that a port with a free VC and a request always grants.
module tb_vc_allocator;
  import fashion_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  logic [19:0] req, grant;
  logic [2:0] req_port [20];
  logic [3:0] out_free [5];
  logic [1:0] grant_vc [20];
  vc_allocator #(.NP(5), .NV(4)) dut (.*);
  initial begin
    req = 0;
    for (int r = 0; r < 20; r++) req_port[r] = 0;
    for (int o = 0; o < 5; o++) out_free[o] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      req = 20'($urandom) & 20'($urandom);
      for (int r = 0; r < 20; r++) req_port[r] = 3'($urandom_range(4, 0));
      for (int o = 0; o < 5; o++) out_free[o] = 4'($urandom);
      #1;
      for (int o = 0; o < 5; o++) begin
        int ng, nr, lowest; ng = 0; nr = 0; lowest = -1;
        for (int v = 3; v >= 0; v--) if (out_free[o][v]) lowest = v;
        for (int r = 0; r < 20; r++) begin
          if (req[r] && req_port[r] == 3'(o)) nr++;
          if (grant[r] && req_port[r] == 3'(o)) begin
            ng++;
            check(req[r], "grant answers a request");
            check(int'(grant_vc[r]) == lowest, "lowest free VC granted");
          end
        end
        check(ng <= 1, "one grant per port");
        check(ng == ((nr > 0 && lowest >= 0) ? 1 : 0), "work conserving");
      end
      @(negedge clk);
    end
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
