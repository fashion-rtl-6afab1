// tb_switch_allocator: random requests; checks that every grant answers a
// request, at most one input per output and one VC per input, that the
// crossbar select matches, that a lone request is always granted, and that
// two inputs competing for one output alternate (round-robin).
module tb_switch_allocator;
  import fashion_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  logic [3:0] req [5];
  logic [2:0] req_port [5][4];
  logic [4:0] in_grant, out_en;
  logic [1:0] in_vc [5];
  logic [2:0] out_sel [5];
  switch_allocator #(.NP(5), .NV(4)) dut (.*);
  initial begin
    int last, alternations;
    for (int i = 0; i < 5; i++) begin req[i] = 0; for (int v = 0; v < 4; v++) req_port[i][v] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      int nreq;
      nreq = 0;
      for (int i = 0; i < 5; i++) begin
        req[i] = (t % 3 == 0) ? 4'($urandom) : 4'b0;
        for (int v = 0; v < 4; v++) req_port[i][v] = 3'($urandom_range(4, 0));
      end
      if (t % 3 != 0) begin req[t % 5] = 4'b0100; nreq = 1; end
      #1;
      for (int o = 0; o < 5; o++) if (out_en[o]) begin
        int i;
        i = int'(out_sel[o]);
        check(in_grant[i] && req[i][in_vc[i]] && req_port[i][in_vc[i]] == 3'(o), "grant answers a request");
      end
      for (int i = 0; i < 5; i++) if (in_grant[i]) begin
        int hits; hits = 0;
        for (int o = 0; o < 5; o++) if (out_en[o] && out_sel[o] == 3'(i)) hits++;
        check(hits == 1, "one output per granted input");
      end
      if (nreq == 1) check(in_grant == 5'(1 << (t % 5)) && in_vc[t % 5] == 2'd2, "lone request granted");
      @(negedge clk);
    end
    // fairness: inputs 0 and 3 both want output 1
    for (int i = 0; i < 5; i++) req[i] = 0;
    req[0] = 4'b0001; req[3] = 4'b0001; req_port[0][0] = 3'd1; req_port[3][0] = 3'd1;
    last = -1; alternations = 0;
    for (int t = 0; t < 20; t++) begin
      #1;
      check($onehot(in_grant), "one winner");
      if (in_grant[0] && last == 3) alternations++;
      if (in_grant[3] && last == 0) alternations++;
      last = in_grant[0] ? 0 : 3;
      @(negedge clk);
    end
    check(alternations == 19, "round-robin alternates");
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
