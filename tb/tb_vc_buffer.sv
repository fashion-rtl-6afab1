// tb_vc_buffer: random push/pop against a queue model. Checks data order,
// empty/full flags, that a pushed flit is visible on the next cycle and
// that the buffer holds exactly DEPTH flits.
module tb_vc_buffer;
  import fashion_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  logic push, pop, empty, full;
  flit_t din, dout;
  vc_buffer #(.DEPTH(8)) dut (.*);
  flit_t q [$];
  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(empty && !full, "empty after reset");
    // fill to 8
    for (int i = 0; i < 8; i++) begin
      din = '0; din.data = 64'(i) * 64'h0101_0101; push = 1;
      q.push_back(din);
      @(negedge clk);
      check(!empty, "visible one cycle after push");
    end
    push = 0;
    check(full, "full at 8 flits");
    for (int i = 0; i < 2000; i++) begin
      push = !full && ($urandom_range(1, 0) == 1);
      pop  = !empty && ($urandom_range(2, 0) != 0);
      din  = '0;
      din.data = {$urandom, $urandom};
      din.head = $urandom_range(1, 0); din.dest = 8'($urandom);
      if (pop) begin
        check(q.size() > 0 && dout == q[0], "order");
        void'(q.pop_front());
      end
      if (push) q.push_back(din);
      @(negedge clk);
      check(empty == (q.size() == 0) && full == (q.size() == 8), "flags");
    end
    push = 0; pop = 0;
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
