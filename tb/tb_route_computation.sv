// tb_route_computation: writes random routing table entries, reads them
// back through all lookup ports against a model table, and checks the ok
// flag against the rule: local port, or a valid output port and (for a
// mesh-to-mesh turn) a permitted turn.
module tb_route_computation;
  import fashion_pkg::*;
  localparam int NODES = 16, NL = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  logic cfg_we;
  logic [2:0] cfg_inport, cfg_port;
  logic [NODE_W-1:0] cfg_dest;
  logic [3:0] nbr_valid;
  turn_tbl_t permit;
  logic [2:0] lk_inport [NL], lk_port [NL];
  logic [NODE_W-1:0] lk_dest [NL];
  logic [NL-1:0] lk_ok;
  route_computation #(.NODES(NODES), .NL(NL)) dut (.*);
  int model [5][NODES];
  initial begin
    cfg_we = 0; cfg_inport = 0; cfg_port = 0; cfg_dest = 0; nbr_valid = 0; permit = '0;
    for (int l = 0; l < NL; l++) begin lk_inport[l] = 0; lk_dest[l] = 0; end
    for (int p = 0; p < 5; p++) for (int d = 0; d < NODES; d++) model[p][d] = 4;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      // write one entry
      cfg_we = 1; cfg_inport = 3'($urandom_range(4, 0)); cfg_dest = NODE_W'($urandom_range(NODES-1, 0));
      cfg_port = 3'($urandom_range(4, 0));
      @(negedge clk);
      model[cfg_inport][cfg_dest] = int'(cfg_port);
      cfg_we = 0;
      nbr_valid = 4'($urandom);
      permit = turn_tbl_t'($urandom);
      for (int l = 0; l < NL; l++) begin
        lk_inport[l] = 3'($urandom_range(4, 0));
        lk_dest[l] = NODE_W'($urandom_range(NODES-1, 0));
      end
      #1;
      for (int l = 0; l < NL; l++) begin
        int op, ip;
        bit exp_ok;
        ip = int'(lk_inport[l]);
        op = model[ip][lk_dest[l]];
        exp_ok = (op == 4) || (nbr_valid[op] && (ip == 4 || permit[ip][op]));
        check(int'(lk_port[l]) == op, "table read back");
        check(lk_ok[l] == exp_ok, "ok rule");
      end
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
