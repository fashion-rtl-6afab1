// tb_crossbar: random selections and enables; every output must carry
// its selected input's flit when enabled and be invalid and zero otherwise.
module tb_crossbar;
  import fashion_pkg::*;
  int checks = 0, failures = 0;
  flit_t in_flit [5], out_flit [5];
  logic [4:0] en, out_valid;
  logic [2:0] sel [5];
  crossbar #(.N(5)) dut (.*);
  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < 5; i++) begin
        in_flit[i] = '0;
        in_flit[i].data = {$urandom, $urandom};
        in_flit[i].dest = 8'($urandom);
        sel[i] = 3'($urandom_range(4, 0));
      end
      en = 5'($urandom);
      #1;
      for (int o = 0; o < 5; o++) begin
        checks++;
        if (out_valid[o] != en[o] || out_flit[o] != (en[o] ? in_flit[sel[o]] : '0)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
