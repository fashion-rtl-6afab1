// crossbar: the router's NUM_PORTS x NUM_PORTS flit switch (switch
// traversal stage).
//
// Output o carries the flit of input sel[o] when en[o] is set, and an
// invalid flit otherwise. Purely combinational; the router registers the
// outputs. The selection comes from the switch allocator.
module crossbar
  import fashion_pkg::*;
#(
  parameter int N = NUM_PORTS
) (
  input  flit_t                 in_flit [N],
  input  logic  [N-1:0]         en,
  input  logic  [$clog2(N)-1:0] sel [N],
  output logic  [N-1:0]         out_valid,
  output flit_t                 out_flit [N]
);
  always_comb begin
    for (int o = 0; o < N; o++) begin
      out_valid[o] = en[o];
      out_flit[o]  = en[o] ? in_flit[sel[o]] : '0;
    end
  end
endmodule
