// vc_allocator: assigns output virtual channels to packets.
//
// Every input VC that has finished route computation and waits for an
// output VC raises req with its output port. Per output port a round-robin
// arbiter picks one requester; if that port has a free VC, the requester is
// granted the lowest-numbered free VC. At most one VC is allocated per
// output port per cycle. Combinational grant; the router marks the VC busy
// on the next clock edge and frees it when the tail flit leaves.
// The paper names the VC allocation stage only; this organisation is this
// design's choice.
module vc_allocator
  import fashion_pkg::*;
#(
  parameter int NP = NUM_PORTS,
  parameter int NV = NUM_VC
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NP*NV-1:0]      req,
  input  logic [2:0]            req_port [NP*NV],
  input  logic [NV-1:0]         out_free [NP],
  output logic [NP*NV-1:0]      grant,
  output logic [$clog2(NV)-1:0] grant_vc [NP*NV]
);
  localparam int NR = NP * NV;

  logic [NR-1:0]         preq   [NP];
  logic [NR-1:0]         pgrant [NP];
  logic [$clog2(NR)-1:0] pidx   [NP];
  logic [NP-1:0]         has_free;
  logic [$clog2(NV)-1:0] free_vc [NP];

  always_comb begin
    for (int o = 0; o < NP; o++) begin
      for (int r = 0; r < NR; r++) preq[o][r] = req[r] && (req_port[r] == 3'(o));
      has_free[o] = |out_free[o];
      free_vc[o]  = '0;
      for (int v = NV-1; v >= 0; v--) if (out_free[o][v]) free_vc[o] = $clog2(NV)'(v);
    end
  end

  for (genvar o = 0; o < NP; o++) begin : g_out
    rr_arbiter #(.N(NR)) u_arb (
      .clk, .rst_n, .req(preq[o]), .advance(has_free[o]),
      .grant(pgrant[o]), .grant_idx(pidx[o])
    );
  end

  always_comb begin
    grant = '0;
    for (int r = 0; r < NR; r++) grant_vc[r] = '0;
    for (int o = 0; o < NP; o++) begin
      if (has_free[o] && |pgrant[o]) begin
        grant[pidx[o]]    = 1'b1;
        grant_vc[pidx[o]] = free_vc[o];
      end
    end
  end
endmodule
