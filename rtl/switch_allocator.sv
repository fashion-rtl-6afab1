// switch_allocator: separable input-first switch allocator.
//
// Stage 1: each input port picks one of its requesting VCs round-robin.
// Stage 2: each output port picks one of the inputs whose stage-1 winner
// wants it, again round-robin. A VC may request only when it holds a flit,
// owns an output VC and that output VC has a credit (the router forms req).
// Outputs: per input the granted VC, per output the crossbar select.
// Combinational; arbiter pointers advance only on end-to-end grants.
// The paper names the switch allocation stage only; the separable
// round-robin organisation is this design's choice.
module switch_allocator
  import fashion_pkg::*;
#(
  parameter int NP = NUM_PORTS,
  parameter int NV = NUM_VC
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NV-1:0]         req      [NP],
  input  logic [2:0]            req_port [NP][NV],
  output logic [NP-1:0]         in_grant,
  output logic [$clog2(NV)-1:0] in_vc    [NP],
  output logic [NP-1:0]         out_en,
  output logic [$clog2(NP)-1:0] out_sel  [NP]
);
  logic [NV-1:0]         s1_grant [NP];
  logic [$clog2(NV)-1:0] s1_idx   [NP];
  logic [NP-1:0]         s2_req   [NP];
  logic [NP-1:0]         s2_grant [NP];
  logic [$clog2(NP)-1:0] s2_idx   [NP];

  for (genvar i = 0; i < NP; i++) begin : g_in
    rr_arbiter #(.N(NV)) u_arb (
      .clk, .rst_n, .req(req[i]), .advance(in_grant[i]),
      .grant(s1_grant[i]), .grant_idx(s1_idx[i])
    );
  end

  always_comb begin
    for (int o = 0; o < NP; o++) begin
      for (int i = 0; i < NP; i++) begin
        s2_req[o][i] = (|req[i]) && (req_port[i][s1_idx[i]] == 3'(o));
      end
    end
  end

  for (genvar o = 0; o < NP; o++) begin : g_out
    rr_arbiter #(.N(NP)) u_arb (
      .clk, .rst_n, .req(s2_req[o]), .advance(1'b1),
      .grant(s2_grant[o]), .grant_idx(s2_idx[o])
    );
  end

  always_comb begin
    in_grant = '0;
    for (int o = 0; o < NP; o++) begin
      out_en[o]  = |s2_grant[o];
      out_sel[o] = s2_idx[o];
      if (|s2_grant[o]) in_grant[s2_idx[o]] = 1'b1;
    end
    for (int i = 0; i < NP; i++) in_vc[i] = s1_idx[i];
  end

  for (genvar o = 0; o < NP; o++) begin : g_chk
    a_onehot_out: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(s2_grant[o]));
  end
endmodule
