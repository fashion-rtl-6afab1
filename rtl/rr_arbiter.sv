// rr_arbiter: round-robin arbiter used by the VC and switch allocators.
//
// grant is one-hot among req (or zero). The search starts just after the
// last granted requester; the pointer moves only when advance is high so a
// grant that is not used keeps its priority.
module rr_arbiter #(
  parameter int N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic [N-1:0]         grant,
  output logic [$clog2(N)-1:0] grant_idx
);
  localparam int IW = $clog2(N);
  logic [IW-1:0] ptr;

  always_comb begin
    grant     = '0;
    grant_idx = '0;
    for (int k = N; k >= 1; k--) begin
      int idx;
      idx = (int'(ptr) + k) % N;
      if (req[idx]) begin
        grant     = '0;
        grant[idx] = 1'b1;
        grant_idx = IW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= IW'(N-1);
    else if (advance && |grant) ptr <= grant_idx;
  end
endmodule
