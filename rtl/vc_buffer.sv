// vc_buffer: flit FIFO of one virtual channel of an input port.
//
// A circular buffer of DEPTH flits (8 in the paper's configuration) with
// first-word-fall-through output: dout shows the oldest flit whenever
// empty is low. push and pop may happen in the same cycle. Pushing into a
// full buffer is a protocol error (credit flow control prevents it) and is
// caught by an assertion. The paper names the VC buffers only; the FIFO
// organisation is this design's choice.
module vc_buffer
  import fashion_pkg::*;
#(
  parameter int DEPTH = VC_DEPTH
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  push,
  input  flit_t din,
  input  logic  pop,
  output flit_t dout,
  output logic  empty,
  output logic  full
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t          mem [DEPTH];
  logic [AW-1:0]  rd_ptr, wr_ptr;
  logic [AW:0]    count;

  assign empty = (count == '0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign dout  = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
