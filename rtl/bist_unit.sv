// bist_unit: Built-In Self-Test of the four links of a router.
//
// While a test runs, the unit drives every outgoing link in test mode with
// a 32-bit signature from an LFSR (the test control generator) and echoes,
// in the low half of the same word, the signature it received one cycle
// earlier from that neighbour. The response analysis compares the echo
// coming back on each incoming link with the signature sent one cycle
// before; MATCH_NEED consecutive match_cnt within TEST_CYCLES cycles pass
// the link. A link that gives no echo (dead wire, dead or absent
// neighbour) or a wrong echo fails, and its link_ok bit - the source of the
// neighbor table's valid bit - is cleared (the BIST control sub-unit).
// Both ends of a link must test at the same time; the manager starts all
// BIST units together. Timing: start is a one-cycle pulse, done pulses
// TEST_CYCLES+2 cycles later and link_ok is valid from then on.
// The three sub-blocks follow the paper's BIST figure; the signature
// format, echo scheme and pass rule are this design's choices.
module bist_unit
  import fashion_pkg::*;
#(
  parameter int          TEST_CYCLES = 32,
  parameter int          MATCH_NEED  = 8,
  parameter logic [31:0] SEED        = 32'h1D2C_3B4A
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                running,
  output logic                done,
  input  link_t               in_link  [NUM_DIRS],
  output link_t               out_link [NUM_DIRS],
  output logic [NUM_DIRS-1:0] link_ok
);
  localparam int TCW = $clog2(TEST_CYCLES + 1);
  localparam int MCW = $clog2(MATCH_NEED + 1);

  // test control generator
  logic [31:0] sig, sig_d;
  // response analysis
  logic [31:0]    echo_q  [NUM_DIRS];
  logic [MCW-1:0] match_cnt [NUM_DIRS];
  logic [NUM_DIRS-1:0] passed;
  // control sub-unit
  logic [TCW-1:0] cyc;

  function automatic logic [31:0] lfsr_next(input logic [31:0] s);
    return {s[30:0], s[31] ^ s[21] ^ s[1] ^ s[0]};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sig     <= SEED;
      sig_d   <= '0;
      running <= 1'b0;
      done    <= 1'b0;
      cyc     <= '0;
      passed  <= '0;
      link_ok <= '0;
      for (int p = 0; p < NUM_DIRS; p++) begin
        echo_q[p]  <= '0;
        match_cnt[p] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start) begin
        running <= 1'b1;
        cyc     <= '0;
        passed  <= '0;
        for (int p = 0; p < NUM_DIRS; p++) begin
          match_cnt[p] <= '0;
          echo_q[p]  <= '0;
        end
      end else if (running) begin
        sig   <= lfsr_next(sig);
        sig_d <= sig;
        cyc   <= cyc + 1'b1;
        for (int p = 0; p < NUM_DIRS; p++) begin
          echo_q[p] <= in_link[p].test ? in_link[p].flit.data[63:32] : '0;
          if (in_link[p].test && in_link[p].flit.data[31:0] == sig_d && cyc > TCW'(1)) begin
            if (match_cnt[p] != MCW'(MATCH_NEED)) match_cnt[p] <= match_cnt[p] + 1'b1;
            if (match_cnt[p] == MCW'(MATCH_NEED - 1)) passed[p] <= 1'b1;
          end else begin
            match_cnt[p] <= '0;
          end
        end
        if (cyc == TCW'(TEST_CYCLES)) begin
          running <= 1'b0;
          done    <= 1'b1;
          link_ok <= passed;
        end
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NUM_DIRS; p++) begin
      out_link[p]           = '0;
      out_link[p].test      = running;
      out_link[p].flit.data = running ? {sig, echo_q[p]} : '0;
    end
  end
endmodule
