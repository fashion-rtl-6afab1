// fashion_router: a five-port input-queued virtual-channel wormhole router
// with a Self-Awareness Module, the Fashion router.
//
// Datapath: every input port has NUM_VC vc_buffer FIFOs of VC_DEPTH flits
// (4 x 8 in the paper's configuration), a route_computation table lookup
// per VC, a vc_allocator, a separable switch_allocator and a crossbar
// feeding registered outputs. Flow control is credit based, one credit per
// flit and VC. A packet's VC moves IDLE -> VA -> ACTIVE: the head flit at
// the front of an idle VC is routed (1 cycle), then waits for an output VC
// (>= 1 cycle), then each flit competes for the switch and leaves on the
// cycle after its grant; the tail frees the output VC. Zero-load latency
// is four cycles from a head entering an input buffer to it appearing on
// the output link.
//
// The SAM (sam) tests the links, runs this node's part of the DFS and
// prune rounds and owns the turn table that route computation checks.
// While bist_mode is high the four mesh outputs carry the BIST test words
// instead of flits; while stall is high no flit is switched (the paper
// stalls traffic while the SAM works). Route lookups that pick an invalid
// port or a forbidden turn are counted in rc_violations.
// The router pipeline is conventional (RC, VA, SA, ST as the paper
// names); its organisation is this design's choice.
module fashion_router
  import fashion_pkg::*;
#(
  parameter int          NODES       = 64,
  parameter int          TEST_CYCLES = 32,
  parameter logic [31:0] SEED        = 32'h1D2C_3B4A
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                is_root,
  // manager controls
  input  logic                bist_start,
  input  logic                bist_mode,
  input  logic                stall,
  input  logic                reconf_start,
  input  logic                dfs_start,
  input  logic                round_end,
  input  logic                prune,
  input  logic                first_round,
  // physical channels, index = port_e
  input  link_t               in_link    [NUM_PORTS],
  output credit_t             out_credit [NUM_PORTS],
  output link_t               out_link   [NUM_PORTS],
  input  credit_t             in_credit  [NUM_PORTS],
  // SAM sideband
  input  sam_link_t           sam_in     [NUM_DIRS],
  output sam_link_t           sam_out    [NUM_DIRS],
  // routing table programming
  input  logic                cfg_we,
  input  logic [2:0]          cfg_inport,
  input  logic [NODE_W-1:0]   cfg_dest,
  input  logic [2:0]          cfg_port,
  // status
  output logic [NUM_DIRS-1:0] valid,
  output turn_tbl_t           permit,
  output logic                cut_class,
  output logic [NUM_DIRS-1:0] bridge_class,
  output logic                removed,
  output logic                out_of_service,
  output logic                root_done,
  output logic [CNT_W-1:0]    counter,
  output logic [15:0]         rc_violations
);
  localparam int NP = NUM_PORTS;
  localparam int NV = NUM_VC;
  localparam int NR = NP * NV;

  typedef enum logic [1:0] {VS_IDLE, VS_VA, VS_ACTIVE} vstate_e;

  // ---------------- SAM ----------------
  link_t     test_in  [NUM_DIRS];
  link_t     test_out [NUM_DIRS];
  logic      bist_running;
  logic [NUM_DIRS-1:0] link_ok, parent, child, bridge, route_valid;
  logic      cut, visited;
  logic [CNT_W-1:0] depth, low;

  for (genvar p = 0; p < NUM_DIRS; p++) begin : g_tin
    assign test_in[p] = in_link[p];
  end

  sam #(.NODES(NODES), .TEST_CYCLES(TEST_CYCLES), .SEED(SEED)) u_sam (
    .clk, .rst_n, .is_root,
    .bist_start, .reconf_start, .dfs_start, .round_end, .prune, .first_round,
    .test_in, .test_out, .bist_running,
    .sam_in, .sam_out,
    .link_ok, .valid, .route_valid, .parent, .child, .bridge, .cut, .bridge_class, .cut_class,
    .visited, .depth, .low, .counter, .removed, .out_of_service, .permit, .root_done
  );

  // ---------------- input buffers ----------------
  flit_t   buf_dout  [NP][NV];
  logic    buf_empty [NP][NV];
  logic    buf_full  [NP][NV];
  logic    buf_pop   [NP][NV];

  for (genvar p = 0; p < NP; p++) begin : g_ip
    for (genvar v = 0; v < NV; v++) begin : g_vc
      vc_buffer #(.DEPTH(VC_DEPTH)) u_buf (
        .clk, .rst_n,
        .push (in_link[p].valid && !in_link[p].test && in_link[p].flit.vc == VC_W'(v)),
        .din  (in_link[p].flit),
        .pop  (buf_pop[p][v]),
        .dout (buf_dout[p][v]),
        .empty(buf_empty[p][v]),
        .full (buf_full[p][v])
      );
    end
  end

  // ---------------- per-VC state ----------------
  vstate_e         vstate [NP][NV];
  logic [2:0]      vroute [NP][NV];
  logic [VC_W-1:0] voutvc [NP][NV];
  logic [NV-1:0]   ovc_busy [NP];
  logic [3:0]      credits  [NP][NV];

  // ---------------- route computation ----------------
  logic [2:0]        lk_inport [NR];
  logic [NODE_W-1:0] lk_dest   [NR];
  logic [2:0]        lk_port   [NR];
  logic [NR-1:0]     lk_ok;

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      for (int v = 0; v < NV; v++) begin
        lk_inport[p*NV+v] = 3'(p);
        lk_dest[p*NV+v]   = buf_dout[p][v].dest;
      end
    end
  end

  route_computation #(.NODES(NODES), .NL(NR)) u_rc (
    .clk, .rst_n, .cfg_we, .cfg_inport, .cfg_dest, .cfg_port,
    .nbr_valid(route_valid), .permit,
    .lk_inport, .lk_dest, .lk_port, .lk_ok
  );

  // ---------------- VC allocation ----------------
  logic [NR-1:0]    va_req;
  logic [2:0]       va_port [NR];
  logic [NV-1:0]    ovc_free [NP];
  logic [NR-1:0]    va_grant;
  logic [VC_W-1:0]  va_vc [NR];

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      ovc_free[p] = ~ovc_busy[p];
      for (int v = 0; v < NV; v++) begin
        va_req[p*NV+v]  = (vstate[p][v] == VS_VA);
        va_port[p*NV+v] = vroute[p][v];
      end
    end
  end

  vc_allocator #(.NP(NP), .NV(NV)) u_va (
    .clk, .rst_n, .req(va_req), .req_port(va_port), .out_free(ovc_free),
    .grant(va_grant), .grant_vc(va_vc)
  );

  // ---------------- switch allocation ----------------
  logic [NV-1:0]   sa_req  [NP];
  logic [2:0]      sa_port [NP][NV];
  logic [NP-1:0]   sa_in_grant;
  logic [VC_W-1:0] sa_in_vc [NP];
  logic [NP-1:0]   sa_out_en;
  logic [2:0]      sa_out_sel [NP];

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      for (int v = 0; v < NV; v++) begin
        sa_req[p][v]  = !stall && (vstate[p][v] == VS_ACTIVE) && !buf_empty[p][v]
                        && (credits[vroute[p][v]][voutvc[p][v]] != 4'd0);
        sa_port[p][v] = vroute[p][v];
      end
    end
  end

  switch_allocator #(.NP(NP), .NV(NV)) u_sa (
    .clk, .rst_n, .req(sa_req), .req_port(sa_port),
    .in_grant(sa_in_grant), .in_vc(sa_in_vc), .out_en(sa_out_en), .out_sel(sa_out_sel)
  );

  // ---------------- crossbar ----------------
  flit_t         xb_in  [NP];
  flit_t         xb_out [NP];
  logic [NP-1:0] xb_valid;

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      xb_in[p]    = buf_dout[p][sa_in_vc[p]];
      xb_in[p].vc = voutvc[p][sa_in_vc[p]];
      for (int v = 0; v < NV; v++) buf_pop[p][v] = sa_in_grant[p] && (sa_in_vc[p] == VC_W'(v));
    end
  end

  crossbar #(.N(NP)) u_xbar (
    .in_flit(xb_in), .en(sa_out_en), .sel(sa_out_sel),
    .out_valid(xb_valid), .out_flit(xb_out)
  );

  // ---------------- state update ----------------
  link_t out_q [NP];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rc_violations <= '0;
      for (int p = 0; p < NP; p++) begin
        ovc_busy[p]   <= '0;
        out_q[p]      <= '0;
        out_credit[p] <= '0;
        for (int v = 0; v < NV; v++) begin
          vstate[p][v]  <= VS_IDLE;
          vroute[p][v]  <= P_L;
          voutvc[p][v]  <= '0;
          credits[p][v] <= 4'(VC_DEPTH);
        end
      end
    end else begin
      for (int p = 0; p < NP; p++) begin
        // switch traversal into the output register
        out_q[p].valid <= xb_valid[p];
        out_q[p].test  <= 1'b0;
        out_q[p].flit  <= xb_out[p];
        // credit back to the upstream router
        out_credit[p].valid <= sa_in_grant[p];
        out_credit[p].vc    <= sa_in_vc[p];
        for (int v = 0; v < NV; v++) begin
          unique case (vstate[p][v])
            VS_IDLE: begin
              if (!buf_empty[p][v] && buf_dout[p][v].head) begin
                vroute[p][v] <= lk_port[p*NV+v];
                vstate[p][v] <= VS_VA;
                if (!lk_ok[p*NV+v]) rc_violations <= rc_violations + 1'b1;
              end
            end
            VS_VA: begin
              if (va_grant[p*NV+v]) begin
                voutvc[p][v] <= va_vc[p*NV+v];
                vstate[p][v] <= VS_ACTIVE;
              end
            end
            VS_ACTIVE: begin
              if (buf_pop[p][v] && buf_dout[p][v].tail) vstate[p][v] <= VS_IDLE;
            end
            default: vstate[p][v] <= VS_IDLE;
          endcase
        end
      end
      // output VC ownership
      for (int p = 0; p < NP; p++) begin
        for (int v = 0; v < NV; v++) begin
          if (va_grant[p*NV+v]) ovc_busy[vroute[p][v]][va_vc[p*NV+v]] <= 1'b1;
        end
      end
      for (int p = 0; p < NP; p++) begin
        if (sa_in_grant[p] && buf_dout[p][sa_in_vc[p]].tail)
          ovc_busy[vroute[p][sa_in_vc[p]]][voutvc[p][sa_in_vc[p]]] <= 1'b0;
      end
      // credits: consume on send, return from downstream
      for (int o = 0; o < NP; o++) begin
        for (int v = 0; v < NV; v++) begin
          credits[o][v] <= credits[o][v]
                           - 4'(xb_valid[o] && xb_out[o].vc == VC_W'(v))
                           + 4'(in_credit[o].valid && in_credit[o].vc == VC_W'(v));
        end
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      out_link[p] = out_q[p];
      if (p < NUM_DIRS && bist_mode) out_link[p] = test_out[p];
    end
  end

  for (genvar p = 0; p < NP; p++) begin : g_chk
    for (genvar v = 0; v < NV; v++) begin : g_vchk
      a_head_first: assert property (@(posedge clk) disable iff (!rst_n)
        (vstate[p][v] == VS_IDLE && !buf_empty[p][v]) |-> buf_dout[p][v].head);
      a_credit_range: assert property (@(posedge clk) disable iff (!rst_n)
        credits[p][v] <= 4'(VC_DEPTH));
    end
  end
endmodule
