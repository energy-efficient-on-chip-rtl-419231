// hs_router: hybrid-switched mesh router (one per tile).
//
// Each of the six wide ports (N, E, S, W, core, L2/directory) is split
// into NUM_SUBNETS narrow sub-ports, one per subnet: sub-port
// plane * NUM_PORTS + port. Plane 0 is the VC subnet; the other planes are
// CS subnets. Every sub-port has an input unit (VC buffers + route
// computation), and all share one VC/switch allocator and one crossbar.
//
// Buffered flits take four cycles: buffer write + route computation, VC
// allocation, switch allocation, switch traversal into the output latch.
// A flit arriving on a CS-plane sub-port whose CS_flag is set takes one
// cycle: input latch, then straight through its fixed crossbar path and
// past the output latch onto the link. Credits that arrive for such a
// circuit's output are passed back, unchanged, on the credit wire of the
// circuit's input, so flow control runs end to end along the circuit
// between the circuit's first buffer-owning hop and its last.
//
// cs_idle is high when no VC anywhere in the router is steering a packet
// onto a CS plane; the reconfiguration logic waits for it.
//
// From the paper: the 6-port to 12-sub-port split, the per-input CS_flag,
// the bypass of buffers and of the output latch, buffers power-gated under
// CS, the VA/SA unit and credits, the 4-cycle VC router and 1-cycle CS
// traversal. Own choice: passing credits back along a circuit.
module hs_router
  import hs_pkg::*;
#(
  parameter int unsigned ROUTER_ID = 0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  flit_t                   in_flit    [NUM_SUBPORTS],
  output credit_t                 credit_out [NUM_SUBPORTS],
  output flit_t                   out_flit   [NUM_SUBPORTS],
  input  credit_t                 credit_in  [NUM_SUBPORTS],
  input  cs_entry_t               cs_cfg     [NUM_SUBPORTS],
  input  r2r_entry_t              r2r_cfg    [NUM_CS][NUM_DIRS],
  input  logic                    hold,
  output logic [NUM_SUBPORTS-1:0] buf_gate,
  output logic                    cs_idle,
  output logic [31:0]             cs_flits   // flits that crossed on a circuit
);
  localparam int unsigned NSP = NUM_SUBPORTS;

  logic [NUM_VCS-1:0]   vc_req_va   [NSP];
  logic [NUM_VCS-1:0]   vc_active   [NSP];
  logic [NUM_VCS-1:0]   vc_nonempty [NSP];
  logic [SUBPORT_W-1:0] vc_route    [NSP][NUM_VCS];
  logic [VC_W-1:0]      vc_outvc    [NSP][NUM_VCS];
  logic [NUM_VCS-1:0]   va_gnt      [NSP];
  logic [VC_W-1:0]      va_outvc    [NSP][NUM_VCS];
  logic [NSP-1:0]       sa_gnt;
  logic [VC_W-1:0]      sa_vc       [NSP];
  flit_t                st_flit     [NSP];
  logic [SUBPORT_W-1:0] st_out      [NSP];
  flit_t                cs_flit     [NSP];
  credit_t              iu_credit   [NSP];
  logic [NSP-1:0]       iu_cs_busy;
  logic [NSP-1:0]       cs_claim;
  logic [SUBPORT_W-1:0] cs_src      [NSP];  // not used outside the crossbar
  logic                 alloc_cs_busy;

  for (genvar i = 0; i < NSP; i++) begin : g_in
    hs_input_unit #(.ROUTER_ID(ROUTER_ID), .SUBPORT(i)) u_iu (
      .clk, .rst_n,
      .flit_in    (in_flit[i]),
      .cs_flag    (cs_cfg[i].cs_flag),
      .hold       (hold),
      .r2r_cfg    (r2r_cfg),
      .credit_out (iu_credit[i]),
      .buf_gate   (buf_gate[i]),
      .cs_flit    (cs_flit[i]),
      .vc_req_va  (vc_req_va[i]),
      .vc_active  (vc_active[i]),
      .vc_nonempty(vc_nonempty[i]),
      .vc_route   (vc_route[i]),
      .vc_outvc   (vc_outvc[i]),
      .cs_busy    (iu_cs_busy[i]),
      .va_gnt     (va_gnt[i]),
      .va_outvc   (va_outvc[i]),
      .sa_gnt     (sa_gnt[i]),
      .sa_vc      (sa_vc[i]),
      .st_flit    (st_flit[i]),
      .st_out     (st_out[i])
    );
  end

  hs_vcsa_alloc u_alloc (
    .clk, .rst_n,
    .vc_req_va, .vc_active, .vc_nonempty, .vc_route, .vc_outvc,
    .credit_in, .cs_claim,
    .va_gnt, .va_outvc, .sa_gnt, .sa_vc,
    .cs_busy(alloc_cs_busy)
  );

  hs_crossbar u_xbar (
    .clk, .rst_n,
    .st_flit, .st_out, .cs_flit, .cs_cfg,
    .out_flit, .cs_claim, .cs_src
  );

  // Credit return: own credits for buffered inputs, credits of the circuit's
  // output passed back for inputs in CS mode.
  always_comb begin
    for (int i = 0; i < NSP; i++) begin
      credit_out[i] = iu_credit[i];
      if (buf_gate[i])
        credit_out[i] = credit_in[(i / NUM_PORTS) * NUM_PORTS + int'(cs_cfg[i].out_port) % NUM_PORTS];
    end
  end

  assign cs_idle = !alloc_cs_busy && (iu_cs_busy == '0);

  // Count of flits that crossed this router on a circuit bypass.
  logic [31:0] cs_n;
  always_comb begin
    cs_n = '0;
    for (int o = 0; o < NSP; o++) cs_n += 32'(cs_claim[o] && out_flit[o].valid);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cs_flits <= '0;
    else        cs_flits <= cs_flits + cs_n;
  end
endmodule
