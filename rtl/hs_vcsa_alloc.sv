// hs_vcsa_alloc: VC allocation (VA) and switch allocation (SA) of the
// hybrid-switched router, with the output-side VC and credit state.
//
// VA: for each output sub-port one round-robin arbiter picks one input VC
// per cycle among those whose head flit is routed there and for whose
// virtual network a downstream VC is free; the winner gets the lowest free
// VC of its virtual network. SA is separable input-first: each input
// sub-port picks one active VC holding a flit with a credit for its output
// VC, then each output sub-port picks one of the inputs that chose it. A
// grant is used in the next cycle (switch traversal). Credits count free
// downstream buffer slots per output VC; a downstream VC becomes free again
// when the credit of its tail flit comes back.
//
// Outputs claimed by a circuit passing through this router (cs_claim) take
// no part in VA or SA: their crossbar path is fixed by the CS_flag.
//
// From the paper: a VA/SA unit shared by all twelve sub-ports, credits in
// and out per port, 4 VCs per virtual network. Own choices: separable
// round-robin allocators, one VA grant per output per cycle, freeing a VC
// on the tail credit.
module hs_vcsa_alloc
  import hs_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_VCS-1:0]   vc_req_va   [NUM_SUBPORTS],
  input  logic [NUM_VCS-1:0]   vc_active   [NUM_SUBPORTS],
  input  logic [NUM_VCS-1:0]   vc_nonempty [NUM_SUBPORTS],
  input  logic [SUBPORT_W-1:0] vc_route    [NUM_SUBPORTS][NUM_VCS],
  input  logic [VC_W-1:0]      vc_outvc    [NUM_SUBPORTS][NUM_VCS],
  input  credit_t              credit_in   [NUM_SUBPORTS],
  input  logic [NUM_SUBPORTS-1:0] cs_claim,
  output logic [NUM_VCS-1:0]   va_gnt      [NUM_SUBPORTS],
  output logic [VC_W-1:0]      va_outvc    [NUM_SUBPORTS][NUM_VCS],
  output logic [NUM_SUBPORTS-1:0] sa_gnt,
  output logic [VC_W-1:0]      sa_vc       [NUM_SUBPORTS],
  output logic                 cs_busy
);
  localparam int unsigned NSP = NUM_SUBPORTS;
  localparam int unsigned NR  = NSP * NUM_VCS;
  localparam int unsigned RW  = $clog2(NR);
  localparam int unsigned SW  = $clog2(NSP);

  logic [NUM_VCS-1:0] busy [NSP];
  logic [CRED_W-1:0]  cred [NSP][NUM_VCS];

  // ---------------- VC allocation ----------------
  logic [NR-1:0]      va_req  [NSP];
  logic [NR-1:0]      va_g    [NSP];
  logic [RW-1:0]      va_gi   [NSP];
  logic               va_gv   [NSP];
  logic [VC_W-1:0]    free_vc [NSP][NUM_VNETS];
  logic               has_free[NSP][NUM_VNETS];

  always_comb begin
    for (int o = 0; o < NSP; o++) begin
      for (int n = 0; n < NUM_VNETS; n++) begin
        has_free[o][n] = 1'b0;
        free_vc[o][n]  = '0;
        for (int k = VCS_PER_VNET - 1; k >= 0; k--) begin
          if (!busy[o][n*VCS_PER_VNET + k]) begin
            has_free[o][n] = 1'b1;
            free_vc[o][n]  = VC_W'(n*VCS_PER_VNET + k);
          end
        end
      end
      for (int i = 0; i < NSP; i++)
        for (int v = 0; v < NUM_VCS; v++)
          va_req[o][i*NUM_VCS + v] = vc_req_va[i][v] && int'(vc_route[i][v]) == o &&
                                    has_free[o][v / VCS_PER_VNET] && !cs_claim[o];
    end
  end

  for (genvar o = 0; o < NSP; o++) begin : g_va
    hs_rr_arbiter #(.N(NR)) u_arb (
      .clk, .rst_n, .req(va_req[o]), .advance(1'b1),
      .gnt(va_g[o]), .gnt_idx(va_gi[o]), .gnt_valid(va_gv[o]));
  end

  always_comb begin
    for (int i = 0; i < NSP; i++)
      for (int v = 0; v < NUM_VCS; v++) begin
        va_gnt[i][v]   = 1'b0;
        va_outvc[i][v] = free_vc[vc_route[i][v]][v / VCS_PER_VNET];
        va_gnt[i][v]   = va_g[vc_route[i][v]][i*NUM_VCS + v];
      end
  end

  // ---------------- switch allocation ----------------
  logic [NUM_VCS-1:0]   s1_req [NSP];
  logic [NUM_VCS-1:0]   s1_g   [NSP];
  logic [VC_W-1:0]      s1_gi  [NSP];
  logic                 s1_gv  [NSP];
  logic [SUBPORT_W-1:0] s1_tgt [NSP];
  logic [NSP-1:0]       s2_req [NSP];
  logic [NSP-1:0]       s2_g   [NSP];
  logic [SW-1:0]        s2_gi  [NSP];
  logic                 s2_gv  [NSP];

  always_comb begin
    for (int i = 0; i < NSP; i++)
      for (int v = 0; v < NUM_VCS; v++)
        s1_req[i][v] = vc_active[i][v] && vc_nonempty[i][v] &&
                       cred[vc_route[i][v]][vc_outvc[i][v]] != '0 &&
                       !cs_claim[vc_route[i][v]];
  end

  for (genvar i = 0; i < NSP; i++) begin : g_sa1
    hs_rr_arbiter #(.N(NUM_VCS)) u_arb (
      .clk, .rst_n, .req(s1_req[i]), .advance(sa_gnt[i]),
      .gnt(s1_g[i]), .gnt_idx(s1_gi[i]), .gnt_valid(s1_gv[i]));
    assign s1_tgt[i] = vc_route[i][s1_gi[i]];
  end

  always_comb begin
    for (int o = 0; o < NSP; o++)
      for (int i = 0; i < NSP; i++)
        s2_req[o][i] = s1_gv[i] && int'(s1_tgt[i]) == o;
  end

  for (genvar o = 0; o < NSP; o++) begin : g_sa2
    hs_rr_arbiter #(.N(NSP)) u_arb (
      .clk, .rst_n, .req(s2_req[o]), .advance(1'b1),
      .gnt(s2_g[o]), .gnt_idx(s2_gi[o]), .gnt_valid(s2_gv[o]));
  end

  always_comb begin
    for (int i = 0; i < NSP; i++) begin
      sa_gnt[i] = 1'b0;
      sa_vc[i]  = s1_gi[i];
      for (int o = 0; o < NSP; o++)
        if (s2_g[o][i]) sa_gnt[i] = 1'b1;
    end
  end

  // ---------------- output VC state ----------------
  // credit returned (inc) and credit spent (dec) per output and VC
  logic [NUM_VCS-1:0] cr_inc [NSP];
  logic [NUM_VCS-1:0] cr_dec [NSP];
  always_comb begin
    for (int o = 0; o < NSP; o++)
      for (int v = 0; v < NUM_VCS; v++) begin
        cr_inc[o][v] = credit_in[o].valid && !cs_claim[o] && int'(credit_in[o].vc) == v;
        cr_dec[o][v] = s2_gv[o] && int'(vc_outvc[s2_gi[o]][s1_gi[s2_gi[o]]]) == v;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NSP; o++) begin
        busy[o] <= '0;
        for (int v = 0; v < NUM_VCS; v++) cred[o][v] <= CRED_W'(BUF_DEPTH);
      end
    end else begin
      for (int o = 0; o < NSP; o++) begin
        for (int v = 0; v < NUM_VCS; v++) begin
          cred[o][v] <= cred[o][v] + CRED_W'(cr_inc[o][v]) - CRED_W'(cr_dec[o][v]);
          if (va_gv[o] && free_vc[o][int'(va_gi[o]) % NUM_VCS / VCS_PER_VNET] == VC_W'(v))
            busy[o][v] <= 1'b1;
          else if (cr_inc[o][v] && credit_in[o].free)
            busy[o][v] <= 1'b0;
        end
      end
    end
  end

  always_comb begin
    cs_busy = 1'b0;
    for (int o = NUM_PORTS; o < NSP; o++)
      if (busy[o] != '0) cs_busy = 1'b1;
  end

  // Credits never exceed the downstream buffer depth. (Credits arriving at
  // an output claimed by a circuit belong to the circuit's source and are
  // passed back by the router, not counted here.)
  for (genvar o = 0; o < NSP; o++) begin : g_chk
    a_cred_bound: assert property (@(posedge clk) disable iff (!rst_n)
      credit_in[o].valid && !cs_claim[o] |-> cred[o][credit_in[o].vc] < CRED_W'(BUF_DEPTH) ||
        (s2_gv[o] && vc_outvc[s2_gi[o]][s1_gi[s2_gi[o]]] == credit_in[o].vc));
  end
endmodule
