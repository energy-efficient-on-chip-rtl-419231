// hs_ni: network interface between one endpoint (core, or L2 bank /
// directory) and its router's local port.
//
// Transmit: the endpoint hands over one packet at a time (valid/ready),
// either a 128-bit control packet or a 640-bit data packet, which the NI
// cuts into SUBNET_W-bit flits (2 or 10 flits with two subnets). If the
// packet's destination NI is the far end of an end-to-end circuit that
// starts at this NI, the packet is sent on that circuit's CS plane;
// otherwise on the VC plane, where the router may still put it on a
// router-to-router circuit. The NI keeps VC and credit state for each of
// its injection sub-ports exactly like a router output: it takes a free VC
// of the packet's virtual network, then sends one flit per cycle while it
// holds credits. A circuit is end to end, so on a CS plane those credits
// come back from the destination NI, passed along the circuit.
//
// Receive: the NI always accepts what the router's local sub-ports deliver
// and hands every flit to the endpoint one cycle later, returning a credit
// at the same time (the endpoint is assumed to sink flits at link rate).
//
// The traffic profiler counts flits per destination for the circuit
// set-up software. 'hold' keeps new packets off the circuits while circuits
// are being reconfigured; cs_idle says no packet of this NI is in a circuit.
//
// From the paper: 51 NIs in the evaluated system (here 32: a core NI and an
// L2/directory NI per tile), packet sizes, circuit matching by source and
// destination, statistics gathered from the NIs. Own choices: one packet
// in flight per NI, flit-level delivery, the packet interface.
module hs_ni
  import hs_pkg::*;
#(
  parameter int unsigned NI_ID = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // endpoint transmit side
  input  logic                 pkt_valid,
  output logic                 pkt_ready,
  input  logic [NI_W-1:0]      pkt_dst,
  input  logic [VNET_W-1:0]    pkt_vnet,
  input  logic                 pkt_is_data,
  input  logic [DATA_BITS-1:0] pkt_data,
  // router local sub-ports, one per plane
  output flit_t                inj_flit   [NUM_SUBNETS],
  input  credit_t              inj_credit [NUM_SUBNETS],
  input  flit_t                ej_flit    [NUM_SUBNETS],
  output credit_t              ej_credit  [NUM_SUBNETS],
  // endpoint receive side
  output flit_t                rx_flit    [NUM_SUBNETS],
  // circuit configuration and reconfiguration
  input  e2e_entry_t           e2e_cfg    [NUM_CS],
  input  logic                 hold,
  output logic                 cs_idle,
  // statistics
  input  logic                 stat_freeze,
  input  logic                 stat_clear,
  input  logic [NI_W-1:0]      stat_idx,
  output logic [31:0]          stat_count,
  output logic [31:0]          tx_flits,
  output logic [31:0]          tx_cs_flits
);
  localparam int unsigned PLW = (NUM_SUBNETS > 1) ? $clog2(NUM_SUBNETS) : 1;

  typedef enum logic [1:0] {TX_IDLE, TX_ALLOC, TX_SEND} tx_state_t;

  tx_state_t              state;
  logic [DATA_BITS-1:0]   data_q;
  logic [NI_W-1:0]        dst_q;
  logic [VNET_W-1:0]      vnet_q;
  logic [FLITCNT_W-1:0]   nflits_q, idx_q;
  logic [PLW-1:0]         plane_q;
  logic [VC_W-1:0]        vc_q;
  logic [NUM_VCS-1:0]     busy [NUM_SUBNETS];
  logic [CRED_W-1:0]      cred [NUM_SUBNETS][NUM_VCS];

  logic [PLW-1:0]         plane_sel;
  logic [FLITCNT_W-1:0]   nflits_sel;
  logic                   found;
  logic [VC_W-1:0]        free_vc;
  logic                   send;
  logic                   accept;

  assign pkt_ready  = (state == TX_IDLE);
  assign accept     = pkt_valid && pkt_ready;
  assign nflits_sel = pkt_is_data ? FLITCNT_W'(DATA_FLITS) : FLITCNT_W'(CTRL_FLITS);

  always_comb begin
    plane_sel = '0;
    for (int p = NUM_CS - 1; p >= 0; p--)
      if (!hold && e2e_cfg[p].valid && e2e_cfg[p].dst_ni == pkt_dst) plane_sel = PLW'(p + 1);
    found   = 1'b0;
    free_vc = '0;
    for (int k = VCS_PER_VNET - 1; k >= 0; k--) begin
      if (!busy[plane_q][int'(vnet_q) * VCS_PER_VNET + k]) begin
        found   = 1'b1;
        free_vc = VC_W'(int'(vnet_q) * VCS_PER_VNET + k);
      end
    end
    send = (state == TX_SEND) && (cred[plane_q][vc_q] != '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= TX_IDLE;
      data_q   <= '0;
      dst_q    <= '0;
      vnet_q   <= '0;
      nflits_q <= '0;
      idx_q    <= '0;
      plane_q  <= '0;
      vc_q     <= '0;
      for (int p = 0; p < NUM_SUBNETS; p++) begin
        busy[p]     <= '0;
        inj_flit[p] <= '0;
        for (int v = 0; v < NUM_VCS; v++) cred[p][v] <= CRED_W'(BUF_DEPTH);
      end
      tx_flits    <= '0;
      tx_cs_flits <= '0;
    end else begin
      for (int p = 0; p < NUM_SUBNETS; p++) inj_flit[p].valid <= 1'b0;
      case (state)
        TX_IDLE: if (accept) begin
          data_q   <= pkt_data;
          dst_q    <= pkt_dst;
          vnet_q   <= pkt_vnet;
          nflits_q <= nflits_sel;
          idx_q    <= '0;
          plane_q  <= plane_sel;
          state    <= TX_ALLOC;
        end
        TX_ALLOC: if (found) begin
          busy[plane_q][free_vc] <= 1'b1;
          vc_q  <= free_vc;
          state <= TX_SEND;
        end
        TX_SEND: if (send) begin
          inj_flit[plane_q].valid <= 1'b1;
          inj_flit[plane_q].ftype <= (nflits_q == 1) ? FT_HEADTAIL :
                                     (idx_q == 0) ? FT_HEAD :
                                     (idx_q == nflits_q - 1) ? FT_TAIL : FT_BODY;
          inj_flit[plane_q].vnet  <= vnet_q;
          inj_flit[plane_q].vc    <= vc_q;
          inj_flit[plane_q].src   <= NI_W'(NI_ID);
          inj_flit[plane_q].dst   <= dst_q;
          inj_flit[plane_q].data  <= data_q[idx_q * SUBNET_W +: SUBNET_W];
          idx_q    <= idx_q + 1'b1;
          tx_flits <= tx_flits + 1;
          if (plane_q != '0) tx_cs_flits <= tx_cs_flits + 1;
          if (idx_q == nflits_q - 1) state <= TX_IDLE;
        end
        default: state <= TX_IDLE;
      endcase
      // credits and VC release
      for (int p = 0; p < NUM_SUBNETS; p++) begin
        for (int v = 0; v < NUM_VCS; v++) begin
          cred[p][v] <= cred[p][v]
                        + CRED_W'(inj_credit[p].valid && int'(inj_credit[p].vc) == v)
                        - CRED_W'(send && int'(plane_q) == p && int'(vc_q) == v);
          if (inj_credit[p].valid && int'(inj_credit[p].vc) == v && inj_credit[p].free)
            busy[p][v] <= 1'b0;
        end
      end
    end
  end

  // receive side: always accept, credit straight back
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NUM_SUBNETS; p++) begin
        rx_flit[p]   <= '0;
        ej_credit[p] <= '0;
      end
    end else begin
      for (int p = 0; p < NUM_SUBNETS; p++) begin
        rx_flit[p]         <= ej_flit[p];
        ej_credit[p].valid <= ej_flit[p].valid;
        ej_credit[p].vc    <= ej_flit[p].vc;
        ej_credit[p].free  <= is_tail(ej_flit[p].ftype);
      end
    end
  end

  always_comb begin
    cs_idle = 1'b1;
    for (int p = 1; p < NUM_SUBNETS; p++) if (busy[p] != '0) cs_idle = 1'b0;
    if (state != TX_IDLE && plane_q != '0) cs_idle = 1'b0;
  end

  hs_traffic_profiler u_prof (
    .clk, .rst_n,
    .pkt_valid (accept),
    .pkt_dst   (pkt_dst),
    .pkt_flits (nflits_sel),
    .freeze    (stat_freeze),
    .clear     (stat_clear),
    .rd_idx    (stat_idx),
    .rd_count  (stat_count)
  );
endmodule
