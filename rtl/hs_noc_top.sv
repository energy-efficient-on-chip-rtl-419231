// hs_noc_top: 4x4 hybrid-switched mesh network-on-chip.
//
// Sixteen routers in a 4x4 mesh, each with two network interfaces (one for
// the tile's core, one for its L2 bank / directory), joined by 128-bit links
// that are split into NUM_SUBNETS subnets: subnet 0 runs virtual-channel
// packet switching and carries all traffic that has no circuit; the other
// subnets are circuit switched. Circuits are configured, per epoch or once
// for a whole run, from a traffic profile: end-to-end circuits run from a
// source NI to a destination NI with no buffering or routing anywhere on
// the way; router-to-router circuits run from the source router to the
// destination router, where the packet is routed and buffered as usual.
//
// Interfaces: per NI a packet transmit port (valid/ready) and a flit
// receive port per subnet; a 16-bit register bus that writes the shadow
// circuit configuration (see hs_circuit_config); adaptive_en / apply_req
// for the epoch sequencer; a read port for the NIs' traffic profiles;
// buf_gate, the power-gating request of every router input buffer (the
// power switches themselves are not part of this RTL); activity counters.
//
// From the paper: mesh size, link width, the subnet split, the router of
// Fig. 3(b), end-to-end and router-to-router circuits, static and runtime
// adaptive set-up with epochs and configuration periods. The circuit set-up
// algorithm runs in software and is not part of this RTL. Own choices: two
// NIs per tile (the paper's system has 51 NIs including DMA and I/O
// controllers, which are not modelled), the configuration bus.
module hs_noc_top
  import hs_pkg::*;
#(
  parameter int unsigned EPOCH_LEN  = EPOCH_CYCLES,
  parameter int unsigned CONFIG_LEN = CONFIG_CYCLES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // endpoints
  input  logic [NUM_NIS-1:0]      pkt_valid,
  output logic [NUM_NIS-1:0]      pkt_ready,
  input  logic [NI_W-1:0]         pkt_dst     [NUM_NIS],
  input  logic [VNET_W-1:0]       pkt_vnet    [NUM_NIS],
  input  logic [NUM_NIS-1:0]      pkt_is_data,
  input  logic [DATA_BITS-1:0]    pkt_data    [NUM_NIS],
  output flit_t                   rx_flit     [NUM_NIS][NUM_SUBNETS],
  // circuit configuration
  input  logic                    cfg_we,
  input  logic [15:0]             cfg_addr,
  input  logic [15:0]             cfg_wdata,
  input  logic                    adaptive_en,
  input  logic                    apply_req,
  output logic                    in_config,
  output logic                    hold,
  output logic [31:0]             epoch_count,
  // traffic profile read-out
  input  logic [NI_W-1:0]         stat_ni,
  input  logic [NI_W-1:0]         stat_dst,
  output logic [31:0]             stat_count,
  // power gating requests and activity
  output logic [NUM_SUBPORTS-1:0] buf_gate    [NUM_ROUTERS],
  output logic [31:0]             tx_flits    [NUM_NIS],
  output logic [31:0]             tx_cs_flits [NUM_NIS],
  output logic [31:0]             router_cs_flits [NUM_ROUTERS]
);
  localparam int unsigned NSP = NUM_SUBPORTS;

  flit_t      r_in   [NUM_ROUTERS][NSP];
  flit_t      r_out  [NUM_ROUTERS][NSP];
  credit_t    r_cin  [NUM_ROUTERS][NSP];
  credit_t    r_cout [NUM_ROUTERS][NSP];
  cs_entry_t  cs_cfg [NUM_ROUTERS][NSP];
  r2r_entry_t r2r_cfg[NUM_ROUTERS][NUM_CS][NUM_DIRS];
  e2e_entry_t e2e_cfg[NUM_NIS][NUM_CS];
  logic [NUM_ROUTERS-1:0] r_idle;
  logic [NUM_NIS-1:0]     n_idle;
  logic [31:0]            n_stat [NUM_NIS];
  logic stat_freeze, stat_clear, apply;

  // ---------------- routers and mesh links ----------------
  for (genvar r = 0; r < NUM_ROUTERS; r++) begin : g_r
    hs_router #(.ROUTER_ID(r)) u_router (
      .clk, .rst_n,
      .in_flit   (r_in[r]),
      .credit_out(r_cout[r]),
      .out_flit  (r_out[r]),
      .credit_in (r_cin[r]),
      .cs_cfg    (cs_cfg[r]),
      .r2r_cfg   (r2r_cfg[r]),
      .hold      (hold),
      .buf_gate  (buf_gate[r]),
      .cs_idle   (r_idle[r]),
      .cs_flits  (router_cs_flits[r])
    );

    for (genvar d = 0; d < NUM_DIRS; d++) begin : g_d
      localparam int X  = r % MESH_X;
      localparam int Y  = r / MESH_X;
      localparam bit HAS_NB = (d == P_NORTH) ? (Y > 0) :
                              (d == P_EAST)  ? (X < MESH_X - 1) :
                              (d == P_SOUTH) ? (Y < MESH_Y - 1) : (X > 0);
      localparam int NB  = (d == P_NORTH) ? r - MESH_X :
                           (d == P_EAST)  ? r + 1 :
                           (d == P_SOUTH) ? r + MESH_X : r - 1;
      localparam int OPP = (d + 2) % NUM_DIRS;
      for (genvar p = 0; p < NUM_SUBNETS; p++) begin : g_p
        if (HAS_NB) begin : g_link
          hs_link u_link (
            .clk, .rst_n,
            .up_flit    (r_out[r][p*NUM_PORTS + d]),
            .down_flit  (r_in[NB][p*NUM_PORTS + OPP]),
            .down_credit(r_cout[NB][p*NUM_PORTS + OPP]),
            .up_credit  (r_cin[r][p*NUM_PORTS + d])
          );
        end else begin : g_edge
          assign r_in[r][p*NUM_PORTS + d]  = '0;
          assign r_cin[r][p*NUM_PORTS + d] = '0;
        end
      end
    end
  end

  // ---------------- network interfaces ----------------
  for (genvar n = 0; n < NUM_NIS; n++) begin : g_ni
    localparam int R    = n / NUM_LOCAL;
    localparam int PORT = P_CORE + n % NUM_LOCAL;
    flit_t   inj_flit   [NUM_SUBNETS];
    credit_t inj_credit [NUM_SUBNETS];
    flit_t   ej_flit    [NUM_SUBNETS];
    credit_t ej_credit  [NUM_SUBNETS];

    for (genvar p = 0; p < NUM_SUBNETS; p++) begin : g_p
      assign r_in[R][p*NUM_PORTS + PORT]  = inj_flit[p];
      assign inj_credit[p]                = r_cout[R][p*NUM_PORTS + PORT];
      assign ej_flit[p]                   = r_out[R][p*NUM_PORTS + PORT];
      assign r_cin[R][p*NUM_PORTS + PORT] = ej_credit[p];
    end

    hs_ni #(.NI_ID(n)) u_ni (
      .clk, .rst_n,
      .pkt_valid  (pkt_valid[n]),
      .pkt_ready  (pkt_ready[n]),
      .pkt_dst    (pkt_dst[n]),
      .pkt_vnet   (pkt_vnet[n]),
      .pkt_is_data(pkt_is_data[n]),
      .pkt_data   (pkt_data[n]),
      .inj_flit, .inj_credit, .ej_flit, .ej_credit,
      .rx_flit    (rx_flit[n]),
      .e2e_cfg    (e2e_cfg[n]),
      .hold       (hold),
      .cs_idle    (n_idle[n]),
      .stat_freeze(stat_freeze),
      .stat_clear (stat_clear),
      .stat_idx   (stat_dst),
      .stat_count (n_stat[n]),
      .tx_flits   (tx_flits[n]),
      .tx_cs_flits(tx_cs_flits[n])
    );
  end

  assign stat_count = n_stat[stat_ni];

  // ---------------- circuit configuration and epochs ----------------
  hs_circuit_config u_cfg (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_wdata, .apply,
    .cs_cfg, .r2r_cfg, .e2e_cfg
  );

  hs_epoch_ctrl #(.EPOCH_LEN(EPOCH_LEN), .CONFIG_LEN(CONFIG_LEN)) u_epoch (
    .clk, .rst_n,
    .adaptive_en, .apply_req,
    .all_cs_idle (&r_idle && &n_idle),
    .in_config, .stat_freeze, .stat_clear, .hold, .apply, .epoch_count
  );
endmodule
