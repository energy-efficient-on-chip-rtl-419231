// hs_pkg: sizes, types and helper functions shared by the hybrid-switched
// (circuit-switched + virtual-channel) mesh network.
//
// The physical 128-bit link of every mesh hop is split into NUM_SUBNETS
// equally wide subnets (planes). Plane 0 is always run with virtual-channel
// (VC) flow control; planes 1..NUM_SUBNETS-1 are circuit-switched (CS)
// planes whose circuits are configured from a traffic profile. Every router
// has six wide ports (N, E, S, W and two local ports), and each wide port is
// split into one narrow sub-port per plane, so a two-subnet router has
// twelve sub-ports and a 12-to-12 crossbar.
//
// Values taken from the paper: 4x4 mesh, 128-bit links, six router ports,
// 3 virtual networks with 4 VCs each, 128-bit control and 640-bit data
// packets, X-Y routing, two subnets in the reference router, 200-million-
// cycle epochs and 1-million-cycle configuration periods. Own choices: the
// VC buffer depth (4 flits), the flit side-band fields, the port numbering,
// and the assignment of the two local ports (core, and L2 bank/directory).
package hs_pkg;

  // ---------------- topology ----------------
  localparam int unsigned MESH_X      = 4;
  localparam int unsigned MESH_Y      = 4;
  localparam int unsigned NUM_ROUTERS = MESH_X * MESH_Y;
  localparam int unsigned NUM_DIRS    = 4;                  // N, E, S, W
  localparam int unsigned NUM_LOCAL   = 2;                  // core, L2/dir
  localparam int unsigned NUM_PORTS   = NUM_DIRS + NUM_LOCAL;
  localparam int unsigned NUM_NIS     = NUM_ROUTERS * NUM_LOCAL;

  // ---------------- link split ----------------
  localparam int unsigned LINK_WIDTH   = 128;
  localparam int unsigned NUM_SUBNETS  = 2;                 // 1 VC + 1 CS plane
  localparam int unsigned NUM_CS       = NUM_SUBNETS - 1;   // CS planes
  localparam int unsigned SUBNET_W     = LINK_WIDTH / NUM_SUBNETS;
  localparam int unsigned NUM_SUBPORTS = NUM_PORTS * NUM_SUBNETS;

  // ---------------- flow control ----------------
  localparam int unsigned NUM_VNETS    = 3;
  localparam int unsigned VCS_PER_VNET = 4;
  localparam int unsigned NUM_VCS      = NUM_VNETS * VCS_PER_VNET;
  localparam int unsigned BUF_DEPTH    = 4;                 // flits per VC

  // ---------------- packets ----------------
  localparam int unsigned CTRL_BITS  = 128;
  localparam int unsigned DATA_BITS  = 640;
  localparam int unsigned CTRL_FLITS = (CTRL_BITS + SUBNET_W - 1) / SUBNET_W;
  localparam int unsigned DATA_FLITS = (DATA_BITS + SUBNET_W - 1) / SUBNET_W;

  // ---------------- epochs ----------------
  localparam int unsigned EPOCH_CYCLES  = 200_000_000;
  localparam int unsigned CONFIG_CYCLES = 1_000_000;

  // ---------------- field widths ----------------
  localparam int unsigned ROUTER_W  = $clog2(NUM_ROUTERS);
  localparam int unsigned NI_W      = $clog2(NUM_NIS);
  localparam int unsigned PORT_W    = $clog2(NUM_PORTS);
  localparam int unsigned SUBPORT_W = $clog2(NUM_SUBPORTS);
  localparam int unsigned VC_W      = $clog2(NUM_VCS);
  localparam int unsigned VNET_W    = $clog2(NUM_VNETS);
  localparam int unsigned PLANE_W   = (NUM_SUBNETS > 2) ? $clog2(NUM_SUBNETS) : 1;
  localparam int unsigned CRED_W    = $clog2(BUF_DEPTH + 1);
  localparam int unsigned FLITCNT_W = $clog2(DATA_FLITS + 1);

  // Wide port numbers. Sub-port index = plane * NUM_PORTS + port.
  localparam int unsigned P_NORTH   = 0;  // towards y-1
  localparam int unsigned P_EAST    = 1;  // towards x+1
  localparam int unsigned P_SOUTH   = 2;  // towards y+1
  localparam int unsigned P_WEST    = 3;  // towards x-1
  localparam int unsigned P_CORE    = 4;  // local 0: processor core NI
  localparam int unsigned P_L2      = 5;  // local 1: L2 bank / directory NI

  typedef enum logic [1:0] {
    FT_HEAD     = 2'd0,
    FT_BODY     = 2'd1,
    FT_TAIL     = 2'd2,
    FT_HEADTAIL = 2'd3
  } ftype_t;

  // One flit on one subnet: SUBNET_W bits of payload plus side-band fields.
  typedef struct packed {
    logic                valid;
    ftype_t              ftype;
    logic [VNET_W-1:0]   vnet;
    logic [VC_W-1:0]     vc;     // VC at the receiving input buffer
    logic [NI_W-1:0]     src;    // source NI
    logic [NI_W-1:0]     dst;    // destination NI
    logic [SUBNET_W-1:0] data;
  } flit_t;

  // Credit returned upstream for one buffer slot; 'free' marks the tail,
  // after which the upstream may hand the VC to another packet.
  typedef struct packed {
    logic            valid;
    logic [VC_W-1:0] vc;
    logic            free;
  } credit_t;

  // Per CS-plane input sub-port: the CS_flag and the wide output port the
  // circuit leaves by (on the same plane).
  typedef struct packed {
    logic              cs_flag;
    logic [PORT_W-1:0] out_port;
  } cs_entry_t;

  // Router-to-router circuit that starts at this router on a given CS plane
  // and mesh direction, ending at dst_router.
  typedef struct packed {
    logic                valid;
    logic [ROUTER_W-1:0] dst_router;
  } r2r_entry_t;

  // End-to-end circuit that starts at an NI on a given CS plane.
  typedef struct packed {
    logic            valid;
    logic [NI_W-1:0] dst_ni;
  } e2e_entry_t;

  function automatic logic is_head(ftype_t t);
    return (t == FT_HEAD) || (t == FT_HEADTAIL);
  endfunction

  function automatic logic is_tail(ftype_t t);
    return (t == FT_TAIL) || (t == FT_HEADTAIL);
  endfunction

  function automatic logic [ROUTER_W-1:0] ni_router(logic [NI_W-1:0] ni);
    return ROUTER_W'(ni / NUM_LOCAL);
  endfunction

  // X-Y dimension-ordered route: wide output port at router 'cur' for a
  // packet heading to router 'dst' (P_CORE when cur == dst).
  function automatic logic [PORT_W-1:0] xy_port(logic [ROUTER_W-1:0] cur,
                                                logic [ROUTER_W-1:0] dst);
    int unsigned cx, cy, dx, dy;
    cx = cur % MESH_X;  cy = cur / MESH_X;
    dx = dst % MESH_X;  dy = dst / MESH_X;
    if (dx > cx)      return PORT_W'(P_EAST);
    else if (dx < cx) return PORT_W'(P_WEST);
    else if (dy > cy) return PORT_W'(P_SOUTH);
    else if (dy < cy) return PORT_W'(P_NORTH);
    else              return PORT_W'(P_CORE);
  endfunction

  function automatic int unsigned hop_count(int unsigned a, int unsigned b);
    int unsigned ax, ay, bx, by;
    ax = a % MESH_X; ay = a / MESH_X; bx = b % MESH_X; by = b / MESH_X;
    return ((ax > bx) ? ax - bx : bx - ax) + ((ay > by) ? ay - by : by - ay);
  endfunction

endpackage
