// hs_route_compute: route computation (RC) of the hybrid-switched router.
//
// For a head flit at router ROUTER_ID it returns the output sub-port
// (plane * NUM_PORTS + wide port). Packets for this router leave on the VC
// plane's local port chosen by the low bit of the destination NI. Other
// packets follow X-Y routing on the VC plane (plane 0), except that a packet
// injected at this router (from_local) whose destination router is the end
// of a router-to-router circuit starting here, in the X-Y direction, is
// steered onto that circuit's CS plane instead; the lowest such plane wins.
// 'hold' disables the steering while circuits are being reconfigured.
// Purely combinational.
//
// From the paper: X-Y routing; routing is kept at the first and last router
// of a router-to-router circuit; only flits whose source and destination
// match a formed circuit use it. Own choice: the table layout (one entry per
// CS plane and mesh direction) and that circuits follow X-Y paths.
module hs_route_compute
  import hs_pkg::*;
#(
  parameter int unsigned ROUTER_ID = 0
) (
  input  logic [NI_W-1:0]   dst_ni,
  input  logic              from_local,
  input  logic              hold,
  input  r2r_entry_t        r2r_cfg [NUM_CS][NUM_DIRS],
  output logic [SUBPORT_W-1:0] out_subport,
  output logic              to_circuit
);
  logic [ROUTER_W-1:0] dst_r;
  logic [PORT_W-1:0]   dir;

  always_comb begin
    dst_r       = ni_router(dst_ni);
    dir         = xy_port(ROUTER_W'(ROUTER_ID), dst_r);
    to_circuit  = 1'b0;
    if (dst_r == ROUTER_W'(ROUTER_ID)) begin
      out_subport = SUBPORT_W'(P_CORE + (dst_ni % NUM_LOCAL));
    end else begin
      out_subport = SUBPORT_W'(dir);
      if (from_local && !hold) begin
        for (int p = NUM_CS - 1; p >= 0; p--) begin
          if (r2r_cfg[p][dir[1:0]].valid && r2r_cfg[p][dir[1:0]].dst_router == dst_r) begin
            out_subport = SUBPORT_W'((p + 1) * NUM_PORTS + int'(dir));
            to_circuit  = 1'b1;
          end
        end
      end
    end
  end
endmodule
