// tb_hs_route_compute: checks route computation at router 5 (x=1, y=1) of
// the 4x4 mesh for every destination NI, with and without a
// router-to-router circuit entry, against an independent X-Y model.
// The module is combinational; outputs are sampled 1 ns after each input
// change. X-Y routing follows the source system; the port numbering and
// the router-to-router lookup rule are this design's.
`timescale 1ns/1ps
module tb_hs_route_compute;
  import hs_pkg::*;
  localparam int ME = 5;

  logic [NI_W-1:0]      dst_ni;
  logic                 from_local, hold;
  r2r_entry_t           r2r_cfg [NUM_CS][NUM_DIRS];
  logic [SUBPORT_W-1:0] out_subport;
  logic                 to_circuit;
  int checks = 0, failures = 0;

  hs_route_compute #(.ROUTER_ID(ME)) dut (.*);

  // reference: X first, then Y; N=0 E=1 S=2 W=3, local 4/5
  function automatic int ref_port(int d);
    int mx, my, dx, dy, dr;
    dr = d / 2; mx = ME % 4; my = ME / 4; dx = dr % 4; dy = dr / 4;
    if (dx > mx) return 1;
    if (dx < mx) return 3;
    if (dy > my) return 2;
    if (dy < my) return 0;
    return 4 + d % 2;
  endfunction

  task automatic chk(int exp_sp, bit exp_circ, string what);
    #1;
    checks++;
    if (int'(out_subport) != exp_sp || to_circuit != exp_circ) begin
      failures++;
      $display("FAIL %s: dst %0d got %0d/%0d expected %0d/%0d", what, dst_ni, out_subport, to_circuit, exp_sp, exp_circ);
    end
  endtask

  initial begin
    for (int p = 0; p < NUM_CS; p++) for (int d = 0; d < NUM_DIRS; d++) r2r_cfg[p][d] = '0;
    hold = 0;
    // plain X-Y routing from every input kind
    for (int l = 0; l < 2; l++)
      for (int d = 0; d < NUM_NIS; d++) begin
        from_local = l[0]; dst_ni = NI_W'(d);
        chk(ref_port(d), 0, "xy");
      end
    // circuit 5 -> 7 on CS plane 1, leaving east
    r2r_cfg[0][P_EAST] = '{valid: 1'b1, dst_router: 4'd7};
    for (int d = 0; d < NUM_NIS; d++) begin
      from_local = 1; dst_ni = NI_W'(d);
      chk((d / 2 == 7) ? NUM_PORTS + 1 : ref_port(d), d / 2 == 7, "r2r local");
      from_local = 0;
      chk(ref_port(d), 0, "r2r transit");
    end
    // hold keeps packets off the circuit
    hold = 1; from_local = 1; dst_ni = NI_W'(14);
    chk(1, 0, "hold");
    hold = 0;
    chk(NUM_PORTS + 1, 1, "after hold");
    // an invalid entry is ignored
    r2r_cfg[0][P_EAST].valid = 1'b0;
    chk(1, 0, "invalid entry");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
