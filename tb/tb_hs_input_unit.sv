// tb_hs_input_unit: one CS-plane input sub-port (plane 1, west) of router 5.
// Buffered mode: a 3-flit packet is written, routed (head to router 7 ->
// east), VC-allocated and read out flit by flit under switch-allocation
// grants, with one credit per flit and 'free' on the tail. Four VCs are
// filled in parallel and drained in order. CS mode: flits bypass the
// buffers into the one-cycle input latch and the buffers are gated.
`timescale 1ns/1ps
module tb_hs_input_unit;
  import hs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  flit_t                flit_in, cs_flit, st_flit;
  logic                 cs_flag, hold, buf_gate, cs_busy, sa_gnt;
  r2r_entry_t           r2r_cfg [NUM_CS][NUM_DIRS];
  credit_t              credit_out;
  logic [NUM_VCS-1:0]   vc_req_va, vc_active, vc_nonempty, va_gnt;
  logic [SUBPORT_W-1:0] vc_route [NUM_VCS];
  logic [VC_W-1:0]      vc_outvc [NUM_VCS];
  logic [VC_W-1:0]      va_outvc [NUM_VCS];
  logic [VC_W-1:0]      sa_vc;
  logic [SUBPORT_W-1:0] st_out;
  int checks = 0, failures = 0;

  hs_input_unit #(.ROUTER_ID(5), .SUBPORT(NUM_PORTS + P_WEST)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic flit_t mk(ftype_t t, int vc, int dst, int data);
    flit_t f;
    f = '0; f.valid = 1; f.ftype = t; f.vc = VC_W'(vc); f.vnet = VNET_W'(vc / VCS_PER_VNET);
    f.src = 5'd3; f.dst = NI_W'(dst); f.data = SUBNET_W'(data);
    return f;
  endfunction

  flit_t pkt [3];
  initial begin
    flit_in = '0; cs_flag = 0; hold = 0; sa_gnt = 0; sa_vc = '0; va_gnt = '0;
    for (int v = 0; v < NUM_VCS; v++) va_outvc[v] = '0;
    for (int p = 0; p < NUM_CS; p++) for (int d = 0; d < NUM_DIRS; d++) r2r_cfg[p][d] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    pkt[0] = mk(FT_HEAD, 5, 14, 'h111); pkt[1] = mk(FT_BODY, 5, 14, 'h222); pkt[2] = mk(FT_TAIL, 5, 14, 'h333);
    // buffer write + route computation
    for (int i = 0; i < 3; i++) begin flit_in = pkt[i]; @(negedge clk); end
    flit_in = '0;
    chk(vc_req_va == NUM_VCS'(1 << 5), "VC 5 waits for VC allocation");
    chk(vc_route[5] == SUBPORT_W'(P_EAST), "route east on the VC plane");
    chk(vc_nonempty[5] && !buf_gate && !cs_flit.valid, "buffered, not bypassed");
    chk(cs_busy == 0, "no circuit route");
    // VC allocation
    va_gnt[5] = 1; va_outvc[5] = VC_W'(7); @(negedge clk); va_gnt = '0;
    chk(vc_active[5] && vc_outvc[5] == 7 && !vc_req_va[5], "VC 5 active with output VC 7");
    // switch allocation, one flit per grant
    for (int i = 0; i < 3; i++) begin
      sa_gnt = 1; sa_vc = VC_W'(5);
      @(negedge clk);
      sa_gnt = 0;
      chk(st_flit.valid && st_flit.data == pkt[i].data && st_flit.vc == 7 && st_out == SUBPORT_W'(P_EAST),
          $sformatf("flit %0d read out", i));
      chk(credit_out.valid && credit_out.vc == 5 && credit_out.free == (i == 2), $sformatf("credit %0d", i));
    end
    @(negedge clk);
    chk(!st_flit.valid && !credit_out.valid, "idle after packet");
    chk(vc_nonempty == '0 && vc_active == '0 && vc_req_va == '0, "VC back to idle");
    // four VCs (one per virtual network and more) with single-flit packets
    for (int v = 0; v < 4; v++) begin flit_in = mk(FT_HEADTAIL, v * 3, 2 * v, v); @(negedge clk); end
    flit_in = '0;
    chk(vc_req_va == NUM_VCS'('b001_001_001_001), "four VCs request VA");
    chk(vc_route[0] == SUBPORT_W'(P_WEST) && vc_route[3] == SUBPORT_W'(P_NORTH) && vc_route[6] == SUBPORT_W'(P_EAST),
        "routes west/north/east");
    va_gnt = NUM_VCS'('b001_001_001_001);
    for (int v = 0; v < NUM_VCS; v++) va_outvc[v] = VC_W'(v);
    @(negedge clk); va_gnt = '0;
    for (int v = 0; v < 4; v++) begin
      sa_gnt = 1; sa_vc = VC_W'(v * 3); @(negedge clk); sa_gnt = 0;
      chk(st_flit.valid && int'(st_flit.data) == v && credit_out.free, $sformatf("single flit %0d", v));
    end
    // CS mode: bypass and gate
    cs_flag = 1;
    @(negedge clk);
    chk(buf_gate, "buffers gated under CS");
    for (int i = 0; i < 5; i++) begin
      flit_t f;
      f = mk(FT_BODY, 2, 9, 100 + i);
      flit_in = f;
      @(negedge clk);
      chk(cs_flit == f, "one-cycle CS latch");
      chk(vc_nonempty == '0 && vc_req_va == '0, "nothing buffered under CS");
    end
    flit_in = '0; @(negedge clk);
    chk(!cs_flit.valid, "latch empties");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
