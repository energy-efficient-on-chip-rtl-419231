// tb_hs_router: router 5 (x=1, y=1) on its own, the testbench playing its
// neighbours: downstream buffers that return a credit one cycle after every
// flit, upstream senders that keep within the credits returned.
// Checks: the 4-cycle VC pipeline (input to output latch), ejection to the
// local ports, two packets competing for one output without interleaving
// inside a VC, credits returned upstream, the 1-cycle circuit bypass with
// credits passed back along it, power-gate request of a CS input, and a
// router-to-router circuit start (routed onto the CS plane, VC pipeline
// kept) with cs_idle while a packet is on it.
`timescale 1ns/1ps
module tb_hs_router;
  import hs_pkg::*;
  localparam int NSP = NUM_SUBPORTS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  flit_t          in_flit    [NSP];
  credit_t        credit_out [NSP];
  flit_t          out_flit   [NSP];
  credit_t        credit_in  [NSP];
  cs_entry_t      cs_cfg     [NSP];
  r2r_entry_t     r2r_cfg    [NUM_CS][NUM_DIRS];
  logic           hold, cs_idle;
  logic [NSP-1:0] buf_gate;
  logic [31:0]    cs_flits;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  hs_router #(.ROUTER_ID(5)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d %s", cyc, what); end
  endtask

  // downstream model: credit one cycle after each flit, except on outputs
  // under test that drive credit_in themselves
  bit manual_credit [NSP];
  always @(posedge clk)
    for (int o = 0; o < NSP; o++)
      if (!manual_credit[o])
        credit_in[o] <= out_flit[o].valid ? '{valid: 1'b1, vc: out_flit[o].vc, free: is_tail(out_flit[o].ftype)} : '0;

  // output log
  flit_t  log_f [$];
  int     log_o [$];
  longint log_t [$];
  always @(posedge clk)
    for (int o = 0; o < NSP; o++)
      if (out_flit[o].valid) begin log_f.push_back(out_flit[o]); log_o.push_back(o); log_t.push_back(cyc); end

  // credits_seen also serves as the upstream credit counter: an input may
  // hold BUF_DEPTH flits more than it has returned credits for
  int credits_seen [NSP];
  int flits_sent   [NSP];
  always @(posedge clk)
    for (int i = 0; i < NSP; i++) if (credit_out[i].valid) credits_seen[i]++;

  function automatic flit_t mk(ftype_t t, int vc, int dst, int data);
    flit_t f;
    f = '0; f.valid = 1; f.ftype = t; f.vc = VC_W'(vc); f.vnet = VNET_W'(vc / VCS_PER_VNET);
    f.src = 5'd1; f.dst = NI_W'(dst); f.data = SUBNET_W'(data);
    return f;
  endfunction

  // send an n-flit packet into input sub-port i on VC vc
  task automatic send(int i, int vc, int dst, int n, int tag);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      in_flit[i] = '0;
      while (flits_sent[i] - credits_seen[i] >= BUF_DEPTH) @(negedge clk);
      flits_sent[i]++;
      in_flit[i] = mk(n == 1 ? FT_HEADTAIL : k == 0 ? FT_HEAD : k == n - 1 ? FT_TAIL : FT_BODY, vc, dst, tag * 16 + k);
    end
    @(negedge clk); in_flit[i] = '0;
  endtask

  // time at which the first flit after arming is sampled at an input
  bit arm = 0;
  longint t0;
  always @(posedge clk)
    if (arm) for (int i = 0; i < NSP; i++) if (in_flit[i].valid && arm) begin t0 = cyc; arm = 0; end

  initial begin
    for (int i = 0; i < NSP; i++) begin in_flit[i] = '0; credit_in[i] = '0; cs_cfg[i] = '0; manual_credit[i] = 0; credits_seen[i] = 0; flits_sent[i] = 0; end
    for (int p = 0; p < NUM_CS; p++) for (int d = 0; d < NUM_DIRS; d++) r2r_cfg[p][d] = '0;
    hold = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    log_f.delete(); log_o.delete(); log_t.delete();   // nothing logged during reset counts
    for (int i = 0; i < NSP; i++) credits_seen[i] = 0;

    // 1. VC pipeline: west input, 2-flit packet to NI 14 (router 7, east)
    @(negedge clk); arm = 1;
    send(P_WEST, 4, 14, 2, 1);
    repeat (10) @(negedge clk);
    chk(log_f.size() == 2, $sformatf("2 flits out (%0d)", log_f.size()));
    if (log_f.size() == 2) begin
      chk(log_o[0] == P_EAST && log_o[1] == P_EAST, "left east on the VC plane");
      chk(log_t[0] - t0 == 4, $sformatf("router latency %0d cycles", log_t[0] - t0));
      chk(log_f[0].data == 16 && log_f[1].data == 17 && is_head(log_f[0].ftype) && is_tail(log_f[1].ftype), "flit order and payload");
      chk(log_f[0].vc >= 4 && log_f[0].vc < 8 && log_f[0].vc == log_f[1].vc, "output VC in the same virtual network");
    end
    chk(credits_seen[P_WEST] == 2, "two credits upstream");
    log_f.delete(); log_o.delete(); log_t.delete();

    // 2. ejection to both local ports
    send(P_NORTH, 0, 10, 1, 2);
    send(P_SOUTH, 8, 11, 1, 3);
    repeat (10) @(negedge clk);
    chk(log_f.size() == 2 && log_o[0] == P_CORE && log_o[1] == P_L2, "ejected to core and L2 ports");
    log_f.delete(); log_o.delete(); log_t.delete();

    // 3. two 10-flit packets from west and core inputs, both to router 7
    fork
      send(P_WEST, 1, 14, 10, 4);
      send(P_CORE, 2, 15, 10, 5);
    join
    repeat (40) @(negedge clk);
    chk(log_f.size() == 20, $sformatf("20 flits out (%0d)", log_f.size()));
    begin
      int k4, k5; bit ok; ok = 1; k4 = 0; k5 = 0;
      foreach (log_f[j]) begin
        if (log_o[j] != P_EAST) ok = 0;
        if (log_f[j].data / 16 == 4) begin if (log_f[j].data % 16 != k4) ok = 0; k4++; end
        else begin if (log_f[j].data % 16 != k5) ok = 0; k5++; end
      end
      chk(ok && k4 == 10 && k5 == 10, "both packets complete and in order");
      chk(log_f[0].vc != log_f[19].vc || log_f[0].data / 16 == log_f[19].data / 16, "distinct VCs for the two packets");
    end
    log_f.delete(); log_o.delete(); log_t.delete();

    // 4. circuit through the router: plane-1 west input -> plane-1 east output
    cs_cfg[NUM_PORTS + P_WEST] = '{cs_flag: 1'b1, out_port: 3'(P_EAST)};
    manual_credit[NUM_PORTS + P_EAST] = 1;
    @(negedge clk);
    chk(buf_gate == NSP'(1) << (NUM_PORTS + P_WEST), "gate request of the CS input only");
    arm = 1;
    send(NUM_PORTS + P_WEST, 3, 6, 3, 6);
    repeat (5) @(negedge clk);
    chk(log_f.size() == 3 && log_o[0] == NUM_PORTS + P_EAST, "circuit flits out east on plane 1");
    if (log_f.size() == 3) chk(log_t[0] - t0 == 1 && log_t[2] - t0 == 3, $sformatf("1-cycle traversal (%0d)", log_t[0] - t0));
    chk(log_f.size() == 3 && log_f[0].vc == 3, "VC field untouched on a circuit");
    chk(cs_flits == 3, "circuit flits counted");
    credit_in[NUM_PORTS + P_EAST] = '{valid: 1'b1, vc: 4'd3, free: 1'b1};
    #1;
    chk(credit_out[NUM_PORTS + P_WEST] == credit_in[NUM_PORTS + P_EAST], "credit passed back along the circuit");
    @(negedge clk); credit_in[NUM_PORTS + P_EAST] = '0;
    manual_credit[NUM_PORTS + P_EAST] = 0;
    cs_cfg[NUM_PORTS + P_WEST] = '0;
    log_f.delete(); log_o.delete(); log_t.delete();

    // 5. router-to-router circuit start: core input, destination router 7
    r2r_cfg[0][P_EAST] = '{valid: 1'b1, dst_router: 4'd7};
    manual_credit[NUM_PORTS + P_EAST] = 1;
    @(negedge clk); arm = 1;
    send(P_CORE, 0, 14, 1, 7);
    repeat (6) @(negedge clk);
    chk(log_f.size() == 1 && log_o[0] == NUM_PORTS + P_EAST, "injected packet steered onto the circuit");
    if (log_f.size() == 1) chk(log_t[0] - t0 == 4, "VC pipeline kept at the first router");
    chk(!cs_idle, "busy until the circuit's tail credit returns");
    credit_in[NUM_PORTS + P_EAST] = '{valid: 1'b1, vc: log_f.size() ? log_f[0].vc : '0, free: 1'b1};
    @(negedge clk); credit_in[NUM_PORTS + P_EAST] = '0; #1;
    chk(cs_idle, "idle after the tail credit");
    manual_credit[NUM_PORTS + P_EAST] = 0;
    log_f.delete(); log_o.delete(); log_t.delete();
    // transit packets (from a mesh port) do not use it
    send(P_WEST, 0, 14, 1, 8);
    repeat (6) @(negedge clk);
    chk(log_f.size() == 1 && log_o[0] == P_EAST, "transit packet stays on the VC plane");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
