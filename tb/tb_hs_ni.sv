// tb_hs_ni: network interface 0, the testbench playing the router.
// Checks packet segmentation (2-flit control, 10-flit data packets, head /
// body / tail, payload slices), VC choice within the virtual network, the
// credit limit (only 4 flits without credits back), end-to-end circuit
// matching (plane 1 for the configured destination only, not under hold),
// cs_idle, the receive path (flit and credit one cycle later) and the
// traffic profile and flit counters.
`timescale 1ns/1ps
module tb_hs_ni;
  import hs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic                 pkt_valid, pkt_ready, pkt_is_data, hold, cs_idle;
  logic [NI_W-1:0]      pkt_dst, stat_idx;
  logic [VNET_W-1:0]    pkt_vnet;
  logic [DATA_BITS-1:0] pkt_data;
  flit_t                inj_flit   [NUM_SUBNETS];
  credit_t              inj_credit [NUM_SUBNETS];
  flit_t                ej_flit    [NUM_SUBNETS];
  credit_t              ej_credit  [NUM_SUBNETS];
  flit_t                rx_flit    [NUM_SUBNETS];
  e2e_entry_t           e2e_cfg    [NUM_CS];
  logic                 stat_freeze, stat_clear;
  logic [31:0]          stat_count, tx_flits, tx_cs_flits;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  hs_ni #(.NI_ID(0)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d %s", cyc, what); end
  endtask

  // router model: returns a credit 'lag' cycles after each flit, if enabled
  bit credits_on = 1;
  flit_t  log_f [$];
  int     log_p [$];
  longint log_t [$];
  credit_t pend [NUM_SUBNETS][$];
  always @(posedge clk) begin
    for (int p = 0; p < NUM_SUBNETS; p++) begin
      inj_credit[p] <= '0;
      if (inj_flit[p].valid) begin
        log_f.push_back(inj_flit[p]); log_p.push_back(p); log_t.push_back(cyc);
        pend[p].push_back('{valid: 1'b1, vc: inj_flit[p].vc, free: is_tail(inj_flit[p].ftype)});
      end
      if (credits_on && pend[p].size() > 0) inj_credit[p] <= pend[p].pop_front();
    end
  end

  longint t_hs;
  task automatic send(int dst, bit data, int vnet, logic [DATA_BITS-1:0] d);
    @(negedge clk);
    pkt_valid = 1; pkt_dst = NI_W'(dst); pkt_is_data = data; pkt_vnet = VNET_W'(vnet); pkt_data = d;
    do @(posedge clk); while (!pkt_ready);
    t_hs = cyc;
    @(negedge clk); pkt_valid = 0;
  endtask

  function automatic logic [DATA_BITS-1:0] rnd_data();
    logic [DATA_BITS-1:0] d;
    for (int k = 0; k < DATA_BITS / 32; k++) d[k*32 +: 32] = $urandom;
    return d;
  endfunction

  logic [DATA_BITS-1:0] d0;
  int ref_prof [NUM_NIS];
  initial begin
    pkt_valid = 0; pkt_dst = '0; pkt_is_data = 0; pkt_vnet = '0; pkt_data = '0; hold = 0;
    stat_freeze = 0; stat_clear = 0; stat_idx = '0;
    for (int p = 0; p < NUM_SUBNETS; p++) ej_flit[p] = '0;
    for (int p = 0; p < NUM_CS; p++) e2e_cfg[p] = '0;
    for (int d = 0; d < NUM_NIS; d++) ref_prof[d] = 0;
    repeat (2) @(negedge clk); rst_n = 1;

    // 1. control packet, VC plane
    d0 = rnd_data();
    send(9, 0, 2, d0); ref_prof[9] += CTRL_FLITS;
    repeat (6) @(negedge clk);
    chk(log_f.size() == CTRL_FLITS, "control packet flit count");
    foreach (log_f[k]) begin
      chk(log_p[k] == 0, "VC plane");
      chk(log_f[k].data == d0[k*SUBNET_W +: SUBNET_W], "payload slice");
      chk(log_f[k].vc >= 8 && log_f[k].vc < 12 && log_f[k].vnet == 2 && log_f[k].dst == 9 && log_f[k].src == 0, "header fields");
    end
    chk(log_f[0].ftype == FT_HEAD && log_f[CTRL_FLITS-1].ftype == FT_TAIL, "head and tail");
    chk(log_t[0] - t_hs == 3, $sformatf("first flit %0d cycles after accept", log_t[0] - t_hs));
    log_f.delete(); log_p.delete(); log_t.delete();

    // 2. data packet with credits withheld: only BUF_DEPTH flits go out
    credits_on = 0;
    d0 = rnd_data();
    send(3, 1, 0, d0); ref_prof[3] += DATA_FLITS;
    repeat (20) @(negedge clk);
    chk(log_f.size() == BUF_DEPTH, $sformatf("stalled after %0d flits", log_f.size()));
    chk(!pkt_ready, "busy while the packet is incomplete");
    credits_on = 1;
    repeat (30) @(negedge clk);
    chk(log_f.size() == DATA_FLITS, "data packet flit count");
    foreach (log_f[k]) chk(log_f[k].data == d0[k*SUBNET_W +: SUBNET_W], "data slice");
    chk(log_f[DATA_FLITS-1].ftype == FT_TAIL && log_f[1].ftype == FT_BODY, "body/tail types");
    log_f.delete(); log_p.delete(); log_t.delete();

    // 3. end-to-end circuit to NI 6 on plane 1
    e2e_cfg[0] = '{valid: 1'b1, dst_ni: 5'd6};
    send(6, 0, 1, rnd_data()); ref_prof[6] += CTRL_FLITS;
    @(negedge clk); @(negedge clk);
    chk(!cs_idle, "not idle while on a circuit");
    repeat (6) @(negedge clk);
    chk(log_f.size() == CTRL_FLITS && log_p[0] == 1 && log_p[CTRL_FLITS-1] == 1, "circuit plane used");
    chk(cs_idle, "idle after the tail credit");
    log_f.delete(); log_p.delete(); log_t.delete();
    send(7, 0, 1, rnd_data()); ref_prof[7] += CTRL_FLITS;
    repeat (8) @(negedge clk);
    chk(log_f.size() == CTRL_FLITS && log_p[0] == 0, "other destination on the VC plane");
    log_f.delete(); log_p.delete(); log_t.delete();
    hold = 1;
    send(6, 0, 1, rnd_data()); ref_prof[6] += CTRL_FLITS;
    repeat (8) @(negedge clk);
    chk(log_f.size() == CTRL_FLITS && log_p[0] == 0, "hold keeps the packet off the circuit");
    hold = 0;
    log_f.delete(); log_p.delete(); log_t.delete();
    chk(tx_flits == 3 * CTRL_FLITS + CTRL_FLITS + DATA_FLITS && tx_cs_flits == CTRL_FLITS, "flit counters");

    // 4. receive path
    for (int p = 0; p < NUM_SUBNETS; p++) begin
      flit_t f;
      f = '0; f.valid = 1; f.ftype = FT_HEADTAIL; f.vc = VC_W'(p + 3); f.data = SUBNET_W'(p + 77);
      @(negedge clk); ej_flit[p] = f;
      @(negedge clk); ej_flit[p] = '0;
      chk(rx_flit[p] == f, "flit delivered one cycle later");
      chk(ej_credit[p].valid && ej_credit[p].vc == VC_W'(p + 3) && ej_credit[p].free, "credit returned at once");
    end

    // 5. profile
    for (int d = 0; d < NUM_NIS; d++) begin
      stat_idx = NI_W'(d); #1;
      chk(int'(stat_count) == ref_prof[d], $sformatf("profile dst %0d", d));
    end
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
