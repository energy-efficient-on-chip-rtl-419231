// Shared body of the whole-network testbenches (tb_hs_noc_top and
// tb_hs_noc_full). Included inside a module that declares
//   localparam bit RUN_ADAPTIVE, localparam int EPOCH_LEN_TB, CONFIG_LEN_TB
// and instantiates hs_noc_top as 'dut' on the signals declared here.
//
// What it does:
//   * drives random traffic from all 32 NIs, with a "favourite" destination
//     per NI so that the traffic has the regularity circuits exploit;
//   * checks every delivered packet flit by flit (payload is a function of a
//     packet id carried in the first flit), its source, virtual network and
//     length, and that every packet sent is delivered exactly once;
//   * measures zero-load head latency of a 3-hop packet under VC switching,
//     over an end-to-end circuit and over a router-to-router circuit;
//   * plays the circuit set-up software: reads the NIs' traffic profile,
//     runs the greedy algorithm (candidates sorted by flits x hops, taken
//     from the top, conflicting ones dropped) and writes the configuration;
//   * counts each mechanism of the design and fails if one never occurred.

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NUM_NIS-1:0]      pkt_valid;
  logic [NUM_NIS-1:0]      pkt_ready;
  logic [NI_W-1:0]         pkt_dst     [NUM_NIS];
  logic [VNET_W-1:0]       pkt_vnet    [NUM_NIS];
  logic [NUM_NIS-1:0]      pkt_is_data;
  logic [DATA_BITS-1:0]    pkt_data    [NUM_NIS];
  flit_t                   rx_flit     [NUM_NIS][NUM_SUBNETS];
  logic                    cfg_we;
  logic [15:0]             cfg_addr, cfg_wdata;
  logic                    adaptive_en, apply_req;
  logic                    in_config, hold;
  logic [31:0]             epoch_count;
  logic [NI_W-1:0]         stat_ni, stat_dst;
  logic [31:0]             stat_count;
  logic [NUM_SUBPORTS-1:0] buf_gate    [NUM_ROUTERS];
  logic [31:0]             tx_flits    [NUM_NIS];
  logic [31:0]             tx_cs_flits [NUM_NIS];
  logic [31:0]             router_cs_flits [NUM_ROUTERS];

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ---------------- packet payloads ----------------
  function automatic logic [DATA_BITS-1:0] payload(int id);
    logic [DATA_BITS-1:0] d;
    for (int k = 0; k < DATA_BITS / 32; k++)
      d[k*32 +: 32] = (k == 0) ? 32'(id) : (32'(id) * 32'h9E3779B1) ^ (32'(k) * 32'h85EBCA6B);
    return d;
  endfunction

  localparam int MAXPKT = 60000;
  int  exp_src  [MAXPKT];
  int  exp_dst  [MAXPKT];
  int  exp_vnet [MAXPKT];
  bit  exp_data [MAXPKT];
  bit  got      [MAXPKT];
  int  next_id = 0;
  int  sent = 0, received = 0;

  // ---------------- mechanism counters ----------------
  int m_vc_pkts = 0, m_e2e_flits = 0, m_r2r_flits = 0, m_credit_stall = 0;
  int m_gate_cycles = 0, m_hold_cycles = 0, m_apply = 0, m_config_cycles = 0;
  int m_data_pkts = 0, m_ctrl_pkts = 0;

  // ---------------- traffic generator ----------------
  int  rate_permille = 0;      // start probability per NI per cycle
  int  fav_pct = 70;
  int  fav [NUM_NIS];
  bit  gen_on = 0;

  always @(negedge clk) begin
    for (int n = 0; n < NUM_NIS; n++) begin
      if (pkt_valid[n] && pkt_ready[n]) ; // handshake seen at posedge
      // NI 0 is a heavy sender so that its favourite pair tops the profile
      if (!pkt_valid[n] && gen_on && ($urandom % 1000) < (n == 0 ? 8 * rate_permille : rate_permille) &&
          next_id < MAXPKT - 1) begin
        int d, id;
        if (n == 0 || ($urandom % 100) < fav_pct) d = fav[n];
        else begin
          d = $urandom % NUM_NIS;
          if (d == n) d = (d + 1) % NUM_NIS;
        end
        id = next_id; next_id++;
        exp_src[id]  = n;
        exp_dst[id]  = d;
        exp_vnet[id] = $urandom % NUM_VNETS;
        exp_data[id] = $urandom % 2;
        pkt_valid[n]   <= 1'b1;
        pkt_dst[n]     <= NI_W'(d);
        pkt_vnet[n]    <= VNET_W'(exp_vnet[id]);
        pkt_is_data[n] <= exp_data[id];
        pkt_data[n]    <= payload(id);
      end
    end
  end

  always @(posedge clk) begin
    for (int n = 0; n < NUM_NIS; n++)
      if (pkt_valid[n] && pkt_ready[n]) begin
        pkt_valid[n] <= 1'b0;
        sent++;
        if (pkt_is_data[n]) m_data_pkts++; else m_ctrl_pkts++;
      end
  end

  // directed single packet (used for latency measurements)
  task automatic send_one(int s, int d, bit is_data);
    int id;
    @(negedge clk);
    id = next_id; next_id++;
    exp_src[id] = s; exp_dst[id] = d; exp_vnet[id] = 0; exp_data[id] = is_data;
    pkt_valid[s] <= 1'b1; pkt_dst[s] <= NI_W'(d); pkt_vnet[s] <= '0;
    pkt_is_data[s] <= is_data; pkt_data[s] <= payload(id);
  endtask

  // ---------------- receive checker ----------------
  int  rx_id   [NUM_NIS][NUM_SUBNETS][NUM_VCS];
  int  rx_idx  [NUM_NIS][NUM_SUBNETS][NUM_VCS];

  always @(posedge clk) begin
    if (rst_n) begin
      for (int n = 0; n < NUM_NIS; n++)
        for (int p = 0; p < NUM_SUBNETS; p++) begin
          flit_t f;
          f = rx_flit[n][p];
          if (f.valid) begin
            int id, k;
            logic [DATA_BITS-1:0] exp;
            if (is_head(f.ftype)) begin
              rx_id[n][p][f.vc]  = int'(f.data[31:0]);
              rx_idx[n][p][f.vc] = 0;
            end
            id = rx_id[n][p][f.vc];
            k  = rx_idx[n][p][f.vc];
            if (id < 0 || id >= next_id) begin
              check(0, $sformatf("NI %0d received unknown packet id %0d", n, id));
            end else begin
              exp = payload(id);
              if (f.data != exp[k*SUBNET_W +: SUBNET_W] || int'(f.dst) != n ||
                  int'(f.src) != exp_src[id] || int'(f.vnet) != exp_vnet[id] || exp_dst[id] != n) begin
                check(0, $sformatf("NI %0d pkt %0d flit %0d wrong (src %0d dst %0d)", n, id, k, f.src, f.dst));
              end
              if (p != 0) m_e2e_flits++;
              if (is_tail(f.ftype)) begin
                check((k + 1) == (exp_data[id] ? DATA_FLITS : CTRL_FLITS),
                      $sformatf("pkt %0d length %0d", id, k + 1));
                check(!got[id], $sformatf("pkt %0d delivered twice", id));
                got[id] = 1'b1;
                received++;
                if (p == 0) m_vc_pkts++;
              end
            end
            rx_idx[n][p][f.vc] = k + 1;
          end
        end
    end
  end

  // ---------------- mechanism observation ----------------
  for (genvar n = 0; n < NUM_NIS; n++) begin : g_stall
    always @(posedge clk)
      if (rst_n && dut.g_ni[n].u_ni.state == 2'd2 && !dut.g_ni[n].u_ni.send) m_credit_stall++;
  end
  always @(posedge clk) begin
    if (rst_n) begin
      for (int r = 0; r < NUM_ROUTERS; r++) if (buf_gate[r] != '0) begin m_gate_cycles++; break; end
      if (hold) m_hold_cycles++;
      if (in_config) m_config_cycles++;
      if (dut.apply) m_apply++;
    end
  end

  // ---------------- latency probes ----------------
  // NI 0 sits at router 0 (0,0); NI 6 at router 3 (3,0): three hops apart.
  longint t_inj = -1, t_ej = -1;
  always @(posedge clk) begin
    for (int p = 0; p < NUM_SUBNETS; p++) begin
      if (dut.g_ni[0].inj_flit[p].valid && is_head(dut.g_ni[0].inj_flit[p].ftype) &&
          dut.g_ni[0].inj_flit[p].dst == 6) t_inj = cyc;
      if (dut.g_ni[6].ej_flit[p].valid && is_head(dut.g_ni[6].ej_flit[p].ftype) &&
          dut.g_ni[6].ej_flit[p].src == 0) t_ej = cyc;
    end
  end

  task automatic latency_test(int expect_cycles, string what);
    t_inj = -1; t_ej = -1;
    send_one(0, 6, 1'b0);
    repeat (200) @(posedge clk);
    $display("latency %s: %0d cycles (expected %0d)", what, t_ej - t_inj, expect_cycles);
    check(t_inj >= 0 && t_ej - t_inj == longint'(expect_cycles), $sformatf("%s latency", what));
  endtask

  // ---------------- configuration bus ----------------
  task automatic cfg_write(int tbl, int unit, int ent, int data);
    @(negedge clk);
    cfg_we    <= 1'b1;
    cfg_addr  <= {2'(tbl), 6'(unit), 8'(ent)};
    cfg_wdata <= 16'(data);
    @(negedge clk);
    cfg_we    <= 1'b0;
  endtask

  // Walk the X-Y path from router a to router b; returns routers and the
  // output direction taken at each.
  function automatic int xy_path(int a, int b, ref int rts[8], ref int dirs[8]);
    int cur, h;
    cur = a; h = 0;
    while (cur != b) begin
      int d;
      d = int'(xy_port(ROUTER_W'(cur), ROUTER_W'(b)));
      rts[h] = cur; dirs[h] = d; h++;
      case (d)
        0: cur = cur - MESH_X;
        1: cur = cur + 1;
        2: cur = cur + MESH_X;
        default: cur = cur - 1;
      endcase
    end
    rts[h] = b;
    return h;
  endfunction

  // resources on each CS plane: [plane][router][port]
  bit used_in  [NUM_SUBNETS][NUM_ROUTERS][NUM_PORTS];
  bit used_out [NUM_SUBNETS][NUM_ROUTERS][NUM_PORTS];
  bit used_ni  [NUM_SUBNETS][NUM_NIS];

  // Try to place an end-to-end circuit a->b (NIs) on some CS plane; writes it.
  task automatic place_e2e(int a, int b, output bit ok);
    int rts[8], dirs[8], h, ra, rb, la, lb;
    ra = a / NUM_LOCAL; rb = b / NUM_LOCAL; la = P_CORE + a % NUM_LOCAL; lb = P_CORE + b % NUM_LOCAL;
    h = xy_path(ra, rb, rts, dirs);
    ok = 0;
    for (int p = 1; p < NUM_SUBNETS && !ok; p++) begin
      bit free;
      free = !used_ni[p][a] && !used_in[p][ra][la] && !used_out[p][rb][lb];
      for (int i = 0; i < h; i++)
        if (used_out[p][rts[i]][dirs[i]] || used_in[p][rts[i+1]][(dirs[i] + 2) % 4]) free = 0;
      if (free) begin
        int inport;
        used_ni[p][a] = 1; used_in[p][ra][la] = 1; used_out[p][rb][lb] = 1;
        inport = la;
        for (int i = 0; i < h; i++) begin
          used_out[p][rts[i]][dirs[i]] = 1;
          used_in[p][rts[i+1]][(dirs[i] + 2) % 4] = 1;
          cfg_write(0, rts[i], p * NUM_PORTS + inport, 8 | dirs[i]);
          inport = (dirs[i] + 2) % 4;
        end
        cfg_write(0, rb, p * NUM_PORTS + inport, 8 | lb);
        cfg_write(2, a, p - 1, 32 | b);
        ok = 1;
      end
    end
  endtask

  // Try to place a router-to-router circuit A->B on some CS plane.
  task automatic place_r2r(int ra, int rb, output bit ok);
    int rts[8], dirs[8], h;
    h = xy_path(ra, rb, rts, dirs);
    ok = 0;
    for (int p = 1; p < NUM_SUBNETS && !ok; p++) begin
      bit free;
      free = 1;
      for (int i = 0; i < h; i++)
        if (used_out[p][rts[i]][dirs[i]] || used_in[p][rts[i+1]][(dirs[i] + 2) % 4]) free = 0;
      if (free) begin
        for (int i = 0; i < h; i++) begin
          used_out[p][rts[i]][dirs[i]] = 1;
          used_in[p][rts[i+1]][(dirs[i] + 2) % 4] = 1;
          if (i > 0) cfg_write(0, rts[i], p * NUM_PORTS + (dirs[i-1] + 2) % 4, 8 | dirs[i]);
        end
        cfg_write(1, ra, (p - 1) * NUM_DIRS + dirs[0], 16 | rb);
        ok = 1;
      end
    end
  endtask

  // Greedy circuit set-up from the NIs' profile. e2e=1: NI-to-NI circuits,
  // e2e=0: router-to-router circuits. Returns the number of circuits formed.
  longint prof [NUM_NIS][NUM_NIS];
  task automatic read_profile();
    for (int s = 0; s < NUM_NIS; s++)
      for (int d = 0; d < NUM_NIS; d++) begin
        @(negedge clk);
        stat_ni <= NI_W'(s); stat_dst <= NI_W'(d);
        @(posedge clk); #1;
        prof[s][d] = stat_count;
      end
  endtask

  task automatic greedy(bit e2e, output int formed);
    longint score [NUM_NIS * NUM_NIS];
    bit     taken [NUM_NIS * NUM_NIS];
    int     n;
    n = e2e ? NUM_NIS : NUM_ROUTERS;
    formed = 0;
    for (int i = 0; i < n * n; i++) begin score[i] = 0; taken[i] = 0; end
    for (int s = 0; s < NUM_NIS; s++)
      for (int d = 0; d < NUM_NIS; d++) begin
        int a, b;
        a = e2e ? s : s / NUM_LOCAL; b = e2e ? d : d / NUM_LOCAL;
        score[a * n + b] += prof[s][d] * hop_count(s / NUM_LOCAL, d / NUM_LOCAL);
      end
    for (int p = 0; p < NUM_SUBNETS; p++)
      for (int r = 0; r < NUM_ROUTERS; r++)
        for (int q = 0; q < NUM_PORTS; q++) begin used_in[p][r][q] = 0; used_out[p][r][q] = 0; end
    for (int p = 0; p < NUM_SUBNETS; p++) for (int i = 0; i < NUM_NIS; i++) used_ni[p][i] = 0;
    cfg_write(3, 0, 0, 0);   // clear the shadow configuration
    forever begin
      int best; longint bs; bit ok;
      best = -1; bs = 0;
      for (int i = 0; i < n * n; i++)
        if (!taken[i] && score[i] > bs) begin bs = score[i]; best = i; end
      if (best < 0) break;
      taken[best] = 1;
      if (e2e) place_e2e(best / n, best % n, ok);
      else     place_r2r(best / n, best % n, ok);
      if (ok) formed++;
    end
  endtask

  task automatic apply_static();
    @(negedge clk); apply_req <= 1'b1;
    @(negedge clk); apply_req <= 1'b0;
    wait (dut.apply === 1'b1);
    @(posedge clk);
  endtask

  task automatic run_traffic(int cycles, int rate);
    rate_permille = rate;
    gen_on = 1;
    repeat (cycles) @(posedge clk);
    gen_on = 0;
  endtask

  task automatic drain(int maxc);
    int c;
    c = 0;
    while ((received != sent || pkt_valid != '0) && c < maxc) begin @(posedge clk); c++; end
    check(received == sent && pkt_valid == '0,
          $sformatf("drain: sent %0d received %0d", sent, received));
  endtask

  function automatic longint sum_cs_flits();
    longint s; s = 0;
    for (int r = 0; r < NUM_ROUTERS; r++) s += router_cs_flits[r];
    return s;
  endfunction

  // ---------------- test sequence ----------------
  initial begin : main
    int formed, h3_vc, h3_cs, h3_r2r, stat_before;
    longint cs0;
    pkt_valid = '0; pkt_is_data = '0; cfg_we = 0; cfg_addr = '0; cfg_wdata = '0;
    adaptive_en = 0; apply_req = 0; stat_ni = '0; stat_dst = '0;
    for (int n = 0; n < NUM_NIS; n++) begin
      pkt_dst[n] = '0; pkt_vnet[n] = '0; pkt_data[n] = '0;
      fav[n] = (n * 7 + 5) % NUM_NIS;
      if (fav[n] == n) fav[n] = (n + 1) % NUM_NIS;
      for (int p = 0; p < NUM_SUBNETS; p++) for (int v = 0; v < NUM_VCS; v++) begin
        rx_id[n][p][v] = -1; rx_idx[n][p][v] = 0;
      end
    end
    fav[0] = 6;   // NI 0 talks mostly to NI 6, three hops away
    for (int i = 0; i < MAXPKT; i++) got[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // 1. pure VC network: zero-load latency, 4 cycles per router, 1 per link
    h3_vc  = 4 * 4 + 3;
    h3_cs  = 4 + 3;                 // the paper's 7 cycles for 3 hops
    h3_r2r = 4 + 1 + 1 + 4 + 3;     // routing at the first and last router only
    latency_test(h3_vc, "VC 3 hops");
    drain(2000);

    // 2. test run: VC-only random traffic, profiled by the NIs
    run_traffic(2000, 30);
    drain(20000);
    check(m_credit_stall > 0, "credit stalls occurred under load");
    read_profile();
    check(prof[0][6] > 0, "profile counted NI 0 -> NI 6 traffic");

    // 3. static end-to-end circuits from the profile (greedy)
    greedy(1'b1, formed);
    $display("end-to-end circuits formed: %0d", formed);
    check(formed > 0, "greedy formed end-to-end circuits");
    apply_static();
    @(negedge clk);
    check(dut.e2e_cfg[0][0].valid && dut.e2e_cfg[0][0].dst_ni == 6, "circuit NI0->NI6 is the heaviest");
    latency_test(h3_cs, "end-to-end circuit 3 hops");
    run_traffic(2000, 30);
    drain(20000);
    check(m_e2e_flits > 0, "flits travelled on end-to-end circuits");

    // 4. static router-to-router circuits from the same profile
    greedy(1'b0, formed);
    $display("router-to-router circuits formed: %0d", formed);
    check(formed > 0, "greedy formed router-to-router circuits");
    apply_static();
    cs0 = sum_cs_flits();
    latency_test(h3_r2r, "router-to-router circuit 3 hops");
    run_traffic(2000, 30);
    drain(20000);
    m_r2r_flits = int'(sum_cs_flits() - cs0);
    check(m_r2r_flits > 0, "flits crossed routers on router-to-router circuits");

    // 5. runtime adaptive: epochs, configuration periods, re-formed circuits
    if (RUN_ADAPTIVE) begin
      int e0;
      e0 = int'(epoch_count);
      adaptive_en = 1'b1;
      rate_permille = 20;
      gen_on = 1;
      for (int ep = 0; ep < 2; ep++) begin
        // change the traffic pattern each epoch
        for (int n = 0; n < NUM_NIS; n++) begin
          fav[n] = (n * (5 + 2 * ep) + 3 + ep) % NUM_NIS;
          if (fav[n] == n) fav[n] = (n + 1) % NUM_NIS;
        end
        wait (in_config === 1'b1);
        stat_before = 0;
        read_profile();
        for (int s = 0; s < NUM_NIS; s++) stat_before += int'(prof[s][fav[s]] > 0);
        check(stat_before > 0, "epoch profile is non-empty");
        greedy(ep[0], formed);
        $display("epoch %0d: %0d circuits formed (%s)", ep, formed, ep[0] ? "end-to-end" : "router-to-router");
        check(formed > 0, "adaptive set-up formed circuits");
        wait (in_config === 1'b0);
        wait (dut.apply === 1'b1);
        @(posedge clk);
      end
      gen_on = 0;
      adaptive_en = 1'b0;
      drain(40000);
      check(int'(epoch_count) - e0 >= 2, "two epochs completed");
      check(m_config_cycles > 0, "configuration periods occurred");
    end

    // mechanism summary
    $display("mechanisms: vc_pkts=%0d e2e_flits=%0d r2r_flits=%0d credit_stall=%0d gated=%0d hold=%0d apply=%0d config=%0d data=%0d ctrl=%0d",
             m_vc_pkts, m_e2e_flits, m_r2r_flits, m_credit_stall, m_gate_cycles, m_hold_cycles,
             m_apply, m_config_cycles, m_data_pkts, m_ctrl_pkts);
    check(m_vc_pkts > 0,      "VC-switched packets delivered");
    check(m_gate_cycles > 0,  "buffers power-gated under CS");
    check(m_hold_cycles > 0,  "drain before reconfiguration");
    check(m_apply >= 2,       "configurations applied");
    check(m_data_pkts > 0 && m_ctrl_pkts > 0, "both packet sizes sent");
    $display("packets sent %0d received %0d", sent, received);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
