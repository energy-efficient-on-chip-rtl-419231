// tb_hs_crossbar: buffered flits reach the output chosen by switch
// allocation one cycle later (output latch); a CS-plane input with its
// CS_flag set drives its fixed output in the same cycle, bypassing the
// latch, and claims that output.
`timescale 1ns/1ps
module tb_hs_crossbar;
  import hs_pkg::*;
  localparam int NSP = NUM_SUBPORTS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  flit_t                st_flit [NSP];
  logic [SUBPORT_W-1:0] st_out  [NSP];
  flit_t                cs_flit [NSP];
  cs_entry_t            cs_cfg  [NSP];
  flit_t                out_flit[NSP];
  logic [NSP-1:0]       cs_claim;
  logic [SUBPORT_W-1:0] cs_src  [NSP];
  int checks = 0, failures = 0;

  hs_crossbar dut (.*);

  function automatic flit_t rnd_flit();
    flit_t f;
    f = flit_t'({$urandom, $urandom, $urandom});
    f.valid = 1'b1;
    return f;
  endfunction

  initial begin
    for (int i = 0; i < NSP; i++) begin st_flit[i] = '0; st_out[i] = '0; cs_flit[i] = '0; cs_cfg[i] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // random permutations, no circuits
    for (int t = 0; t < 50; t++) begin
      int perm [NSP];
      flit_t sent [NSP];
      for (int i = 0; i < NSP; i++) perm[i] = i;
      for (int i = NSP - 1; i > 0; i--) begin int j, x; j = $urandom % (i + 1); x = perm[i]; perm[i] = perm[j]; perm[j] = x; end
      @(negedge clk);
      for (int i = 0; i < NSP; i++) begin
        sent[i] = rnd_flit();
        sent[i].valid = ($urandom % 4) != 0;
        st_flit[i] = sent[i]; st_out[i] = SUBPORT_W'(perm[i]);
      end
      @(posedge clk); #1;
      for (int i = 0; i < NSP; i++) begin
        checks++;
        if (sent[i].valid && out_flit[perm[i]] != sent[i]) begin failures++; $display("FAIL perm t=%0d in %0d", t, i); end
        if (!sent[i].valid && out_flit[perm[i]].valid) begin failures++; $display("FAIL idle t=%0d out %0d", t, perm[i]); end
      end
    end
    // circuit: plane-1 west input (sub-port 9) -> plane-1 east output (7)
    @(negedge clk);
    for (int i = 0; i < NSP; i++) st_flit[i] = '0;
    cs_cfg[NUM_PORTS + P_WEST] = '{cs_flag: 1'b1, out_port: 3'(P_EAST)};
    // circuit: plane-1 core input (10) -> plane-1 south output (8)
    cs_cfg[NUM_PORTS + P_CORE] = '{cs_flag: 1'b1, out_port: 3'(P_SOUTH)};
    for (int t = 0; t < 20; t++) begin
      flit_t a, b;
      a = rnd_flit(); b = rnd_flit();
      cs_flit[NUM_PORTS + P_WEST] = a;
      cs_flit[NUM_PORTS + P_CORE] = b;
      // a buffered flit for another output in the same cycle
      st_flit[0] = rnd_flit(); st_out[0] = SUBPORT_W'(NUM_PORTS + P_NORTH);
      #1;
      checks += 3;
      if (out_flit[NUM_PORTS + P_EAST] != a)  begin failures++; $display("FAIL bypass W->E"); end
      if (out_flit[NUM_PORTS + P_SOUTH] != b) begin failures++; $display("FAIL bypass core->S"); end
      if (cs_claim != (NSP'(1) << (NUM_PORTS + P_EAST) | NSP'(1) << (NUM_PORTS + P_SOUTH))) begin
        failures++; $display("FAIL claim %b", cs_claim);
      end
      @(posedge clk); #1;
      checks++;
      if (out_flit[NUM_PORTS + P_NORTH] != st_flit[0]) begin failures++; $display("FAIL latch beside circuit"); end
      @(negedge clk);
    end
    // a plane-0 input's flag is ignored (the VC subnet never forms circuits)
    cs_cfg[P_WEST] = '{cs_flag: 1'b1, out_port: 3'(P_NORTH)};
    #1; checks++;
    if (cs_claim[P_NORTH]) begin failures++; $display("FAIL plane-0 claim"); end
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
