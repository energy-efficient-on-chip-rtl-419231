// tb_hs_vcsa_alloc: VC allocation hands out the lowest free VC of the
// requester's virtual network, one grant per output per cycle, and skips a
// virtual network with no free VC; switch allocation gives every output at
// most one input, needs a credit, spends one credit per grant, rotates
// fairly between competing inputs; a tail credit frees the VC again;
// outputs claimed by a circuit take no part.
`timescale 1ns/1ps
module tb_hs_vcsa_alloc;
  import hs_pkg::*;
  localparam int NSP = NUM_SUBPORTS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NUM_VCS-1:0]   vc_req_va   [NSP];
  logic [NUM_VCS-1:0]   vc_active   [NSP];
  logic [NUM_VCS-1:0]   vc_nonempty [NSP];
  logic [SUBPORT_W-1:0] vc_route    [NSP][NUM_VCS];
  logic [VC_W-1:0]      vc_outvc    [NSP][NUM_VCS];
  credit_t              credit_in   [NSP];
  logic [NSP-1:0]       cs_claim;
  logic [NUM_VCS-1:0]   va_gnt      [NSP];
  logic [VC_W-1:0]      va_outvc    [NSP][NUM_VCS];
  logic [NSP-1:0]       sa_gnt;
  logic [VC_W-1:0]      sa_vc       [NSP];
  logic                 cs_busy;
  int checks = 0, failures = 0;

  hs_vcsa_alloc dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic clear_inputs();
    for (int i = 0; i < NSP; i++) begin
      vc_req_va[i] = '0; vc_active[i] = '0; vc_nonempty[i] = '0; credit_in[i] = '0;
      for (int v = 0; v < NUM_VCS; v++) begin vc_route[i][v] = '0; vc_outvc[i][v] = '0; end
    end
  endtask

  int got_vc [5];
  int wins [2];
  initial begin
    clear_inputs(); cs_claim = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // five inputs request output 1 (east), all in vnet 1 (VCs 4..7)
    for (int i = 0; i < 5; i++) begin vc_req_va[i][4] = 1; vc_route[i][4] = SUBPORT_W'(1); end
    for (int c = 0; c < 5; c++) begin
      int n; n = 0;
      #1;
      for (int i = 0; i < NSP; i++) n += $countones(va_gnt[i]);
      if (c < 4) chk(n == 1, $sformatf("one VA grant per output per cycle (cycle %0d: %0d)", c, n));
      else       chk(n == 0, "vnet 1 exhausted: no grant");
      for (int i = 0; i < 5; i++) if (va_gnt[i][4]) begin
        chk(int'(va_outvc[i][4]) == 4 + c, $sformatf("lowest free VC %0d", va_outvc[i][4]));
        got_vc[i] = int'(va_outvc[i][4]);
        vc_req_va[i][4] = 0;
      end
      @(negedge clk);
    end
    chk(cs_busy == 0, "no circuit output busy");
    // input 9 sends one flit on VC 5 of output 1 (spends a credit) ...
    vc_active[9][0] = 1; vc_nonempty[9][0] = 1; vc_route[9][0] = SUBPORT_W'(1); vc_outvc[9][0] = VC_W'(5);
    #1 chk(sa_gnt[9] && sa_vc[9] == 0, "single requester granted");
    @(negedge clk); vc_active[9] = '0; vc_nonempty[9] = '0;
    // ... and its tail credit frees VC 5 again; the waiting input gets it
    credit_in[1] = '{valid: 1'b1, vc: 4'd5, free: 1'b1};
    @(negedge clk); credit_in[1] = '0;
    #1;
    begin
      int n; n = 0;
      for (int i = 0; i < 5; i++) if (va_gnt[i][4]) begin n++; chk(va_outvc[i][4] == 5, "freed VC reused"); end
      chk(n == 1, "grant after free");
    end
    @(negedge clk);
    clear_inputs();
    // switch allocation: inputs 0 and 2 both want output 1 on VC 6 (4 credits)
    for (int i = 0; i < 3; i += 2) begin
      vc_active[i][4] = 1; vc_nonempty[i][4] = 1; vc_route[i][4] = SUBPORT_W'(1); vc_outvc[i][4] = VC_W'(6);
    end
    // input 3 wants output 2 on VC 0
    vc_active[3][0] = 1; vc_nonempty[3][0] = 1; vc_route[3][0] = SUBPORT_W'(2); vc_outvc[3][0] = '0;
    wins[0] = 0; wins[1] = 0;
    for (int c = 0; c < 6; c++) begin
      #1;
      if (c < 4) begin
        chk(sa_gnt[0] ^ sa_gnt[2], "exactly one of two competitors wins");
        chk(sa_gnt[3], "independent output granted in parallel");
        if (sa_gnt[0]) wins[0]++;
        if (sa_gnt[2]) wins[1]++;
      end else begin
        chk(!sa_gnt[0] && !sa_gnt[2], "no credit, no grant");
      end
      @(negedge clk);
    end
    chk(wins[0] == 2 && wins[1] == 2, $sformatf("round robin %0d/%0d", wins[0], wins[1]));
    // one credit back: one more grant
    credit_in[1] = '{valid: 1'b1, vc: 4'd6, free: 1'b0};
    @(negedge clk); credit_in[1] = '0; #1;
    chk(sa_gnt[0] ^ sa_gnt[2], "grant after credit");
    @(negedge clk);
    // output 1 claimed by a circuit: no allocation there
    cs_claim[1] = 1;
    credit_in[1] = '{valid: 1'b1, vc: 4'd6, free: 1'b0};
    #1;
    chk(!sa_gnt[0] && !sa_gnt[2], "claimed output not allocated");
    vc_req_va[7][0] = 1; vc_route[7][0] = SUBPORT_W'(1); #1;
    chk(va_gnt[7] == '0, "claimed output not VC-allocated");
    @(negedge clk); credit_in[1] = '0; vc_req_va[7] = '0; cs_claim = '0;
    // CS plane outputs: a VC allocated there shows as cs_busy
    vc_req_va[8][1] = 1; vc_route[8][1] = SUBPORT_W'(NUM_PORTS + 1);
    @(negedge clk); vc_req_va[8] = '0; #1;
    chk(cs_busy, "VC on a circuit output is busy");
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
