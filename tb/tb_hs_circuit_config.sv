// tb_hs_circuit_config: writes through the configuration bus land in the
// shadow registers only, appear in the active outputs at 'apply', and the
// clear command empties the shadow registers.
// One entry of each table (CS_flag, router-to-router, end-to-end) is written
// and read back through the active outputs after apply; every other entry
// must stay clear.
// The bus format is this design's own.
`timescale 1ns/1ps
module tb_hs_circuit_config;
  import hs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        cfg_we, apply;
  logic [15:0] cfg_addr, cfg_wdata;
  cs_entry_t   cs_cfg  [NUM_ROUTERS][NUM_SUBPORTS];
  r2r_entry_t  r2r_cfg [NUM_ROUTERS][NUM_CS][NUM_DIRS];
  e2e_entry_t  e2e_cfg [NUM_NIS][NUM_CS];
  int checks = 0, failures = 0;

  hs_circuit_config dut (.*);

  task automatic wr(int tbl, int unit, int ent, int data);
    @(negedge clk);
    cfg_we = 1; cfg_addr = {2'(tbl), 6'(unit), 8'(ent)}; cfg_wdata = 16'(data);
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic do_apply();
    @(negedge clk); apply = 1; @(negedge clk); apply = 0;
  endtask
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    cfg_we = 0; apply = 0; cfg_addr = '0; cfg_wdata = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    wr(0, 5, NUM_PORTS + P_WEST, 8 | P_EAST);     // CS_flag at router 5
    wr(0, 5, P_WEST, 8 | P_EAST);                 // plane 0: ignored
    wr(1, 9, P_NORTH, 16 | 1);                    // r2r 9 -> 1 leaving north
    wr(2, 20, 0, 32 | 7);                         // e2e NI 20 -> NI 7
    chk(!cs_cfg[5][NUM_PORTS + P_WEST].cs_flag && !r2r_cfg[9][0][P_NORTH].valid && !e2e_cfg[20][0].valid,
        "shadow only before apply");
    do_apply();
    chk(cs_cfg[5][NUM_PORTS + P_WEST] == '{1'b1, 3'(P_EAST)}, "cs entry applied");
    chk(!cs_cfg[5][P_WEST].cs_flag, "plane-0 entry not written");
    chk(r2r_cfg[9][0][P_NORTH] == '{1'b1, 4'd1}, "r2r entry applied");
    chk(e2e_cfg[20][0] == '{1'b1, 5'd7}, "e2e entry applied");
    begin
      int n; n = 0;
      for (int r = 0; r < NUM_ROUTERS; r++) for (int s = 0; s < NUM_SUBPORTS; s++) n += cs_cfg[r][s].cs_flag;
      for (int r = 0; r < NUM_ROUTERS; r++) for (int d = 0; d < NUM_DIRS; d++) n += r2r_cfg[r][0][d].valid;
      for (int i = 0; i < NUM_NIS; i++) n += e2e_cfg[i][0].valid;
      chk(n == 3, $sformatf("exactly three entries set (%0d)", n));
    end
    wr(3, 0, 0, 0);   // clear shadow
    chk(cs_cfg[5][NUM_PORTS + P_WEST].cs_flag, "active kept until apply");
    do_apply();
    chk(!cs_cfg[5][NUM_PORTS + P_WEST].cs_flag && !r2r_cfg[9][0][P_NORTH].valid && !e2e_cfg[20][0].valid,
        "cleared after apply");
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
