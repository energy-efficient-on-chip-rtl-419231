// tb_hs_traffic_profiler: random packets against a reference count per
// destination, with freeze, clear, saturation and the read port.
// Uses 8-bit counters so that saturation is reached quickly. Counts update
// one cycle after each accepted packet; the read port is combinational.
`timescale 1ns/1ps
module tb_hs_traffic_profiler;
  import hs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic                 pkt_valid, freeze, clear;
  logic [NI_W-1:0]      pkt_dst, rd_idx;
  logic [FLITCNT_W-1:0] pkt_flits;
  logic [7:0]           rd_count;
  int checks = 0, failures = 0;
  int ref_cnt [NUM_NIS];

  // 8-bit counters so that saturation is reachable
  hs_traffic_profiler #(.CNT_W(8)) dut (.*);

  task automatic compare(string what);
    for (int d = 0; d < NUM_NIS; d++) begin
      rd_idx = NI_W'(d); #1;
      checks++;
      if (int'(rd_count) != ref_cnt[d]) begin
        failures++;
        $display("FAIL %s dst %0d: %0d vs %0d", what, d, rd_count, ref_cnt[d]);
      end
    end
  endtask

  task automatic run(int n, bit frz);
    freeze = frz;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      pkt_valid = ($urandom % 3) != 0;
      pkt_dst   = NI_W'($urandom % NUM_NIS);
      pkt_flits = ($urandom % 2) ? FLITCNT_W'(DATA_FLITS) : FLITCNT_W'(CTRL_FLITS);
      @(posedge clk);
      if (pkt_valid && !frz) begin
        ref_cnt[pkt_dst] += int'(pkt_flits);
        if (ref_cnt[pkt_dst] > 255) ref_cnt[pkt_dst] = 255;
      end
    end
    @(negedge clk); pkt_valid = 0;
  endtask

  initial begin
    pkt_valid = 0; freeze = 0; clear = 0; pkt_dst = '0; pkt_flits = '0; rd_idx = '0;
    for (int d = 0; d < NUM_NIS; d++) ref_cnt[d] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(300, 0);  compare("count");
    run(100, 1);  compare("frozen");
    run(3000, 0); compare("saturated");
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int d = 0; d < NUM_NIS; d++) ref_cnt[d] = 0;
    compare("cleared");
    run(200, 0);  compare("after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
