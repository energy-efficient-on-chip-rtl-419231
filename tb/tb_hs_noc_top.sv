// tb_hs_noc_top: end-to-end test of the whole 4x4 hybrid-switched network,
// with the epoch and configuration-period lengths shortened (4000 and 3000
// cycles) so that the runtime adaptive set-up can be run through two
// epochs. Everything else is at its default size. The test body is in
// hs_noc_tb_common.svh: VC-only traffic and its profile, static end-to-end
// and router-to-router circuits chosen by a greedy set-up model, zero-load
// latency checks (19 / 7 / 13 cycles for three hops), then adaptive epochs.
`timescale 1ns/1ps
module tb_hs_noc_top;
  import hs_pkg::*;
  localparam bit RUN_ADAPTIVE = 1'b1;
  localparam int EPOCH_LEN_TB  = 4000;
  localparam int CONFIG_LEN_TB = 3000;

`include "hs_noc_tb_common.svh"

  hs_noc_top #(.EPOCH_LEN(EPOCH_LEN_TB), .CONFIG_LEN(CONFIG_LEN_TB)) dut (.*);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
