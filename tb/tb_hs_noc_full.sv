// tb_hs_noc_full: the whole network at its default parameters (no
// parameter overrides, 200-million-cycle epochs): VC-only traffic, static
// end-to-end and router-to-router circuits chosen from the measured
// profile, zero-load latency checks and delivery checks of every packet.
// The runtime adaptive phase is left to tb_hs_noc_top, since a default
// epoch is 200 million cycles long. Body: hs_noc_tb_common.svh.
`timescale 1ns/1ps
module tb_hs_noc_full;
  import hs_pkg::*;
  localparam bit RUN_ADAPTIVE = 1'b0;

`include "hs_noc_tb_common.svh"

  hs_noc_top dut (.*);

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
