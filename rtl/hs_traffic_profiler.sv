// hs_traffic_profiler: per-destination traffic counters of one network
// interface, the raw material of the circuit set-up algorithm.
//
// For every packet the NI accepts it adds the packet's flit count to the
// counter of the packet's destination NI. 'freeze' stops counting (the
// configuration period, while software reads the counters through the
// combinational read port); 'clear' zeroes all counters (start of a new
// epoch). Counters saturate instead of wrapping.
//
// From the paper: traffic statistics per source/destination pair gathered
// from the network interfaces at the end of each epoch. Own choices: one
// counter per destination NI, 32-bit saturating counters, freeze/clear.
module hs_traffic_profiler
  import hs_pkg::*;
#(
  parameter int unsigned CNT_W = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 pkt_valid,
  input  logic [NI_W-1:0]      pkt_dst,
  input  logic [FLITCNT_W-1:0] pkt_flits,
  input  logic                 freeze,
  input  logic                 clear,
  input  logic [NI_W-1:0]      rd_idx,
  output logic [CNT_W-1:0]     rd_count
);
  logic [CNT_W-1:0] cnt [NUM_NIS];

  assign rd_count = cnt[rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < NUM_NIS; d++) cnt[d] <= '0;
    end else if (clear) begin
      for (int d = 0; d < NUM_NIS; d++) cnt[d] <= '0;
    end else if (pkt_valid && !freeze) begin
      if (cnt[pkt_dst] > {CNT_W{1'b1}} - CNT_W'(pkt_flits))
        cnt[pkt_dst] <= {CNT_W{1'b1}};
      else
        cnt[pkt_dst] <= cnt[pkt_dst] + CNT_W'(pkt_flits);
    end
  end
endmodule
