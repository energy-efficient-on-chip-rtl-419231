// hs_crossbar: the NUM_SUBPORTS-to-NUM_SUBPORTS crossbar of the
// hybrid-switched router (12-to-12 and 64 bits wide with two subnets), with
// the output latches and their circuit bypass.
//
// Buffered flits arrive from the inputs' switch-traversal registers with
// the output sub-port chosen by switch allocation; at the clock edge each is
// written into its output latch (pipeline stage 4). A CS-plane input whose
// CS_flag is set has its path fixed to the configured wide output port on
// the same plane: its input latch drives that output directly, bypassing
// the output latch, so a circuit flit spends one cycle in the router. The
// output is then marked in 'cs_claim' so that allocation leaves it alone.
// If two inputs claim one output, the lower-numbered input wins (the
// configuration is expected never to do this).
//
// From the paper: crossbar of 12-to-12 64-bit sub-ports, CS_flag fixing
// the crossbar path and bypassing the latch on the output port. Own choice:
// the tie-break for conflicting claims.
module hs_crossbar
  import hs_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  flit_t                   st_flit [NUM_SUBPORTS],
  input  logic [SUBPORT_W-1:0]    st_out  [NUM_SUBPORTS],
  input  flit_t                   cs_flit [NUM_SUBPORTS],
  input  cs_entry_t               cs_cfg  [NUM_SUBPORTS],
  output flit_t                   out_flit[NUM_SUBPORTS],
  output logic [NUM_SUBPORTS-1:0] cs_claim,
  output logic [SUBPORT_W-1:0]    cs_src  [NUM_SUBPORTS]
);
  localparam int unsigned NSP = NUM_SUBPORTS;

  flit_t out_latch [NSP];
  flit_t st_sel    [NSP];

  always_comb begin
    for (int o = 0; o < NSP; o++) begin
      cs_claim[o] = 1'b0;
      cs_src[o]   = '0;
      st_sel[o]   = '0;
    end
    for (int i = NSP - 1; i >= NUM_PORTS; i--) begin
      if (cs_cfg[i].cs_flag && int'(cs_cfg[i].out_port) < NUM_PORTS) begin
        cs_claim[(i / NUM_PORTS) * NUM_PORTS + int'(cs_cfg[i].out_port)] = 1'b1;
        cs_src[(i / NUM_PORTS) * NUM_PORTS + int'(cs_cfg[i].out_port)]   = SUBPORT_W'(i);
      end
    end
    for (int i = 0; i < NSP; i++)
      if (st_flit[i].valid) st_sel[st_out[i]] = st_flit[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NSP; o++) out_latch[o] <= '0;
    end else begin
      for (int o = 0; o < NSP; o++) out_latch[o] <= st_sel[o];
    end
  end

  always_comb begin
    for (int o = 0; o < NSP; o++)
      out_flit[o] = cs_claim[o] ? cs_flit[cs_src[o]] : out_latch[o];
  end
endmodule
