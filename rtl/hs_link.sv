// hs_link: one subnet of one mesh link, upstream output to downstream input.
//
// Flits cross in one cycle (one register stage) in the forward direction;
// credits cross back in one cycle in the reverse direction. A two-subnet
// 128-bit link is two of these side by side, each SUBNET_W bits wide.
// From the paper: 1-cycle link traversal, link split into subnets. Own
// choice: credits take one cycle as well.
module hs_link
  import hs_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  flit_t   up_flit,      // from the upstream router's output
  output flit_t   down_flit,    // to the downstream router's input
  input  credit_t down_credit,  // from the downstream router's input
  output credit_t up_credit     // to the upstream router's output
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      down_flit <= '0;
      up_credit <= '0;
    end else begin
      down_flit <= up_flit;
      up_credit <= down_credit;
    end
  end
endmodule
