// hs_rr_arbiter: round-robin arbiter used by the VC and switch allocators.
//
// Grants at most one of N requesters per cycle. The search starts one place
// after the last requester granted (when 'advance' was high), so every
// persistent requester is served within N grants. The grant is combinational
// from 'req'; the priority pointer is the only state. Reset puts the pointer
// on requester 0. The round-robin policy is this design's choice: the paper
// names VC and switch allocation but not the arbiters inside them.
module hs_rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [N-1:0]                req,
  input  logic                        advance,   // commit the current grant
  output logic [N-1:0]                gnt,
  output logic [$clog2(N > 1 ? N : 2)-1:0] gnt_idx,
  output logic                        gnt_valid
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);

  logic [IW-1:0] ptr;

  always_comb begin
    gnt       = '0;
    gnt_idx   = '0;
    gnt_valid = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned idx;
      idx = (int'(ptr) + k) % N;
      if (!gnt_valid && req[idx]) begin
        gnt_valid = 1'b1;
        gnt_idx   = IW'(idx);
        gnt[idx]  = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       ptr <= '0;
    else if (advance && gnt_valid)    ptr <= (int'(gnt_idx) == N - 1) ? '0 : gnt_idx + 1'b1;
  end
endmodule
