// hs_input_unit: one input sub-port of the hybrid-switched router.
//
// Buffered (VC) path: an arriving flit is written straight into the buffer
// of the VC named in its side-band field (buffer write, pipeline stage 1);
// a head flit's route is computed in the same cycle and stored with the VC,
// which then waits for VC allocation (stage 2). Once it holds an output VC
// it competes in switch allocation (stage 3); the winning flit is read out
// into the switch-traversal register 'st_flit', which the crossbar moves
// into the output latch (stage 4). A credit goes upstream for every flit
// read out, marked 'free' for a tail.
//
// Circuit (CS) path: on a CS plane (PLANE >= 1) with cs_flag set, arriving
// flits skip the buffers and RC; they are caught in the one-cycle input
// latch 'cs_flit' and the crossbar sends them on, bypassing the output latch.
// The VC buffers are then idle and 'buf_gate' asks for them to be
// power-gated.
//
// From the paper: the CS_flag per input port of a CS subnet, the direct
// path to the crossbar, RC per input port, buffers kept but power-gated
// under CS, 4 VCs x 3 virtual networks, the 4-stage VC pipeline and the
// 1-cycle router traversal of a circuit. Own choices: buffer depth, one
// packet per VC at a time, state encoding and the credit format.
module hs_input_unit
  import hs_pkg::*;
#(
  parameter int unsigned ROUTER_ID = 0,
  parameter int unsigned SUBPORT   = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  flit_t                flit_in,
  input  logic                 cs_flag,
  input  logic                 hold,
  input  r2r_entry_t           r2r_cfg [NUM_CS][NUM_DIRS],
  output credit_t              credit_out,
  output logic                 buf_gate,
  output flit_t                cs_flit,
  // to the allocator
  output logic [NUM_VCS-1:0]   vc_req_va,
  output logic [NUM_VCS-1:0]   vc_active,
  output logic [NUM_VCS-1:0]   vc_nonempty,
  output logic [SUBPORT_W-1:0] vc_route [NUM_VCS],
  output logic [VC_W-1:0]      vc_outvc [NUM_VCS],
  output logic                 cs_busy,
  // from the allocator
  input  logic [NUM_VCS-1:0]   va_gnt,
  input  logic [VC_W-1:0]      va_outvc [NUM_VCS],
  input  logic                 sa_gnt,
  input  logic [VC_W-1:0]      sa_vc,
  // switch traversal register
  output flit_t                st_flit,
  output logic [SUBPORT_W-1:0] st_out
);
  localparam int unsigned PLANE = SUBPORT / NUM_PORTS;
  localparam int unsigned PORT  = SUBPORT % NUM_PORTS;
  localparam int unsigned PW    = (BUF_DEPTH > 1) ? $clog2(BUF_DEPTH) : 1;

  typedef enum logic [1:0] {VC_IDLE, VC_VA, VC_ACTIVE} vc_state_t;

  vc_state_t           state [NUM_VCS];
  flit_t               buffer [NUM_VCS][BUF_DEPTH];
  logic [PW-1:0]       wr_ptr [NUM_VCS];
  logic [PW-1:0]       rd_ptr [NUM_VCS];
  logic [CRED_W-1:0]   count  [NUM_VCS];

  logic                cs_mode;
  logic [SUBPORT_W-1:0] rc_out;
  logic                rc_circ;
  logic                wr_en;
  flit_t               rd_flit;

  assign cs_mode  = (PLANE != 0) && cs_flag;
  assign buf_gate = cs_mode;
  assign wr_en    = flit_in.valid && !cs_mode;

  hs_route_compute #(.ROUTER_ID(ROUTER_ID)) u_rc (
    .dst_ni     (flit_in.dst),
    .from_local (PORT >= NUM_DIRS),
    .hold       (hold),
    .r2r_cfg    (r2r_cfg),
    .out_subport(rc_out),
    .to_circuit (rc_circ)
  );

  assign rd_flit = buffer[sa_vc][rd_ptr[sa_vc]];

  always_comb begin
    cs_busy = 1'b0;
    for (int v = 0; v < NUM_VCS; v++) begin
      vc_req_va[v]   = (state[v] == VC_VA);
      vc_active[v]   = (state[v] == VC_ACTIVE);
      vc_nonempty[v] = (count[v] != '0);
      if (state[v] != VC_IDLE && int'(vc_route[v]) >= NUM_PORTS) cs_busy = 1'b1;
    end
  end

  // CS input latch
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cs_flit <= '0;
    else begin
      cs_flit       <= flit_in;
      cs_flit.valid <= flit_in.valid && cs_mode;
    end
  end

  // buffers, VC state, switch traversal register, credits
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < NUM_VCS; v++) begin
        state[v]    <= VC_IDLE;
        wr_ptr[v]   <= '0;
        rd_ptr[v]   <= '0;
        count[v]    <= '0;
        vc_route[v] <= '0;
        vc_outvc[v] <= '0;
      end
      st_flit    <= '0;
      st_out     <= '0;
      credit_out <= '0;
    end else begin
      // write
      if (wr_en) begin
        buffer[flit_in.vc][wr_ptr[flit_in.vc]] <= flit_in;
        wr_ptr[flit_in.vc] <= (int'(wr_ptr[flit_in.vc]) == BUF_DEPTH - 1) ? '0 : wr_ptr[flit_in.vc] + 1'b1;
        if (is_head(flit_in.ftype)) begin
          state[flit_in.vc]    <= VC_VA;
          vc_route[flit_in.vc] <= rc_out;
        end
      end
      // VC allocation
      for (int v = 0; v < NUM_VCS; v++) begin
        if (va_gnt[v] && state[v] == VC_VA) begin
          state[v]    <= VC_ACTIVE;
          vc_outvc[v] <= va_outvc[v];
        end
      end
      // switch allocation -> switch traversal register
      st_flit.valid     <= 1'b0;
      credit_out.valid  <= 1'b0;
      if (sa_gnt) begin
        st_flit          <= rd_flit;
        st_flit.valid    <= 1'b1;
        st_flit.vc       <= vc_outvc[sa_vc];
        st_out           <= vc_route[sa_vc];
        rd_ptr[sa_vc]    <= (int'(rd_ptr[sa_vc]) == BUF_DEPTH - 1) ? '0 : rd_ptr[sa_vc] + 1'b1;
        credit_out.valid <= 1'b1;
        credit_out.vc    <= sa_vc;
        credit_out.free  <= is_tail(rd_flit.ftype);
        if (is_tail(rd_flit.ftype)) state[sa_vc] <= VC_IDLE;
      end
      // occupancy
      for (int v = 0; v < NUM_VCS; v++) begin
        count[v] <= count[v]
                    + CRED_W'(wr_en && int'(flit_in.vc) == v)
                    - CRED_W'(sa_gnt && int'(sa_vc) == v);
      end
    end
  end

  // A flit must never arrive for a full VC (credit protocol).
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en |-> int'(count[flit_in.vc]) < BUF_DEPTH || (sa_gnt && sa_vc == flit_in.vc));
  // Switch allocation only ever picks an active VC holding a flit.
  a_sa_legal: assert property (@(posedge clk) disable iff (!rst_n)
    sa_gnt |-> state[sa_vc] == VC_ACTIVE && count[sa_vc] != '0);
endmodule
