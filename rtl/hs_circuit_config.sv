// hs_circuit_config: shadow and active circuit configuration of the whole
// network.
//
// Software writes the next configuration, one entry per write, into shadow
// registers through a small register bus; a pulse on 'apply' copies all of
// it into the active registers at once, which drive the routers and NIs.
// Address map (cfg_addr[15:14] selects the table, [13:8] the router or NI,
// [7:0] the entry):
//   0  CS_flag entry of input sub-port [7:0] (plane * 6 + port, plane >= 1):
//      data = {cs_flag, out_port[2:0]}
//   1  router-to-router circuit start, entry (plane-1) * 4 + direction:
//      data = {valid, dst_router[3:0]}
//   2  end-to-end circuit start at NI, entry plane-1: data = {valid, dst_ni}
//   3  clear every shadow entry
// From the paper: a one-bit CS_flag per CS-subnet input port, circuits set
// up by software that sends circuit configurations back. Own choices: the
// address map, the circuit start tables and the shadow/active split.
module hs_circuit_config
  import hs_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [15:0] cfg_addr,
  input  logic [15:0] cfg_wdata,
  input  logic        apply,
  output cs_entry_t   cs_cfg  [NUM_ROUTERS][NUM_SUBPORTS],
  output r2r_entry_t  r2r_cfg [NUM_ROUTERS][NUM_CS][NUM_DIRS],
  output e2e_entry_t  e2e_cfg [NUM_NIS][NUM_CS]
);
  cs_entry_t  cs_sh  [NUM_ROUTERS][NUM_SUBPORTS];
  r2r_entry_t r2r_sh [NUM_ROUTERS][NUM_CS][NUM_DIRS];
  e2e_entry_t e2e_sh [NUM_NIS][NUM_CS];

  logic [1:0] tbl;
  logic [5:0] unit;
  logic [7:0] ent;

  assign tbl  = cfg_addr[15:14];
  assign unit = cfg_addr[13:8];
  assign ent  = cfg_addr[7:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NUM_ROUTERS; r++) begin
        for (int s = 0; s < NUM_SUBPORTS; s++) begin cs_sh[r][s] <= '0; cs_cfg[r][s] <= '0; end
        for (int p = 0; p < NUM_CS; p++)
          for (int d = 0; d < NUM_DIRS; d++) begin r2r_sh[r][p][d] <= '0; r2r_cfg[r][p][d] <= '0; end
      end
      for (int n = 0; n < NUM_NIS; n++)
        for (int p = 0; p < NUM_CS; p++) begin e2e_sh[n][p] <= '0; e2e_cfg[n][p] <= '0; end
    end else begin
      if (cfg_we) begin
        case (tbl)
          2'd0: if (int'(unit) < NUM_ROUTERS && int'(ent) >= NUM_PORTS && int'(ent) < NUM_SUBPORTS)
                  cs_sh[unit][ent] <= cs_entry_t'(cfg_wdata[PORT_W:0]);
          2'd1: if (int'(unit) < NUM_ROUTERS && int'(ent) < NUM_CS * NUM_DIRS)
                  r2r_sh[unit][int'(ent) / NUM_DIRS][int'(ent) % NUM_DIRS] <= r2r_entry_t'(cfg_wdata[ROUTER_W:0]);
          2'd2: if (int'(unit) < NUM_NIS && int'(ent) < NUM_CS)
                  e2e_sh[unit][ent] <= e2e_entry_t'(cfg_wdata[NI_W:0]);
          default: begin
            for (int r = 0; r < NUM_ROUTERS; r++) begin
              for (int s = 0; s < NUM_SUBPORTS; s++) cs_sh[r][s] <= '0;
              for (int p = 0; p < NUM_CS; p++)
                for (int d = 0; d < NUM_DIRS; d++) r2r_sh[r][p][d] <= '0;
            end
            for (int n = 0; n < NUM_NIS; n++)
              for (int p = 0; p < NUM_CS; p++) e2e_sh[n][p] <= '0;
          end
        endcase
      end
      if (apply) begin
        cs_cfg  <= cs_sh;
        r2r_cfg <= r2r_sh;
        e2e_cfg <= e2e_sh;
      end
    end
  end
endmodule
