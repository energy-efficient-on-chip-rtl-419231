// hs_epoch_ctrl: epoch / configuration-period sequencer for runtime
// adaptive circuit set-up.
//
// Runtime alternates between epochs, in which the configured circuits
// carry traffic and the NIs profile it, and configuration periods, in which
// the profile is frozen so that software can read it, run the circuit
// set-up algorithm and write the next configuration into the shadow
// registers. At the end of a configuration period the sequencer enters a
// drain phase: 'hold' keeps new packets off the circuits, and once every
// router and NI reports cs_idle (no packet left on a circuit, and at least
// DRAIN_MIN cycles have passed) it pulses 'apply' (shadow -> active
// configuration) and 'stat_clear', and the next epoch starts.
// With adaptive_en low (static set-up) no epochs are timed; a pulse on
// apply_req runs the same drain-and-apply sequence once, for a
// configuration computed offline.
//
// From the paper: epochs of 200 million cycles, a 1-million-cycle
// configuration period in which software gathers statistics and sends back
// circuit configurations (Fig. 5, which shows only the alternation of the
// two). Own choices: freezing statistics during the configuration period,
// old circuits stay in use until the drain, the drain itself.
module hs_epoch_ctrl
  import hs_pkg::*;
#(
  parameter int unsigned EPOCH_LEN  = EPOCH_CYCLES,
  parameter int unsigned CONFIG_LEN = CONFIG_CYCLES,
  parameter int unsigned DRAIN_MIN  = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        adaptive_en,
  input  logic        apply_req,
  input  logic        all_cs_idle,
  output logic        in_config,
  output logic        stat_freeze,
  output logic        stat_clear,
  output logic        hold,
  output logic        apply,
  output logic [31:0] epoch_count
);
  typedef enum logic [1:0] {PH_EPOCH, PH_CONFIG, PH_DRAIN} phase_t;

  phase_t      phase;
  logic [31:0] cnt;

  assign in_config   = (phase == PH_CONFIG);
  assign stat_freeze = (phase != PH_EPOCH);
  assign hold        = (phase == PH_DRAIN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase       <= PH_EPOCH;
      cnt         <= '0;
      apply       <= 1'b0;
      stat_clear  <= 1'b0;
      epoch_count <= '0;
    end else begin
      apply      <= 1'b0;
      stat_clear <= 1'b0;
      cnt        <= cnt + 1;
      case (phase)
        PH_EPOCH: begin
          if (adaptive_en && cnt >= EPOCH_LEN - 1) begin
            phase <= PH_CONFIG;
            cnt   <= '0;
          end else if (apply_req) begin
            phase <= PH_DRAIN;
            cnt   <= '0;
          end
        end
        PH_CONFIG: begin
          if (cnt >= CONFIG_LEN - 1) begin
            phase <= PH_DRAIN;
            cnt   <= '0;
          end
        end
        PH_DRAIN: begin
          if (cnt >= DRAIN_MIN && all_cs_idle) begin
            phase       <= PH_EPOCH;
            cnt         <= '0;
            apply       <= 1'b1;
            stat_clear  <= 1'b1;
            epoch_count <= epoch_count + 1;
          end
        end
        default: phase <= PH_EPOCH;
      endcase
    end
  end
endmodule
