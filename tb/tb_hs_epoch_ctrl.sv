// tb_hs_epoch_ctrl: epoch / configuration period / drain sequencing with
// short lengths (epoch 50, configuration 20 cycles): the length of each
// phase, that apply waits for the network to be idle, and the static
// apply request.
// Phase lengths are checked to the cycle against the parameters; the drain
// step before apply is this design's addition.
`timescale 1ns/1ps
module tb_hs_epoch_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic adaptive_en, apply_req, all_cs_idle;
  logic in_config, stat_freeze, stat_clear, hold, apply;
  logic [31:0] epoch_count;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  hs_epoch_ctrl #(.EPOCH_LEN(50), .CONFIG_LEN(20), .DRAIN_MIN(2)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  longint t_cfg_on, t_cfg_off, t_apply, t_idle;
  initial begin
    adaptive_en = 0; apply_req = 0; all_cs_idle = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    // static: nothing happens without a request
    repeat (100) @(negedge clk);
    chk(!in_config && !hold && epoch_count == 0, "static idle");
    apply_req = 1; @(negedge clk); apply_req = 0;
    chk(hold && stat_freeze, "drain after apply request");
    wait (apply === 1'b1); #1;
    chk(stat_clear && epoch_count == 1, "apply with clear");
    @(negedge clk);
    chk(!hold && !stat_freeze, "back to epoch");
    // adaptive
    adaptive_en = 1;
    @(posedge in_config); t_cfg_on = cyc;
    chk(stat_freeze && !hold, "config freezes stats");
    @(negedge in_config); t_cfg_off = cyc;
    chk(t_cfg_off - t_cfg_on == 20, $sformatf("config period %0d cycles", t_cfg_off - t_cfg_on));
    // network busy: apply must wait
    all_cs_idle = 0;
    repeat (30) begin @(negedge clk); chk(hold && !apply, "held while busy"); end
    all_cs_idle = 1; t_idle = cyc;
    wait (apply === 1'b1); t_apply = cyc;
    chk(t_apply - t_idle <= 2, "apply once idle");
    @(posedge in_config); t_cfg_on = cyc;
    chk(t_cfg_on - t_apply == 50, $sformatf("epoch length %0d", t_cfg_on - t_apply));
    chk(epoch_count == 2, "epoch count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
