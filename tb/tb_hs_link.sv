// tb_hs_link: a link subnet delays flits forward and credits backward by
// exactly one cycle and resets to idle.
// Both one-cycle delays are checked on random traffic for 200 cycles. The
// one-cycle link follows the source system; the matching one-cycle credit
// return is this design's choice.
`timescale 1ns/1ps
module tb_hs_link;
  import hs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  flit_t   up_flit, down_flit;
  credit_t down_credit, up_credit;
  int checks = 0, failures = 0;

  hs_link dut (.*);

  flit_t   f_hist [4];
  credit_t c_hist [4];

  initial begin
    up_flit = '0; down_credit = '0;
    @(posedge clk); #1;
    checks++; if (down_flit.valid || up_credit.valid) failures++;
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      flit_t f; credit_t c;
      f = flit_t'({$urandom, $urandom, $urandom});
      c = credit_t'($urandom);
      up_flit = f; down_credit = c;
      @(posedge clk); #1;
      checks++;
      if (down_flit != f || up_credit != c) begin
        failures++;
        $display("FAIL cycle %0d", i);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
