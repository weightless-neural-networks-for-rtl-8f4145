// tb_bthowen_top: end-to-end test of the accelerator at two reduced sizes,
// each driven and checked by tb_bthowen_harness.
//   A: 4 classes, 90 input bits into 12 filters of 8 (last filter padded),
//      64-entry tables, k = 2, 3 hash units (4 group cycles per hash set),
//      16-bit bus (6 words, last one partial). Hashing takes 8 cycles per
//      sample, more than the 6-cycle bus time, so the bus must stall.
//   B: 3 classes, same input, k = 3, 12 hash units (one group per set),
//      one 64-bit table word per filter. Hashing takes 3 cycles, so results
//      must come exactly every 6 cycles with no stall.
module tb_bthowen_top;
  logic clk = 0;
  always #5 clk = ~clk;

  `include "tb_bthowen_inst.svh"

  `BTHOWEN_TB_INST(a, 4, 90, 8, 64, 2, 3, 16, 16, 60, 0)
  `BTHOWEN_TB_INST(b, 3, 90, 8, 64, 3, 12, 16, 64, 60, 0)

  initial begin
    wait (a_done && b_done);
    $display("TB_RESULT checks=%0d failures=%0d", a_checks + b_checks, a_failures + b_failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", a_checks + b_checks, a_failures + b_failures + 1);
    $finish;
  end
endmodule
