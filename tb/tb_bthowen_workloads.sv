// tb_bthowen_workloads: end-to-end test of the accelerator built at the sizes
// of the published small-dataset models, each driven and
// checked by tb_bthowen_harness. Besides the class responses, every build
// must deliver results exactly at its published cycles per inference, which
// this design computes as max(ceil(input bits / 64), k * ceil(filters /
// hash units)). Each line: classes, input bits (features x thermometer bits),
// filter inputs, entries, k, hash units, 64-bit bus, 64-bit table writes,
// samples, published cycles.
//   Ecoli     8 classes,  7x10 bits, 10 in, 128 entries, k 2,  7 units:  2
//   Iris      3 classes,   4x3 bits,  2 in, 128 entries, k 1,  6 units:  1
//   Shuttle   7 classes,   9x9 bits, 27 in, 1024 entries, k 2, 3 units:  2
//   Wine      3 classes,  13x9 bits, 13 in, 128 entries, k 3,  9 units:  3
//   Vehicle   4 classes, 18x16 bits, 16 in, 256 entries, k 3, 18 units:  5
//   Satimage  6 classes,  36x8 bits, 12 in, 512 entries, k 4, 24 units:  5
// Vowel (10x15 bits, 15 in, 256 entries, k 4, 12 units) is built without a
// cycle check: its 150 input bits need 3 bus words and its k = 4 table reads
// need 4 cycles, so this design takes 4 cycles, while the published table
// gives 2.
// Letter (26 classes, 312 tables) and MNIST-Small (560 tables) are left out to
// keep the build short; their cycle counts (4 and 25) follow from the same
// formula, and the MNIST-Medium default build is tested on its own.
module tb_bthowen_workloads;
  logic clk = 0;
  always #5 clk = ~clk;

  `include "tb_bthowen_inst.svh"

  `BTHOWEN_TB_INST(ecoli,     8,   70, 10,  128, 2,  7, 64, 64, 40,  2)
  `BTHOWEN_TB_INST(iris,      3,   12,  2,  128, 1,  6, 64, 64, 40,  1)
  `BTHOWEN_TB_INST(shuttle,   7,   81, 27, 1024, 2,  3, 64, 64, 40,  2)
  `BTHOWEN_TB_INST(wine,      3,  117, 13,  128, 3,  9, 64, 64, 40,  3)
  `BTHOWEN_TB_INST(vehicle,   4,  288, 16,  256, 3, 18, 64, 64, 40,  5)
  `BTHOWEN_TB_INST(satimage,  6,  288, 12,  512, 4, 24, 64, 64, 40,  5)
  `BTHOWEN_TB_INST(vowel,    11,  150, 15,  256, 4, 12, 64, 64, 40,  0)

  int checks, failures;
  always_comb begin
    checks = ecoli_checks + iris_checks + shuttle_checks + wine_checks + vehicle_checks
           + satimage_checks + vowel_checks;
    failures = ecoli_failures + iris_failures + shuttle_failures + wine_failures
             + vehicle_failures + satimage_failures + vowel_failures;
  end

  initial begin
    wait (ecoli_done && iris_done && shuttle_done && wine_done && vehicle_done
          && satimage_done && vowel_done);
    #1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
