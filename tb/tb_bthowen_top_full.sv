// tb_bthowen_top_full: the accelerator at its default size (the MNIST-Medium
// model: 10 classes, 2352 input bits, 84 filters of 28 inputs, 2048-entry
// tables, k = 2, 5 hash units, 64-bit bus). Loads a trained model (10 x 84
// tables, 26880 table words), streams 30 samples back to back and checks
// every response and class, the first-result latency (k*G+4 = 38 cycles after
// the last word) and one result every 37 cycles with no bus stall.
module tb_bthowen_top_full;
  logic clk = 0;
  always #5 clk = ~clk;

  logic        rst_n, in_valid, in_ready, hp_wr_en, lut_wr_en, result_valid, busy, done;
  logic [63:0] in_data, lut_wr_data;
  logic [0:0]  hp_wr_set;
  logic [4:0]  hp_wr_index;
  logic [10:0] hp_wr_value;
  logic [3:0]  lut_wr_class, result_class;
  logic [6:0]  lut_wr_filter;
  logic [4:0]  lut_wr_addr;
  logic [6:0]  responses [10];
  int          checks, failures;

  bthowen_top dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .hp_wr_en_i(hp_wr_en), .hp_wr_set_i(hp_wr_set), .hp_wr_index_i(hp_wr_index), .hp_wr_value_i(hp_wr_value),
    .lut_wr_en_i(lut_wr_en), .lut_wr_class_i(lut_wr_class), .lut_wr_filter_i(lut_wr_filter),
    .lut_wr_addr_i(lut_wr_addr), .lut_wr_data_i(lut_wr_data), .result_valid_o(result_valid),
    .result_class_o(result_class), .responses_o(responses), .busy_o(busy));

  tb_bthowen_harness #(.SAMPLES(30), .TABLE_CYCLES(37)) h (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .hp_wr_en(hp_wr_en), .hp_wr_set(hp_wr_set), .hp_wr_index(hp_wr_index), .hp_wr_value(hp_wr_value),
    .lut_wr_en(lut_wr_en), .lut_wr_class(lut_wr_class), .lut_wr_filter(lut_wr_filter),
    .lut_wr_addr(lut_wr_addr), .lut_wr_data(lut_wr_data), .result_valid(result_valid),
    .result_class(result_class), .responses(responses), .busy(busy), .done(done),
    .checks(checks), .failures(failures));

  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
