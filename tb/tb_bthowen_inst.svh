// tb_bthowen_inst.svh: BTHOWEN_TB_INST declares the signals of one
// bthowen_top build, instantiates it with the given sizes and connects it to a
// tb_bthowen_harness that loads a trained model, streams NS samples and checks
// the results. Arguments: instance prefix, classes, input bits, filter
// inputs, table entries, hash functions, hash units, bus width, table write
// width, samples, and the published cycles per inference (0: not checked).
// Uses the clock `clk` of the including module; provides NAME_done,
// NAME_checks and NAME_failures.
`define BTHOWEN_TB_INST(NAME, C, IB, FI, E, K, HU, BW, WW, NS, CYC) \
  logic NAME``_rst_n, NAME``_in_valid, NAME``_in_ready, NAME``_hp_wr_en, NAME``_lut_wr_en; \
  logic NAME``_result_valid, NAME``_busy, NAME``_done; \
  logic [BW-1:0] NAME``_in_data; \
  logic [$clog2(K > 1 ? K : 2)-1:0] NAME``_hp_wr_set; \
  logic [$clog2(FI)-1:0] NAME``_hp_wr_index; \
  logic [$clog2(E)-1:0] NAME``_hp_wr_value; \
  logic [$clog2(C)-1:0] NAME``_lut_wr_class, NAME``_result_class; \
  logic [$clog2((IB + FI - 1) / FI)-1:0] NAME``_lut_wr_filter; \
  logic [(E / WW > 1 ? $clog2(E / WW) : 1)-1:0] NAME``_lut_wr_addr; \
  logic [WW-1:0] NAME``_lut_wr_data; \
  logic [$clog2((IB + FI - 1) / FI + 1)-1:0] NAME``_responses [C]; \
  int NAME``_checks, NAME``_failures; \
  bthowen_top #(.NUM_CLASSES(C), .INPUT_BITS(IB), .FILTER_INPUTS(FI), .FILTER_ENTRIES(E), \
    .NUM_HASHES(K), .HASH_UNITS(HU), .BUS_WIDTH(BW), .WRITE_WIDTH(WW)) NAME``_dut ( \
    .clk_i(clk), .rst_ni(NAME``_rst_n), .in_valid_i(NAME``_in_valid), .in_ready_o(NAME``_in_ready), \
    .in_data_i(NAME``_in_data), .hp_wr_en_i(NAME``_hp_wr_en), .hp_wr_set_i(NAME``_hp_wr_set), \
    .hp_wr_index_i(NAME``_hp_wr_index), .hp_wr_value_i(NAME``_hp_wr_value), \
    .lut_wr_en_i(NAME``_lut_wr_en), .lut_wr_class_i(NAME``_lut_wr_class), \
    .lut_wr_filter_i(NAME``_lut_wr_filter), .lut_wr_addr_i(NAME``_lut_wr_addr), \
    .lut_wr_data_i(NAME``_lut_wr_data), .result_valid_o(NAME``_result_valid), \
    .result_class_o(NAME``_result_class), .responses_o(NAME``_responses), .busy_o(NAME``_busy)); \
  tb_bthowen_harness #(.NUM_CLASSES(C), .INPUT_BITS(IB), .FILTER_INPUTS(FI), .FILTER_ENTRIES(E), \
    .NUM_HASHES(K), .HASH_UNITS(HU), .BUS_WIDTH(BW), .WRITE_WIDTH(WW), .SAMPLES(NS), \
    .TRAIN(6), .BLEACH(2), .NOISE_PCT(2), .TABLE_CYCLES(CYC)) NAME``_h ( \
    .clk(clk), .rst_n(NAME``_rst_n), .in_valid(NAME``_in_valid), .in_ready(NAME``_in_ready), \
    .in_data(NAME``_in_data), .hp_wr_en(NAME``_hp_wr_en), .hp_wr_set(NAME``_hp_wr_set), \
    .hp_wr_index(NAME``_hp_wr_index), .hp_wr_value(NAME``_hp_wr_value), .lut_wr_en(NAME``_lut_wr_en), \
    .lut_wr_class(NAME``_lut_wr_class), .lut_wr_filter(NAME``_lut_wr_filter), \
    .lut_wr_addr(NAME``_lut_wr_addr), .lut_wr_data(NAME``_lut_wr_data), \
    .result_valid(NAME``_result_valid), .result_class(NAME``_result_class), \
    .responses(NAME``_responses), .busy(NAME``_busy), .done(NAME``_done), \
    .checks(NAME``_checks), .failures(NAME``_failures));
