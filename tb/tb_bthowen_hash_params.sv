// tb_bthowen_hash_params: writes random values to random (set, index) places
// of a 2 x 28 x 11-bit parameter file, keeps a copy, and compares the whole
// file with the copy after every write; checks that reset clears it and that
// out-of-range indices are ignored.
module tb_bthowen_hash_params;
  localparam int unsigned N = 28, K = 2, M = 11;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic         we = 0;
  logic [0:0]   set = '0;
  logic [4:0]   index = '0;
  logic [M-1:0] value = '0;
  logic [M-1:0] params [K][N];
  logic [M-1:0] model  [K][N];
  int checks = 0, failures = 0;

  bthowen_hash_params #(.FILTER_INPUTS(N), .NUM_HASHES(K), .HASH_BITS(M)) dut (
    .clk_i(clk), .rst_ni(rst_n), .wr_en_i(we), .wr_set_i(set), .wr_index_i(index),
    .wr_value_i(value), .params_o(params));

  task automatic compare(string what);
    for (int j = 0; j < K; j++) for (int i = 0; i < N; i++) begin
      checks++;
      if (params[j][i] !== model[j][i]) begin
        failures++;
        $display("FAIL %s [%0d][%0d] got %h exp %h", what, j, i, params[j][i], model[j][i]);
      end
    end
  endtask

  initial begin
    for (int j = 0; j < K; j++) for (int i = 0; i < N; i++) model[j][i] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1 compare("after reset");
    for (int t = 0; t < 300; t++) begin
      set = 1'($urandom); index = 5'($urandom % 32); value = M'($urandom); we = 1;
      if (index < N) model[set][index] = value;
      @(posedge clk); #1 we = 0;
      compare("after write");
    end
    rst_n = 0; @(posedge clk); #1 rst_n = 1;
    for (int j = 0; j < K; j++) for (int i = 0; i < N; i++) model[j][i] = '0;
    compare("second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
