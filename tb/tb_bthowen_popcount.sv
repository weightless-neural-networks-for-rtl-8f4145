// tb_bthowen_popcount: checks the popcount of 84-bit vectors (the filter
// count of the default model) against a bit-by-bit count, for all-zero,
// all-one, every one-hot vector and random vectors of varied density.
module tb_bthowen_popcount;
  localparam int unsigned W = 84;
  localparam int unsigned OB = $clog2(W + 1);

  logic [W-1:0]  bits;
  logic [OB-1:0] cnt;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  bthowen_popcount #(.WIDTH(W)) dut (.bits_i(bits), .count_o(cnt));

  task automatic check();
    int exp = 0;
    for (int i = 0; i < W; i++) exp += int'(bits[i]);
    checks++;
    if (int'(cnt) != exp) begin
      failures++;
      $display("FAIL bits=%h got %0d exp %0d", bits, cnt, exp);
    end
  endtask

  initial begin
    bits = '0;   #1 check();
    bits = '1;   #1 check();
    for (int i = 0; i < W; i++) begin bits = W'(1) << i; #1 check(); end
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < W; i++) bits[i] = ($urandom % 8) < (t % 9);
      #1 check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
