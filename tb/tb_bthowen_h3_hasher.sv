// tb_bthowen_h3_hasher: random check of the H3 hash unit.
//
// Drives random inputs and random parameter sets (default 28 inputs, 11-bit
// hash) and compares the output with the H3 definition evaluated here: the XOR
// of the parameters whose input bit is 1. Also checks the two corner cases
// x = 0 (hash 0) and a one-hot x (hash = that single parameter).
module tb_bthowen_h3_hasher;
  localparam int unsigned N = 28;
  localparam int unsigned M = 11;

  logic [N-1:0] x;
  logic [M-1:0] p [N];
  logic [M-1:0] h;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  bthowen_h3_hasher #(.FILTER_INPUTS(N), .HASH_BITS(M)) dut (.x_i(x), .params_i(p), .hash_o(h));

  function automatic logic [M-1:0] ref_hash(logic [N-1:0] xv, logic [M-1:0] pv [N]);
    logic [M-1:0] r = '0;
    for (int i = 0; i < N; i++) if (xv[i]) r = r ^ pv[i];
    return r;
  endfunction

  task automatic check(string what, logic [M-1:0] exp);
    checks++;
    if (h !== exp) begin
      failures++;
      $display("FAIL %s: x=%h got %h exp %h", what, x, h, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) p[i] = M'($urandom);
    x = '0;
    #1 check("zero input", '0);
    for (int i = 0; i < N; i++) begin
      x = N'(1) << i;
      #1 check("one-hot", p[i]);
    end
    for (int t = 0; t < 2000; t++) begin
      if (t % 100 == 0) for (int i = 0; i < N; i++) p[i] = M'($urandom);
      x = N'($urandom);
      #1 check("random", ref_hash(x, p));
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
