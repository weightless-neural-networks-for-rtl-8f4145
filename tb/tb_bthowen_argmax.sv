// tb_bthowen_argmax: random responses for 10 classes, including frequent ties
// (small value range); expects the index of the first maximum and the maximum.
module tb_bthowen_argmax;
  localparam int unsigned C = 10;
  localparam int unsigned RB = 7;

  logic [RB-1:0] resp [C];
  logic [3:0]    idx;
  logic [RB-1:0] mx;
  int checks = 0, failures = 0, ties = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  bthowen_argmax #(.NUM_CLASSES(C), .RESP_BITS(RB)) dut (.resp_i(resp), .index_o(idx), .max_o(mx));

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int best, n_best;
      best = 0;
      n_best = 0;
      for (int c = 0; c < C; c++) resp[c] = (t % 2) ? RB'($urandom % 4) : RB'($urandom % 85);
      for (int c = 1; c < C; c++) if (resp[c] > resp[best]) best = c;
      for (int c = 0; c < C; c++) if (resp[c] == resp[best]) n_best++;
      if (n_best > 1) ties++;
      #1;
      checks++;
      if (int'(idx) != best || mx != resp[best]) begin
        failures++;
        $display("FAIL t=%0d got %0d/%0d exp %0d/%0d", t, idx, mx, best, resp[best]);
      end
    end
    checks++;
    if (ties == 0) begin failures++; $display("FAIL no ties exercised"); end
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
