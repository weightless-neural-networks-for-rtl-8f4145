// tb_bthowen_input_mapping: at the default size (2352 bits, 84 filters of 28
// inputs) drives every one-hot input and checks that exactly one filter input
// goes high, that no filter input is hit twice (the mapping is a
// permutation), and that the hit position p satisfies p*1009 mod 2352 = the
// driven bit. Then checks a padded size (90 bits into 12 filters of 8) the
// same way, where the 6 padding inputs must never go high.
module tb_bthowen_input_mapping;
  localparam int unsigned N1 = 2352, F1 = 28, S = 1009;
  localparam int unsigned NF1 = (N1 + F1 - 1) / F1;
  localparam int unsigned N2 = 90, F2 = 8;
  localparam int unsigned NF2 = (N2 + F2 - 1) / F2;

  logic clk = 0;
  always #5 clk = ~clk;
  logic [N1-1:0] s1;
  logic [F1-1:0] o1 [NF1];
  logic [N2-1:0] s2;
  logic [F2-1:0] o2 [NF2];
  int checks = 0, failures = 0;
  bit seen1 [NF1*F1];
  bit seen2 [NF2*F2];

  bthowen_input_mapping #(.INPUT_BITS(N1), .FILTER_INPUTS(F1), .MAP_STRIDE(S)) dut1 (.sample_i(s1), .filter_in_o(o1));
  bthowen_input_mapping #(.INPUT_BITS(N2), .FILTER_INPUTS(F2), .MAP_STRIDE(S)) dut2 (.sample_i(s2), .filter_in_o(o2));

  initial begin
    for (int k = 0; k < N1; k++) begin
      int hits, pos;
      hits = 0;
      pos = -1;
      s1 = '0; s1[k] = 1'b1;
      #1;
      for (int f = 0; f < NF1; f++) for (int b = 0; b < F1; b++)
        if (o1[f][b]) begin hits++; pos = f * F1 + b; end
      checks++;
      if (hits != 1 || pos < 0 || seen1[pos] || ((longint'(pos) * S) % N1) != k) begin
        failures++;
        $display("FAIL size1 bit %0d hits=%0d pos=%0d", k, hits, pos);
      end else seen1[pos] = 1;
    end
    for (int k = 0; k < N2; k++) begin
      int hits, pos;
      hits = 0;
      pos = -1;
      s2 = '0; s2[k] = 1'b1;
      #1;
      for (int f = 0; f < NF2; f++) for (int b = 0; b < F2; b++)
        if (o2[f][b]) begin hits++; pos = f * F2 + b; end
      checks++;
      if (hits != 1 || pos < 0 || pos >= N2 || seen2[pos] || ((pos * S) % N2) != k) begin
        failures++;
        $display("FAIL size2 bit %0d hits=%0d pos=%0d", k, hits, pos);
      end else seen2[pos] = 1;
    end
    s2 = '1; #1;
    for (int p = N2; p < NF2 * F2; p++) begin
      checks++;
      if (o2[p / F2][p % F2] !== 1'b0) begin failures++; $display("FAIL padding %0d", p); end
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
