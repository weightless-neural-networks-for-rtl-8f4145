// tb_bthowen_hash_engine: 5 filters of 8 inputs, 6-bit hashes, k = 3 hash
// functions, 2 hash units, so G = 3 group cycles per hash set. For random
// samples and parameters, checks every broadcast against H3 hashes computed
// here, the first/last flags, the broadcast times (G*(j+1) cycles after the
// first hashing cycle), the release time (k*G-1 cycles after it) and the
// sample period (k*G cycles) for back-to-back samples; samples with gaps are mixed in.
module tb_bthowen_hash_engine;
  localparam int unsigned FI = 8, NF = 5, IB = NF * FI, E = 64, HB = 6, K = 3, HU = 2;
  localparam int unsigned G = (NF + HU - 1) / HU;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [FI-1:0] fin [NF];
  logic          valid = 0, rel, en, first, last, busy;
  logic [HB-1:0] params [K][FI];
  logic [HB-1:0] hashes [NF];
  int checks = 0, failures = 0;
  // The sample is copied when hashing starts; the source may change it right
  // after the release, while the last broadcast is still to be checked.

  bthowen_hash_engine #(.INPUT_BITS(IB), .FILTER_INPUTS(FI), .FILTER_ENTRIES(E), .NUM_HASHES(K), .HASH_UNITS(HU)) dut (
    .clk_i(clk), .rst_ni(rst_n), .filter_in_i(fin), .sample_valid_i(valid), .sample_release_o(rel),
    .params_i(params), .hashes_o(hashes), .lookup_en_o(en), .first_o(first), .last_o(last), .busy_o(busy));

  function automatic logic [HB-1:0] h3(logic [FI-1:0] x, int j);
    logic [HB-1:0] r = '0;
    for (int i = 0; i < FI; i++) if (x[i]) r ^= params[j][i];
    return r;
  endfunction

  int cycle = 0, start = -1, set_j = 0, samples = 0, prev_start = -1, b2b = 0;
  bit  back_to_back;
  logic [FI-1:0] fin_cur [NF];

  always @(posedge clk) begin
    if (rst_n) begin
      cycle++;
      if (en) begin
        checks++;
        if (cycle - start != G * (set_j + 1) || first !== (set_j == 0) || last !== (set_j == K - 1)) begin
          failures++;
          $display("FAIL broadcast %0d at +%0d first=%0b last=%0b", set_j, cycle - start, first, last);
        end
        for (int f = 0; f < NF; f++) begin
          checks++;
          if (hashes[f] !== h3(fin_cur[f], set_j)) begin
            failures++;
            $display("FAIL sample %0d set %0d filter %0d hash %h exp %h", samples, set_j, f, hashes[f], h3(fin_cur[f], set_j));
          end
        end
        set_j++;
        if (set_j == K) begin
          samples++;
          prev_start = start;
          start = -1;
        end
      end
      // start condition: sample offered while idle
      if (valid && start < 0) begin
        if (prev_start >= 0 && back_to_back) begin
          checks++;
          b2b++;
          if (cycle - prev_start != K * G) begin
            failures++;
            $display("FAIL period %0d, expected %0d", cycle - prev_start, K * G);
          end
        end
        start = cycle;
        for (int f = 0; f < NF; f++) fin_cur[f] = fin[f];
        set_j = 0;
      end
      if (rel) begin
        checks++;
        if (cycle - start != K * G - 1) begin failures++; $display("FAIL release at +%0d", cycle - start); end
      end
    end
  end

  // Sample source: a new sample after the release, sometimes after a gap.
  initial begin
    for (int j = 0; j < K; j++) for (int i = 0; i < FI; i++) params[j][i] = HB'($urandom);
    for (int f = 0; f < NF; f++) fin[f] = FI'($urandom);
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    valid <= 1;
    back_to_back = 1;
    for (int s = 0; s < 200; s++) begin
      do @(posedge clk); while (!rel);
      for (int f = 0; f < NF; f++) fin[f] <= FI'($urandom);
      if (s % 4 == 3) begin
        valid <= 0;
        back_to_back = 0;
        repeat (1 + $urandom % 4) @(posedge clk);
        valid <= 1;
      end else begin
        back_to_back = 1;
      end
    end
    // wait for the last started sample to be broadcast
    repeat (K * G + 4) @(posedge clk);
    checks++;
    if (samples < 200 || b2b < 100) begin failures++; $display("FAIL only %0d samples, %0d back to back", samples, b2b); end
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
