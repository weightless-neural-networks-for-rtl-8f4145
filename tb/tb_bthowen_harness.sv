// tb_bthowen_harness: stimulus and reference model for one bthowen_top.
//
// Builds a small trained BTHOWeN model the way the training flow does it:
// random H3 parameters, one random prototype pattern per class (differing
// from the other prototypes in at least half of the filter inputs), TRAIN
// noisy copies of each prototype presented to a counting Bloom filter model
// (find the smallest of the k addressed counters, increment only the counters
// holding that minimum), then binarization with bleaching threshold BLEACH
// (entry = counter >= BLEACH). Parameters and tables are loaded through the
// accelerator's load ports. Then SAMPLES samples are streamed over the bus
// without gaps: noisy prototypes of known class, and every fifth one a random
// pattern that matches no class (these usually give tied responses).
//
// Every result is compared with the reference: all class responses (count of
// filters whose k entries are all set) and the predicted class (largest
// response, lowest index on a tie). Also checked: the latency of the first
// sample (k*G+4 cycles after its last word), the result spacing on a
// continuous bus (max(WORDS, k*G) cycles, G = ceil(filters / hash units)), that noisy prototypes are
// classified as their class, that the measured cycles per inference equal
// TABLE_CYCLES when that is given, and that the mechanisms occur: bus stalls
// (exactly when hashing, k*G cycles, takes longer than the WORDS bus cycles), reception of a sample while the previous one is
// processed (double buffering), tied responses, and results.
module tb_bthowen_harness #(
  parameter int unsigned NUM_CLASSES    = 10,
  parameter int unsigned INPUT_BITS     = 2352,
  parameter int unsigned FILTER_INPUTS  = 28,
  parameter int unsigned FILTER_ENTRIES = 2048,
  parameter int unsigned NUM_HASHES     = 2,
  parameter int unsigned HASH_UNITS     = 5,
  parameter int unsigned BUS_WIDTH      = 64,
  parameter int unsigned WRITE_WIDTH    = 64,
  parameter int unsigned MAP_STRIDE     = 1009,
  parameter int unsigned SAMPLES        = 30,
  parameter int unsigned TRAIN          = 6,
  parameter int unsigned BLEACH         = 2,
  parameter int unsigned NOISE_PCT      = 2,
  parameter int unsigned TABLE_CYCLES   = 0,
  parameter int unsigned NUM_FILTERS    = (INPUT_BITS + FILTER_INPUTS - 1) / FILTER_INPUTS,
  parameter int unsigned HASH_BITS      = $clog2(FILTER_ENTRIES),
  parameter int unsigned RESP_BITS      = $clog2(NUM_FILTERS + 1),
  parameter int unsigned CLASS_BITS     = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1,
  parameter int unsigned FILT_BITS      = (NUM_FILTERS > 1) ? $clog2(NUM_FILTERS) : 1,
  parameter int unsigned TWORDS         = FILTER_ENTRIES / WRITE_WIDTH,
  parameter int unsigned WADDR_BITS     = (TWORDS > 1) ? $clog2(TWORDS) : 1,
  parameter int unsigned SET_BITS       = (NUM_HASHES > 1) ? $clog2(NUM_HASHES) : 1,
  parameter int unsigned PIDX_BITS      = (FILTER_INPUTS > 1) ? $clog2(FILTER_INPUTS) : 1
) (
  input  logic                   clk,
  output logic                   rst_n,
  output logic                   in_valid,
  input  logic                   in_ready,
  output logic [BUS_WIDTH-1:0]   in_data,
  output logic                   hp_wr_en,
  output logic [SET_BITS-1:0]    hp_wr_set,
  output logic [PIDX_BITS-1:0]   hp_wr_index,
  output logic [HASH_BITS-1:0]   hp_wr_value,
  output logic                   lut_wr_en,
  output logic [CLASS_BITS-1:0]  lut_wr_class,
  output logic [FILT_BITS-1:0]   lut_wr_filter,
  output logic [WADDR_BITS-1:0]  lut_wr_addr,
  output logic [WRITE_WIDTH-1:0] lut_wr_data,
  input  logic                   result_valid,
  input  logic [CLASS_BITS-1:0]  result_class,
  input  logic [RESP_BITS-1:0]   responses [NUM_CLASSES],
  input  logic                   busy,
  output logic                   done,
  output int                     checks,
  output int                     failures
);

  localparam int unsigned WORDS = (INPUT_BITS + BUS_WIDTH - 1) / BUS_WIDTH;
  localparam int unsigned G     = (NUM_FILTERS + HASH_UNITS - 1) / HASH_UNITS;
  // cycles per sample on a continuous bus: bus time or hashing time
  localparam int unsigned PERIOD = (WORDS > NUM_HASHES * G) ? WORDS : NUM_HASHES * G;
  // the bus must stall exactly when hashing takes longer than the bus
  localparam bit EXPECT_STALL = NUM_HASHES * G > WORDS;

  typedef logic [INPUT_BITS-1:0] sample_t;

  logic [HASH_BITS-1:0] hp [NUM_HASHES][FILTER_INPUTS];
  int unsigned          counters [NUM_CLASSES][NUM_FILTERS][FILTER_ENTRIES];
  bit                   tbl      [NUM_CLASSES][NUM_FILTERS][FILTER_ENTRIES];
  sample_t              proto    [NUM_CLASSES];
  sample_t              samples  [SAMPLES];
  int                   label    [SAMPLES];   // -1: random pattern
  int                   exp_resp [SAMPLES][NUM_CLASSES];
  int                   exp_cls  [SAMPLES];

  // ---------------- reference model ----------------
  function automatic logic [FILTER_INPUTS-1:0] filter_input(sample_t x, int f);
    logic [FILTER_INPUTS-1:0] r;
    for (int b = 0; b < FILTER_INPUTS; b++) begin
      longint pos;
      pos = longint'(f) * FILTER_INPUTS + b;
      r[b] = (pos < INPUT_BITS) ? x[int'((pos * MAP_STRIDE) % INPUT_BITS)] : 1'b0;
    end
    return r;
  endfunction

  function automatic int h3(logic [FILTER_INPUTS-1:0] x, int j);
    logic [HASH_BITS-1:0] r;
    r = '0;
    for (int i = 0; i < FILTER_INPUTS; i++) if (x[i]) r ^= hp[j][i];
    return int'(r);
  endfunction

  function automatic sample_t noisy(sample_t p);
    sample_t s;
    s = p;
    for (int i = 0; i < INPUT_BITS; i++) if (($urandom % 100) < NOISE_PCT) s[i] = ~s[i];
    return s;
  endfunction

  function automatic sample_t rand_sample();
    sample_t s;
    for (int i = 0; i < INPUT_BITS; i++) s[i] = 1'($urandom);
    return s;
  endfunction

  task automatic train(sample_t x, int c);
    for (int f = 0; f < NUM_FILTERS; f++) begin
      int a [NUM_HASHES];
      int unsigned mn;
      logic [FILTER_INPUTS-1:0] fi;
      fi = filter_input(x, f);
      mn = '1;
      for (int j = 0; j < NUM_HASHES; j++) begin
        a[j] = h3(fi, j);
        if (counters[c][f][a[j]] < mn) mn = counters[c][f][a[j]];
      end
      // two hashes may hit one counter: it is incremented once
      for (int j = 0; j < NUM_HASHES; j++)
        if (counters[c][f][a[j]] == mn) counters[c][f][a[j]] = mn + 1;
    end
  endtask

  task automatic reference(int s);
    int best;
    for (int c = 0; c < NUM_CLASSES; c++) begin
      exp_resp[s][c] = 0;
      for (int f = 0; f < NUM_FILTERS; f++) begin
        logic [FILTER_INPUTS-1:0] fi;
        bit hit;
        fi = filter_input(samples[s], f);
        hit = 1;
        for (int j = 0; j < NUM_HASHES; j++) hit &= tbl[c][f][h3(fi, j)];
        exp_resp[s][c] += int'(hit);
      end
    end
    best = 0;
    for (int c = 1; c < NUM_CLASSES; c++) if (exp_resp[s][c] > exp_resp[s][best]) best = c;
    exp_cls[s] = best;
  endtask

  // ---------------- bus driver and monitors ----------------
  bit streaming = 0;
  int sent = 0, w = 0, got = 0, cycle = 0;
  int stalls = 0, overlaps = 0, ties = 0, correct = 0, labelled = 0;
  int last_accept = -1, first_last_accept = -1, last_result = -1, spacing_ok = 0;

  always @(posedge clk) begin
    if (streaming) begin
      cycle++;
      if (in_valid && !in_ready) stalls++;
      if (in_valid && in_ready) begin
        if (busy) overlaps++;
        w++;
        if (w == WORDS) begin
          if (sent == 0) first_last_accept = cycle;
          sent++;
          w = 0;
        end
      end
      if (!(in_valid && !in_ready)) begin
        if (sent < SAMPLES) begin
          logic [WORDS*BUS_WIDTH-1:0] padded;
          padded = '0;
          padded[INPUT_BITS-1:0] = samples[sent];
          in_valid <= 1'b1;
          in_data  <= padded[w*BUS_WIDTH +: BUS_WIDTH];
        end else begin
          in_valid <= 1'b0;
        end
      end
      if (result_valid) begin
        int n_max;
        if (got == 0) begin
          checks++;
          if (cycle - first_last_accept != NUM_HASHES * G + 4) begin
            failures++;
            $display("FAIL first result %0d cycles after last word, expected %0d",
                     cycle - first_last_accept, NUM_HASHES * G + 4);
          end
        end else begin
          checks++;
          if (cycle - last_result != PERIOD) begin
            failures++;
            $display("FAIL results %0d cycles apart, expected %0d", cycle - last_result, PERIOD);
          end else spacing_ok++;
        end
        last_result = cycle;
        checks++;
        if (int'(result_class) != exp_cls[got]) begin
          failures++;
          $display("FAIL sample %0d: class %0d, expected %0d", got, result_class, exp_cls[got]);
        end
        n_max = 0;
        for (int c = 0; c < NUM_CLASSES; c++) begin
          checks++;
          if (int'(responses[c]) != exp_resp[got][c]) begin
            failures++;
            $display("FAIL sample %0d class %0d: response %0d, expected %0d", got, c, responses[c], exp_resp[got][c]);
          end
          if (exp_resp[got][c] == exp_resp[got][exp_cls[got]]) n_max++;
        end
        if (n_max > 1) ties++;
        if (label[got] >= 0) begin
          labelled++;
          if (int'(result_class) == label[got]) correct++;
        end
        got++;
      end
    end
  end

  // ---------------- sequence ----------------
  initial begin
    done = 0; checks = 0; failures = 0;
    rst_n = 0; in_valid = 0; in_data = '0;
    hp_wr_en = 0; hp_wr_set = '0; hp_wr_index = '0; hp_wr_value = '0;
    lut_wr_en = 0; lut_wr_class = '0; lut_wr_filter = '0; lut_wr_addr = '0; lut_wr_data = '0;

    // model
    for (int j = 0; j < NUM_HASHES; j++) for (int i = 0; i < FILTER_INPUTS; i++) hp[j][i] = HASH_BITS'($urandom);
    for (int c = 0; c < NUM_CLASSES; c++) begin
      // redraw until the prototype differs from every earlier one in at least
      // half of the filter inputs, so that tiny models keep their classes apart
      for (int tries = 0; tries < 1000; tries++) begin
        bit distinct;
        proto[c] = rand_sample();
        distinct = 1;
        for (int d = 0; d < c; d++) begin
          int differ;
          differ = 0;
          for (int f = 0; f < NUM_FILTERS; f++)
            differ += int'(filter_input(proto[c], f) != filter_input(proto[d], f));
          if (2 * differ < NUM_FILTERS) distinct = 0;
        end
        if (distinct) break;
      end
      for (int f = 0; f < NUM_FILTERS; f++) for (int e = 0; e < FILTER_ENTRIES; e++) counters[c][f][e] = 0;
    end
    for (int t = 0; t < TRAIN; t++) for (int c = 0; c < NUM_CLASSES; c++) train(noisy(proto[c]), c);
    for (int c = 0; c < NUM_CLASSES; c++) for (int f = 0; f < NUM_FILTERS; f++) for (int e = 0; e < FILTER_ENTRIES; e++)
      tbl[c][f][e] = counters[c][f][e] >= BLEACH;
    for (int s = 0; s < SAMPLES; s++) begin
      if (s % 5 == 4) begin
        label[s] = -1;
        samples[s] = rand_sample();
      end else begin
        label[s] = int'($urandom % NUM_CLASSES);
        samples[s] = noisy(proto[label[s]]);
      end
      reference(s);
    end

    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int j = 0; j < NUM_HASHES; j++) for (int i = 0; i < FILTER_INPUTS; i++) begin
      hp_wr_en <= 1; hp_wr_set <= SET_BITS'(j); hp_wr_index <= PIDX_BITS'(i); hp_wr_value <= hp[j][i];
      @(posedge clk);
    end
    hp_wr_en <= 0;
    for (int c = 0; c < NUM_CLASSES; c++) for (int f = 0; f < NUM_FILTERS; f++) for (int a = 0; a < TWORDS; a++) begin
      logic [WRITE_WIDTH-1:0] d;
      for (int b = 0; b < WRITE_WIDTH; b++) d[b] = tbl[c][f][a * WRITE_WIDTH + b];
      lut_wr_en <= 1; lut_wr_class <= CLASS_BITS'(c); lut_wr_filter <= FILT_BITS'(f);
      lut_wr_addr <= WADDR_BITS'(a); lut_wr_data <= d;
      @(posedge clk);
    end
    lut_wr_en <= 0;
    @(posedge clk);
    streaming = 1;
    wait (got == SAMPLES);
    repeat (4) @(posedge clk);
    checks++;
    if (EXPECT_STALL ? (stalls == 0) : (stalls != 0)) begin
      failures++;
      $display("FAIL %0d bus stalls, stalls expected: %0b", stalls, EXPECT_STALL);
    end
    if (TABLE_CYCLES != 0) begin
      checks++;
      if (PERIOD != TABLE_CYCLES || spacing_ok != SAMPLES - 1) begin
        failures++;
        $display("FAIL %0d cycles per inference (%0d spacings met), published %0d", PERIOD, spacing_ok, TABLE_CYCLES);
      end
    end
    checks++;
    if (overlaps == 0) begin failures++; $display("FAIL no sample received during processing"); end
    checks++;
    if (ties == 0) begin failures++; $display("FAIL no tied responses exercised"); end
    checks++;
    if (correct * 10 < labelled * 9) begin failures++; $display("FAIL only %0d of %0d classified as trained", correct, labelled); end
    $display("harness %0d classes x %0d filters: results=%0d stalls=%0d overlaps=%0d ties=%0d spacing_ok=%0d correct=%0d/%0d",
             NUM_CLASSES, NUM_FILTERS, got, stalls, overlaps, ties, spacing_ok, correct, labelled);
    done = 1;
  end

endmodule
