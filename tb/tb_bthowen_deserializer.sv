// tb_bthowen_deserializer: 64-bit bus, 200-bit samples (4 words, the last
// one partly used). A model of the accelerator takes each sample from the
// back buffer, compares it with the sample sent, and releases it LAT cycles
// later. Three phases:
//   A  continuous bus, LAT = 2: no stall allowed, one sample every 4 cycles;
//   B  continuous bus, LAT = 9: stalls must occur, data must stay intact;
//   C  random bus gaps and random LAT.
// The bus driver keeps a refused word offered unchanged.
module tb_bthowen_deserializer;
  localparam int unsigned BW = 64, SB = 200, WORDS = (SB + BW - 1) / BW;
  localparam int unsigned NPH = 40;  // samples per phase

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic          in_valid = 0, in_ready;
  logic [BW-1:0] in_data = '0;
  logic [SB-1:0] sample;
  logic          sample_valid, release_s = 0;
  int checks = 0, failures = 0;

  bthowen_deserializer #(.BUS_WIDTH(BW), .SAMPLE_BITS(SB)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .sample_o(sample), .sample_valid_o(sample_valid), .sample_release_i(release_s));

  logic [SB-1:0] sent_q [$];
  logic [SB-1:0] cur;
  int  w = 0, n_sent = 0, n_got = 0, phase = 0, cycle = 0, last_got = 0;
  int  stalls [3] = '{0, 0, 0};
  int  busy = 0, cnt = 0, lat = 2;

  function automatic logic [SB-1:0] rand_sample();
    logic [SB-1:0] s;
    for (int i = 0; i < SB; i += 32) s[i +: 8] = 8'($urandom);
    for (int i = 0; i < SB; i++) if (i % 32 >= 8) s[i] = 1'($urandom);
    return s;
  endfunction

  function automatic logic [BW-1:0] word_of(logic [SB-1:0] s, int idx);
    logic [WORDS*BW-1:0] padded;
    padded = '0;
    padded[SB-1:0] = s;
    return padded[idx*BW +: BW];
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      cycle++;
      // ---- bus driver ----
      if (in_valid && !in_ready) stalls[phase]++;
      if (in_valid && in_ready) begin
        w++;
        if (w == WORDS) begin
          sent_q.push_back(cur);
          n_sent++;
          w = 0;
          cur = rand_sample();
        end
      end
      if (!(in_valid && !in_ready)) begin
        if (n_sent < 3 * NPH && (phase < 2 || ($urandom % 3) != 0)) begin
          in_valid <= 1'b1;
          in_data  <= word_of(cur, w);
        end else begin
          in_valid <= 1'b0;
          in_data  <= BW'($urandom);
        end
      end
      // ---- accelerator model ----
      release_s <= 1'b0;
      if (busy != 0) begin
        cnt--;
        if (cnt == 0) begin
          release_s <= 1'b1;
          busy = 0;
        end
      end else if (sample_valid && !release_s) begin
        logic [SB-1:0] e;
        e = sent_q.pop_front();
        checks++;
        if (sample !== e) begin failures++; $display("FAIL sample %0d differs", n_got); end
        if (phase == 0 && n_got >= 2) begin
          checks++;
          if (cycle - last_got != WORDS) begin
            failures++;
            $display("FAIL phase A: samples %0d cycles apart, expected %0d", cycle - last_got, WORDS);
          end
        end
        last_got = cycle;
        n_got++;
        busy = 1;
        cnt = (phase == 2) ? 1 + int'($urandom % 8) : lat;
        if (n_got == NPH)     begin phase = 1; lat = 9; end
        if (n_got == 2 * NPH) begin phase = 2; end
      end
    end
  end

  initial begin
    cur = rand_sample();
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (n_got == 3 * NPH);
    repeat (2) @(posedge clk);
    checks++;
    if (stalls[0] != 0) begin failures++; $display("FAIL %0d stalls with a fast accelerator", stalls[0]); end
    checks++;
    if (stalls[1] == 0) begin failures++; $display("FAIL no stall with a slow accelerator"); end
    $display("stalls: A=%0d B=%0d C=%0d", stalls[0], stalls[1], stalls[2]);
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
