// tb_bthowen_discriminator: one discriminator with 8 filters of 128 entries
// (reduced from 84 x 2048 for run time). Loads random tables filter by filter,
// broadcasts random k = 2 hash sets in lockstep, and checks every filter's
// answer (AND of its two entries) and the response (their count) against a
// model, with the response two cycles after the broadcast flagged last.
module tb_bthowen_discriminator;
  localparam int unsigned IB = 64, FI = 8, E = 128, WW = 32;
  localparam int unsigned NF = IB / FI, HB = 7, RB = $clog2(NF + 1), NW = E / WW;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic          we = 0;
  logic [2:0]    wfilt = '0;
  logic [1:0]    waddr = '0;
  logic [WW-1:0] wdata = '0;
  logic          en = 0, first = 0, last = 0;
  logic [HB-1:0] hashes [NF];
  logic [NF-1:0] fresp;
  logic [RB-1:0] resp;
  logic          resp_valid;
  bit            tbl [NF][E];
  int checks = 0, failures = 0, answers = 0;

  bthowen_discriminator #(.INPUT_BITS(IB), .FILTER_INPUTS(FI), .FILTER_ENTRIES(E), .WRITE_WIDTH(WW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .wr_en_i(we), .wr_filter_i(wfilt), .wr_addr_i(waddr), .wr_data_i(wdata),
    .lookup_en_i(en), .first_i(first), .last_i(last), .hashes_i(hashes),
    .filter_resp_o(fresp), .response_o(resp), .response_valid_o(resp_valid));

  initial begin
    for (int f = 0; f < NF; f++) for (int i = 0; i < E; i++) tbl[f][i] = ($urandom % 4) != 0;
    for (int f = 0; f < NF; f++) hashes[f] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < NF; f++) for (int w = 0; w < NW; w++) begin
      logic [WW-1:0] d;
      for (int b = 0; b < WW; b++) d[b] = tbl[f][w * WW + b];
      we <= 1; wfilt <= 3'(f); waddr <= 2'(w); wdata <= d;
      @(posedge clk);
    end
    we <= 0;
    for (int t = 0; t < 500; t++) begin
      bit acc [NF];
      int exp_cnt;
      for (int f = 0; f < NF; f++) acc[f] = 1;
      for (int j = 0; j < 2; j++) begin
        for (int f = 0; f < NF; f++) begin
          hashes[f] <= HB'($urandom);
        end
        en <= 1; first <= (j == 0); last <= (j == 1);
        @(posedge clk);
        for (int f = 0; f < NF; f++) acc[f] &= tbl[f][hashes[f]];
      end
      en <= 0; first <= 0; last <= 0;
      // the edge that took the last hashes has updated the lookups
      #1;
      exp_cnt = 0;
      for (int f = 0; f < NF; f++) begin
        exp_cnt += int'(acc[f]);
        checks++;
        if (fresp[f] !== acc[f]) begin failures++; $display("FAIL t=%0d filter %0d got %0b", t, f, fresp[f]); end
      end
      checks++;
      if (resp_valid) begin failures++; $display("FAIL t=%0d response one cycle early", t); end
      // second cycle: registered popcount
      @(posedge clk); #1;
      checks++;
      if (!resp_valid || int'(resp) != exp_cnt) begin
        failures++;
        $display("FAIL t=%0d response %0d valid %0b exp %0d", t, resp, resp_valid, exp_cnt);
      end else answers++;
      @(posedge clk); #1;
      checks++;
      if (resp_valid) begin failures++; $display("FAIL t=%0d valid longer than one cycle", t); end
    end
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
