// tb_bthowen_lookup: one lookup unit at the default size (2048 entries,
// 64-bit write words). Loads a random table through the write port, then
// issues bursts of k = 1..4 hashed reads (k = 2 is the default model; other
// datasets use up to 4), back to back and with gaps, and checks that the
// response equals the AND of the addressed entries, that it appears exactly
// one cycle after the read flagged is_last, and that resp_valid_o pulses then
// and only then.
module tb_bthowen_lookup;
  localparam int unsigned E = 2048, HB = 11, WW = 64, NW = E / WW;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic          we = 0;
  logic [4:0]    waddr = '0;
  logic [WW-1:0] wdata = '0;
  logic          en = 0, is_first = 0, is_last = 0;
  logic [HB-1:0] addr = '0;
  logic          resp, resp_valid;
  bit            tbl [E];
  int checks = 0, failures = 0, valid_seen = 0, bursts = 0;

  bthowen_lookup #(.FILTER_ENTRIES(E), .WRITE_WIDTH(WW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .wr_en_i(we), .wr_addr_i(waddr), .wr_data_i(wdata),
    .lookup_en_i(en), .first_i(is_first), .last_i(is_last), .addr_i(addr),
    .resp_o(resp), .resp_valid_o(resp_valid));

  // Response checker, sampling mid-cycle: the expected value of a burst is
  // queued at the clock edge that takes its is_last read and must be on resp_o,
  // with resp_valid_o, in the cycle that follows that edge.
  bit exp_q [$];
  always @(negedge clk) begin
    if (rst_n) begin
      if (resp_valid) valid_seen++;
      checks++;
      if (resp_valid !== (exp_q.size() > 0)) begin
        failures++;
        $display("FAIL %0t valid=%0b expected %0d", $time, resp_valid, exp_q.size());
      end
      if (exp_q.size() > 0) begin
        bit e;
        e = exp_q.pop_front();
        checks++;
        if (resp !== e) begin failures++; $display("FAIL %0t resp=%0b exp %0b", $time, resp, e); end
      end
    end
  end

  bit            acc;
  logic [HB-1:0] a;
  int            j;

  task static burst(int k, int density_hit);
    acc = 1;
    for (j = 0; j < k; j++) begin
      // bias towards set entries so that both answers are common
      a = HB'($urandom);
      if (($urandom % 100) < density_hit)
        for (int t = 0; t < 16 && !tbl[a]; t++) a = HB'($urandom);
      acc &= tbl[a];
      en <= 1'b1;
      is_first <= (j == 0) ? 1'b1 : 1'b0;
      is_last <= (j == k - 1) ? 1'b1 : 1'b0;
      addr <= a;
      @(posedge clk);
      if (j == k - 1) exp_q.push_back(acc);
    end
    bursts++;
  endtask

  initial begin
    for (int i = 0; i < E; i++) tbl[i] = ($urandom % 2) == 1;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int w = 0; w < NW; w++) begin
      logic [WW-1:0] d;
      for (int b = 0; b < WW; b++) d[b] = tbl[w * WW + b];
      we <= 1; waddr <= 5'(w); wdata <= d;
      @(posedge clk);
    end
    we <= 0;
    for (int t = 0; t < 2000; t++) begin
      burst(1 + ($urandom % 4), 70);
      if ($urandom % 3 == 0) begin
        en <= 0; is_first <= 0; is_last <= 0;
        repeat (1 + $urandom % 2) @(posedge clk);
      end
    end
    en <= 0; is_first <= 0; is_last <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (valid_seen != bursts) begin failures++; $display("FAIL %0d answers for %0d bursts", valid_seen, bursts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
