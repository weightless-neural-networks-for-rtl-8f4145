// bthowen_deserializer: double-buffered input deserializer.
//
// Encoded samples arrive over a BUS_WIDTH-bit valid/ready bus, WORDS =
// ceil(SAMPLE_BITS / BUS_WIDTH) words per sample, word w carrying sample bits
// [w*BUS_WIDTH +: BUS_WIDTH] (unused bits of the last word are dropped). The
// front buffer collects the words of the next sample while the back buffer
// holds the current sample, presented all at once to the accelerator so that
// every unit works on it in lockstep.
//
// The last word of a sample goes straight into the back buffer when that is
// empty or released in the same cycle, so a bus that sends a word every cycle
// is never stalled as long as the accelerator needs at most WORDS cycles per
// sample: one sample per WORDS cycles. Otherwise the completed front buffer
// waits, in_ready_o drops (a stall) and it moves over when the back buffer is
// released. sample_valid_o rises the cycle after the move; sample_release_i
// (high for one cycle) frees the back buffer.
//
// Double buffering follows the original accelerator; the handshake, the bit
// order and the direct last-word path are this design's choices.
module bthowen_deserializer #(
  parameter int unsigned BUS_WIDTH   = bthowen_pkg::DEF_BUS_WIDTH,
  parameter int unsigned SAMPLE_BITS = bthowen_pkg::DEF_INPUT_BITS,
  parameter int unsigned WORDS       = (SAMPLE_BITS + BUS_WIDTH - 1) / BUS_WIDTH,
  parameter int unsigned CNT_BITS    = bthowen_pkg::idx_bits(WORDS)
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // input bus
  input  logic                   in_valid_i,
  output logic                   in_ready_o,
  input  logic [BUS_WIDTH-1:0]   in_data_i,
  // sample to the accelerator
  output logic [SAMPLE_BITS-1:0] sample_o,
  output logic                   sample_valid_o,
  input  logic                   sample_release_i
);

  logic [BUS_WIDTH-1:0]       front_q [WORDS];
  logic [CNT_BITS-1:0]        count_q;
  logic                       front_full_q;
  logic [WORDS*BUS_WIDTH-1:0] back_q;
  logic                       back_valid_q;

  logic accept, last_word, back_free, load_direct, load_front;

  assign in_ready_o  = !front_full_q;
  assign accept      = in_valid_i && in_ready_o;
  assign last_word   = accept && (count_q == CNT_BITS'(WORDS - 1));
  assign back_free   = !back_valid_q || sample_release_i;
  assign load_front  = front_full_q && back_free;
  assign load_direct = last_word && back_free;

  always_ff @(posedge clk_i) begin
    if (accept) front_q[count_q] <= in_data_i;
    if (load_front || load_direct) begin
      for (int unsigned w = 0; w < WORDS; w++) begin
        back_q[w*BUS_WIDTH +: BUS_WIDTH] <=
          (load_direct && w == WORDS - 1) ? in_data_i : front_q[w];
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      count_q      <= '0;
      front_full_q <= 1'b0;
      back_valid_q <= 1'b0;
    end else begin
      if (sample_release_i) back_valid_q <= 1'b0;
      if (load_front) begin
        front_full_q <= 1'b0;
        back_valid_q <= 1'b1;
      end
      if (accept) begin
        if (last_word) begin
          count_q <= '0;
          if (load_direct) back_valid_q <= 1'b1;
          else             front_full_q <= 1'b1;
        end else begin
          count_q <= count_q + 1'b1;
        end
      end
    end
  end

  assign sample_o       = back_q[SAMPLE_BITS-1:0];
  assign sample_valid_o = back_valid_q;

  // Bus rule: a word offered and not taken stays offered, unchanged.
  a_bus_hold : assert property (@(posedge clk_i) disable iff (!rst_ni)
    (in_valid_i && !in_ready_o) |=> (in_valid_i && $stable(in_data_i)));
  // Only a held sample can be released.
  a_release : assert property (@(posedge clk_i) disable iff (!rst_ni)
    sample_release_i |-> back_valid_q);

endmodule
