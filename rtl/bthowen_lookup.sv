// bthowen_lookup: lookup unit of one Bloom filter in one discriminator.
//
// Holds the filter's binarized table: FILTER_ENTRIES one-bit entries, each 1
// if the trained counting Bloom filter counter reached the bleaching threshold.
// A filter is checked with k hashed addresses, one per cycle, all delivered in
// lockstep by the hash engine. The first read loads the read bit into the
// response register; each later read ANDs the read bit into it, so after the
// k-th read the register holds "all k entries set", the Bloom filter answer.
// This is the table / AND / select / register structure of the original
// filter drawing; which input the select takes on which read is this design's
// reading of it.
//
// Timing: lookup_en_i with addr_i is consumed every cycle it is high;
// resp_o is valid, and resp_valid_o pulses, the cycle after the read that
// carried last_i. Throughput is one filter answer per k cycles.
//
// The table is written WRITE_WIDTH bits at a time (word wr_addr_i holds
// entries [wr_addr_i*WRITE_WIDTH +: WRITE_WIDTH]). The original design
// compiled trained tables into the logic; the write port, to be used while no
// sample is in flight, is this design's choice. The table is not reset.
module bthowen_lookup #(
  parameter int unsigned FILTER_ENTRIES = bthowen_pkg::DEF_FILTER_ENTRIES,
  parameter int unsigned HASH_BITS      = $clog2(FILTER_ENTRIES),
  parameter int unsigned WRITE_WIDTH    = bthowen_pkg::DEF_WRITE_WIDTH,
  parameter int unsigned WORDS          = FILTER_ENTRIES / WRITE_WIDTH,
  parameter int unsigned WADDR_BITS     = bthowen_pkg::idx_bits(WORDS)
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // table write port
  input  logic                   wr_en_i,
  input  logic [WADDR_BITS-1:0]  wr_addr_i,
  input  logic [WRITE_WIDTH-1:0] wr_data_i,
  // hashed lookups
  input  logic                   lookup_en_i,
  input  logic                   first_i,
  input  logic                   last_i,
  input  logic [HASH_BITS-1:0]   addr_i,
  // filter response
  output logic                   resp_o,
  output logic                   resp_valid_o
);

  logic [WRITE_WIDTH-1:0] table_q [WORDS];
  logic                   data;

  if (WORDS * WRITE_WIDTH != FILTER_ENTRIES || (1 << HASH_BITS) != FILTER_ENTRIES) begin : g_bad_size
    $error("bthowen_lookup: FILTER_ENTRIES must be a power of two and a multiple of WRITE_WIDTH");
  end

  always_ff @(posedge clk_i) begin
    if (wr_en_i) table_q[wr_addr_i] <= wr_data_i;
  end

  // Upper address bits pick the word, lower bits the entry within it.
  localparam int unsigned BitBits = $clog2(WRITE_WIDTH);
  logic [WRITE_WIDTH-1:0] word;

  if (WORDS > 1) begin : g_words
    assign word = table_q[addr_i[HASH_BITS-1:BitBits]];
  end else begin : g_one_word
    assign word = table_q[0];
  end
  assign data = word[addr_i[BitBits-1:0]];

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      resp_o       <= 1'b0;
      resp_valid_o <= 1'b0;
    end else begin
      resp_valid_o <= lookup_en_i && last_i;
      if (lookup_en_i) resp_o <= first_i ? data : (resp_o & data);
    end
  end

endmodule
