// bthowen_discriminator: the submodel of one output class.
//
// NUM_FILTERS lookup units, one per Bloom filter, all receiving their hashed
// addresses at the same time from the shared hash engine, and a popcount of
// their one-bit answers. The count is the class response ("how many filters
// recognise this sample"). Only the tables differ between discriminators; the
// hashes are computed once and broadcast to every discriminator.
//
// Timing: the lookups finish one cycle after the broadcast that carries
// last_i; the popcount is registered, so response_o is valid and
// response_valid_o pulses two cycles after that broadcast.
//
// wr_en_i writes word wr_addr_i of the table of filter wr_filter_i.
module bthowen_discriminator #(
  parameter int unsigned INPUT_BITS     = bthowen_pkg::DEF_INPUT_BITS,
  parameter int unsigned FILTER_INPUTS  = bthowen_pkg::DEF_FILTER_INPUTS,
  parameter int unsigned FILTER_ENTRIES = bthowen_pkg::DEF_FILTER_ENTRIES,
  parameter int unsigned WRITE_WIDTH    = bthowen_pkg::DEF_WRITE_WIDTH,
  parameter int unsigned NUM_FILTERS    = bthowen_pkg::num_filters(INPUT_BITS, FILTER_INPUTS),
  parameter int unsigned HASH_BITS      = $clog2(FILTER_ENTRIES),
  parameter int unsigned RESP_BITS      = $clog2(NUM_FILTERS + 1),
  parameter int unsigned FILT_BITS      = bthowen_pkg::idx_bits(NUM_FILTERS),
  parameter int unsigned WADDR_BITS     = bthowen_pkg::idx_bits(FILTER_ENTRIES / WRITE_WIDTH)
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   wr_en_i,
  input  logic [FILT_BITS-1:0]   wr_filter_i,
  input  logic [WADDR_BITS-1:0]  wr_addr_i,
  input  logic [WRITE_WIDTH-1:0] wr_data_i,
  input  logic                   lookup_en_i,
  input  logic                   first_i,
  input  logic                   last_i,
  input  logic [HASH_BITS-1:0]   hashes_i [NUM_FILTERS],
  output logic [NUM_FILTERS-1:0] filter_resp_o,
  output logic [RESP_BITS-1:0]   response_o,
  output logic                   response_valid_o
);

  logic [NUM_FILTERS-1:0] filt_valid;
  logic [RESP_BITS-1:0]   count;

  for (genvar f = 0; f < NUM_FILTERS; f++) begin : g_filter
    bthowen_lookup #(
      .FILTER_ENTRIES(FILTER_ENTRIES),
      .HASH_BITS     (HASH_BITS),
      .WRITE_WIDTH   (WRITE_WIDTH)
    ) u_lookup (
      .clk_i       (clk_i),
      .rst_ni      (rst_ni),
      .wr_en_i     (wr_en_i && (wr_filter_i == FILT_BITS'(f))),
      .wr_addr_i   (wr_addr_i),
      .wr_data_i   (wr_data_i),
      .lookup_en_i (lookup_en_i),
      .first_i     (first_i),
      .last_i      (last_i),
      .addr_i      (hashes_i[f]),
      .resp_o      (filter_resp_o[f]),
      .resp_valid_o(filt_valid[f])
    );
  end

  bthowen_popcount #(.WIDTH(NUM_FILTERS), .OUT_BITS(RESP_BITS)) u_popcount (
    .bits_i (filter_resp_o),
    .count_o(count)
  );

  // All lookups run in lockstep, so filter 0 stands for all of them.
  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      response_o       <= '0;
      response_valid_o <= 1'b0;
    end else begin
      response_valid_o <= filt_valid[0];
      if (filt_valid[0]) response_o <= count;
    end
  end

endmodule
