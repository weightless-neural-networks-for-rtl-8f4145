// bthowen_top: BTHOWeN weightless neural network inference accelerator.
//
// A BTHOWeN model is a WiSARD classifier whose RAM nodes are Bloom filters:
// every class has a discriminator made of NUM_FILTERS filters, each filter
// sees FILTER_INPUTS bits of the (thermometer-encoded, pseudo-randomly
// mapped) input, hashes them with k H3 hash functions and answers 1 only if
// all k addressed table bits are set. A discriminator's response is the
// number of filters answering 1; the predicted class is the discriminator
// with the largest response.
//
// Data path, in order:
//   bthowen_deserializer   collects BUS_WIDTH-bit words into a full sample
//                          (double-buffered)
//   bthowen_input_mapping  fixed pseudo-random split of the sample into
//                          filter inputs
//   bthowen_hash_engine    HASH_UNITS shared H3 units, parameters from
//                          bthowen_hash_params, broadcasting k hash sets
//   bthowen_discriminator  NUM_CLASSES x (NUM_FILTERS lookup units + popcount)
//   bthowen_argmax         index of the largest response, registered here
//
// Timing: a sample takes max(WORDS, k*G) cycles, G = ceil(NUM_FILTERS /
// HASH_UNITS) and WORDS = ceil(INPUT_BITS / BUS_WIDTH): with k*G <= WORDS a
// continuously fed bus delivers a result every WORDS cycles (37 for the
// default MNIST-Medium model, where k*G = 34); otherwise the bus is stalled
// and a result comes every k*G cycles. When the engine is idle, result_valid_o
// is high k*G+4 cycles after the cycle in which the sample's last word is
// accepted: 1 cycle into the back buffer, k*G of hashing, then the last
// broadcast, the lookup register, the popcount register and the result
// register. Results are not back-pressured.
//
// Model loading (while no sample is in flight): hp_wr_* writes one H3
// parameter; lut_wr_* writes WRITE_WIDTH entries of one filter table of one
// class. Loading ports, bus handshake, tie rule (lowest class wins) and reset
// (synchronous, active low; tables not cleared) are this design's choices;
// the block structure and the default sizes follow the original design.
module bthowen_top #(
  parameter int unsigned NUM_CLASSES    = bthowen_pkg::DEF_NUM_CLASSES,
  parameter int unsigned INPUT_BITS     = bthowen_pkg::DEF_INPUT_BITS,
  parameter int unsigned FILTER_INPUTS  = bthowen_pkg::DEF_FILTER_INPUTS,
  parameter int unsigned FILTER_ENTRIES = bthowen_pkg::DEF_FILTER_ENTRIES,
  parameter int unsigned NUM_HASHES     = bthowen_pkg::DEF_NUM_HASHES,
  parameter int unsigned HASH_UNITS     = bthowen_pkg::DEF_HASH_UNITS,
  parameter int unsigned BUS_WIDTH      = bthowen_pkg::DEF_BUS_WIDTH,
  parameter int unsigned WRITE_WIDTH    = bthowen_pkg::DEF_WRITE_WIDTH,
  parameter int unsigned MAP_STRIDE     = bthowen_pkg::DEF_MAP_STRIDE,
  parameter int unsigned NUM_FILTERS    = bthowen_pkg::num_filters(INPUT_BITS, FILTER_INPUTS),
  parameter int unsigned HASH_BITS      = $clog2(FILTER_ENTRIES),
  parameter int unsigned RESP_BITS      = $clog2(NUM_FILTERS + 1),
  parameter int unsigned CLASS_BITS     = bthowen_pkg::idx_bits(NUM_CLASSES),
  parameter int unsigned FILT_BITS      = bthowen_pkg::idx_bits(NUM_FILTERS),
  parameter int unsigned WADDR_BITS     = bthowen_pkg::idx_bits(FILTER_ENTRIES / WRITE_WIDTH),
  parameter int unsigned SET_BITS       = bthowen_pkg::idx_bits(NUM_HASHES),
  parameter int unsigned PIDX_BITS      = bthowen_pkg::idx_bits(FILTER_INPUTS)
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // encoded-sample input bus
  input  logic                   in_valid_i,
  output logic                   in_ready_o,
  input  logic [BUS_WIDTH-1:0]   in_data_i,
  // hash parameter load
  input  logic                   hp_wr_en_i,
  input  logic [SET_BITS-1:0]    hp_wr_set_i,
  input  logic [PIDX_BITS-1:0]   hp_wr_index_i,
  input  logic [HASH_BITS-1:0]   hp_wr_value_i,
  // filter table load
  input  logic                   lut_wr_en_i,
  input  logic [CLASS_BITS-1:0]  lut_wr_class_i,
  input  logic [FILT_BITS-1:0]   lut_wr_filter_i,
  input  logic [WADDR_BITS-1:0]  lut_wr_addr_i,
  input  logic [WRITE_WIDTH-1:0] lut_wr_data_i,
  // classification result
  output logic                   result_valid_o,
  output logic [CLASS_BITS-1:0]  result_class_o,
  output logic [RESP_BITS-1:0]   responses_o [NUM_CLASSES],
  output logic                   busy_o
);

  logic [INPUT_BITS-1:0]    sample;
  logic                     sample_valid, sample_release;
  logic [FILTER_INPUTS-1:0] filter_in [NUM_FILTERS];
  logic [HASH_BITS-1:0]     params [NUM_HASHES][FILTER_INPUTS];
  logic [HASH_BITS-1:0]     hashes [NUM_FILTERS];
  logic                     lookup_en, first, last;
  logic [RESP_BITS-1:0]     resp [NUM_CLASSES];
  logic [NUM_CLASSES-1:0]   resp_valid;
  logic [CLASS_BITS-1:0]    best;
  logic [RESP_BITS-1:0]     best_val;

  bthowen_deserializer #(.BUS_WIDTH(BUS_WIDTH), .SAMPLE_BITS(INPUT_BITS)) u_deser (
    .clk_i           (clk_i),
    .rst_ni          (rst_ni),
    .in_valid_i      (in_valid_i),
    .in_ready_o      (in_ready_o),
    .in_data_i       (in_data_i),
    .sample_o        (sample),
    .sample_valid_o  (sample_valid),
    .sample_release_i(sample_release)
  );

  bthowen_input_mapping #(
    .INPUT_BITS   (INPUT_BITS),
    .FILTER_INPUTS(FILTER_INPUTS),
    .MAP_STRIDE   (MAP_STRIDE)
  ) u_map (
    .sample_i   (sample),
    .filter_in_o(filter_in)
  );

  bthowen_hash_params #(
    .FILTER_INPUTS(FILTER_INPUTS),
    .NUM_HASHES   (NUM_HASHES),
    .HASH_BITS    (HASH_BITS)
  ) u_params (
    .clk_i     (clk_i),
    .rst_ni    (rst_ni),
    .wr_en_i   (hp_wr_en_i),
    .wr_set_i  (hp_wr_set_i),
    .wr_index_i(hp_wr_index_i),
    .wr_value_i(hp_wr_value_i),
    .params_o  (params)
  );

  bthowen_hash_engine #(
    .INPUT_BITS    (INPUT_BITS),
    .FILTER_INPUTS (FILTER_INPUTS),
    .FILTER_ENTRIES(FILTER_ENTRIES),
    .NUM_HASHES    (NUM_HASHES),
    .HASH_UNITS    (HASH_UNITS)
  ) u_engine (
    .clk_i           (clk_i),
    .rst_ni          (rst_ni),
    .filter_in_i     (filter_in),
    .sample_valid_i  (sample_valid),
    .sample_release_o(sample_release),
    .params_i        (params),
    .hashes_o        (hashes),
    .lookup_en_o     (lookup_en),
    .first_o         (first),
    .last_o          (last),
    .busy_o          (busy_o)
  );

  for (genvar c = 0; c < NUM_CLASSES; c++) begin : g_disc
    bthowen_discriminator #(
      .INPUT_BITS    (INPUT_BITS),
      .FILTER_INPUTS (FILTER_INPUTS),
      .FILTER_ENTRIES(FILTER_ENTRIES),
      .WRITE_WIDTH   (WRITE_WIDTH)
    ) u_disc (
      .clk_i           (clk_i),
      .rst_ni          (rst_ni),
      .wr_en_i         (lut_wr_en_i && (lut_wr_class_i == CLASS_BITS'(c))),
      .wr_filter_i     (lut_wr_filter_i),
      .wr_addr_i       (lut_wr_addr_i),
      .wr_data_i       (lut_wr_data_i),
      .lookup_en_i     (lookup_en),
      .first_i         (first),
      .last_i          (last),
      .hashes_i        (hashes),
      .filter_resp_o   (),
      .response_o      (resp[c]),
      .response_valid_o(resp_valid[c])
    );
  end

  bthowen_argmax #(
    .NUM_CLASSES(NUM_CLASSES),
    .RESP_BITS  (RESP_BITS),
    .IDX_BITS   (CLASS_BITS)
  ) u_argmax (
    .resp_i (resp),
    .index_o(best),
    .max_o  (best_val)
  );

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      result_valid_o <= 1'b0;
      result_class_o <= '0;
    end else begin
      result_valid_o <= resp_valid[0];
      if (resp_valid[0]) begin
        result_class_o <= best;
        responses_o    <= resp;
      end
    end
  end

endmodule
