// bthowen_hash_params: central register file of the H3 hash parameters.
//
// H3 hash function j is defined by FILTER_INPUTS random HASH_BITS-bit values
// P_j = {p_0 .. p_{n-1}}. The same k sets are shared by every Bloom filter of
// every discriminator (sharing was found not to cost accuracy), so they are
// stored once here and read by all hash units.
//
// Loaded one value per cycle: wr_en_i writes value wr_index_i of set
// wr_set_i; the stored value is visible on params_o the next cycle. Reset
// clears all values. The load port is this design's choice.
module bthowen_hash_params #(
  parameter int unsigned FILTER_INPUTS = bthowen_pkg::DEF_FILTER_INPUTS,
  parameter int unsigned NUM_HASHES    = bthowen_pkg::DEF_NUM_HASHES,
  parameter int unsigned HASH_BITS     = $clog2(bthowen_pkg::DEF_FILTER_ENTRIES),
  parameter int unsigned SET_BITS      = bthowen_pkg::idx_bits(NUM_HASHES),
  parameter int unsigned IDX_BITS      = bthowen_pkg::idx_bits(FILTER_INPUTS)
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 wr_en_i,
  input  logic [SET_BITS-1:0]  wr_set_i,
  input  logic [IDX_BITS-1:0]  wr_index_i,
  input  logic [HASH_BITS-1:0] wr_value_i,
  output logic [HASH_BITS-1:0] params_o [NUM_HASHES][FILTER_INPUTS]
);

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      for (int unsigned j = 0; j < NUM_HASHES; j++)
        for (int unsigned i = 0; i < FILTER_INPUTS; i++)
          params_o[j][i] <= '0;
    end else if (wr_en_i && (int'(wr_set_i) < NUM_HASHES) && (int'(wr_index_i) < FILTER_INPUTS)) begin
      params_o[wr_set_i][wr_index_i] <= wr_value_i;
    end
  end

endmodule
