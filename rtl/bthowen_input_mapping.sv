// bthowen_input_mapping: fixed pseudo-random assignment of input bits to
// Bloom filters.
//
// Mapped bit i is encoded input bit (i * MAP_STRIDE) mod INPUT_BITS; filter f
// receives mapped bits [f*FILTER_INPUTS +: FILTER_INPUTS], and positions past
// INPUT_BITS (padding of the last filter) read zero. One mapping is shared by
// all discriminators, so it is applied once, before hashing. It is wiring
// only: no logic and no delay.
//
// Assigning inputs to filters pseudo-randomly is part of the model; the
// affine form of the permutation is this design's choice (a trained model
// with another mapping is used by permuting its inputs on the host side).
module bthowen_input_mapping #(
  parameter int unsigned INPUT_BITS    = bthowen_pkg::DEF_INPUT_BITS,
  parameter int unsigned FILTER_INPUTS = bthowen_pkg::DEF_FILTER_INPUTS,
  parameter int unsigned MAP_STRIDE    = bthowen_pkg::DEF_MAP_STRIDE,
  parameter int unsigned NUM_FILTERS   = bthowen_pkg::num_filters(INPUT_BITS, FILTER_INPUTS)
) (
  input  logic [INPUT_BITS-1:0]    sample_i,
  output logic [FILTER_INPUTS-1:0] filter_in_o [NUM_FILTERS]
);

  if (bthowen_pkg::gcd(MAP_STRIDE % INPUT_BITS, INPUT_BITS) != 1) begin : g_bad_stride
    $error("bthowen_input_mapping: MAP_STRIDE must be coprime to INPUT_BITS");
  end

  for (genvar f = 0; f < NUM_FILTERS; f++) begin : g_filter
    for (genvar b = 0; b < FILTER_INPUTS; b++) begin : g_bit
      localparam int unsigned Pos = f * FILTER_INPUTS + b;
      if (Pos < INPUT_BITS) begin : g_used
        assign filter_in_o[f][b] = sample_i[bthowen_pkg::perm_index(Pos, INPUT_BITS, MAP_STRIDE)];
      end else begin : g_pad
        assign filter_in_o[f][b] = 1'b0;
      end
    end
  end

endmodule
