// bthowen_argmax: index of the largest of NUM_CLASSES discriminator responses.
//
// A linear compare chain: a response replaces the running maximum only when
// it is strictly larger, so on a tie the lowest class index wins (the tie rule
// is this design's choice). Combinational; the top registers the result.
module bthowen_argmax #(
  parameter int unsigned NUM_CLASSES = bthowen_pkg::DEF_NUM_CLASSES,
  parameter int unsigned RESP_BITS   = 7,
  parameter int unsigned IDX_BITS    = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1
) (
  input  logic [RESP_BITS-1:0] resp_i [NUM_CLASSES],
  output logic [IDX_BITS-1:0]  index_o,
  output logic [RESP_BITS-1:0] max_o
);

  always_comb begin
    index_o = '0;
    max_o   = resp_i[0];
    for (int unsigned c = 1; c < NUM_CLASSES; c++) begin
      if (resp_i[c] > max_o) begin
        max_o   = resp_i[c];
        index_o = IDX_BITS'(c);
      end
    end
  end

endmodule
