// bthowen_popcount: number of ones in a WIDTH-bit vector.
//
// Gives a discriminator its response: the count of its Bloom filters that
// reported "seen". Combinational; a synthesis tool builds the adder tree.
// The default width is the 84 filters of the MNIST-Medium model.
module bthowen_popcount #(
  parameter int unsigned WIDTH    = 84,
  parameter int unsigned OUT_BITS = $clog2(WIDTH + 1)
) (
  input  logic [WIDTH-1:0]    bits_i,
  output logic [OUT_BITS-1:0] count_o
);

  always_comb begin
    count_o = '0;
    for (int unsigned i = 0; i < WIDTH; i++) begin
      count_o += OUT_BITS'(bits_i[i]);
    end
  end

endmodule
