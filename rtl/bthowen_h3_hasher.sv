// bthowen_h3_hasher: one H3 hash unit.
//
// Computes h(x) = x[0]*p[0] ^ x[1]*p[1] ^ ... ^ x[n-1]*p[n-1], where x is the
// n-bit filter input and p[i] are n random HASH_BITS-bit parameters. Each input
// bit selects either its parameter or zero, and the selected values are
// XOR-reduced; there is no arithmetic. This structure (a 2:1 select per input
// bit feeding one XOR reduction) is the one the accelerator description draws.
//
// Purely combinational: one hash per cycle, the throughput of a hash unit in
// the original design. Registering is left to the caller (the hash engine).
module bthowen_h3_hasher #(
  parameter int unsigned FILTER_INPUTS = bthowen_pkg::DEF_FILTER_INPUTS,
  parameter int unsigned HASH_BITS     = $clog2(bthowen_pkg::DEF_FILTER_ENTRIES)
) (
  input  logic [FILTER_INPUTS-1:0] x_i,                      // filter input bits
  input  logic [HASH_BITS-1:0]     params_i [FILTER_INPUTS], // p[0..n-1]
  output logic [HASH_BITS-1:0]     hash_o
);

  always_comb begin
    hash_o = '0;
    for (int unsigned i = 0; i < FILTER_INPUTS; i++) begin
      hash_o ^= x_i[i] ? params_i[i] : '0;
    end
  end

endmodule
