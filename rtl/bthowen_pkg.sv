// bthowen_pkg: constants and helper functions shared by the BTHOWeN
// inference accelerator.
//
// The defaults describe the MNIST "Medium" model: 784 pixels encoded with a
// 3-bit Gaussian thermometer code (2352 input bits), Bloom filters with 28
// inputs, 2048 one-bit entries and 2 H3 hash functions, 10 classes, a 64-bit
// input bus and 5 shared hash units. These numbers follow the published model
// table; every module takes them as parameters, so another trained model is a
// different parameter set.
//
// perm_index() is the fixed pseudo-random input mapping. The mapping a trained
// model uses is produced by its training software; this design uses an affine
// permutation (i * stride mod n, stride coprime to n) so that it is a true
// bijection for any size without a stored table. A host that holds a model
// trained with another mapping applies the inverse mapping before sending.
package bthowen_pkg;

  localparam int unsigned DEF_NUM_CLASSES    = 10;
  localparam int unsigned DEF_INPUT_BITS     = 2352;
  localparam int unsigned DEF_FILTER_INPUTS  = 28;
  localparam int unsigned DEF_FILTER_ENTRIES = 2048;
  localparam int unsigned DEF_NUM_HASHES     = 2;
  localparam int unsigned DEF_HASH_UNITS     = 5;
  localparam int unsigned DEF_BUS_WIDTH      = 64;
  localparam int unsigned DEF_WRITE_WIDTH    = 64;
  localparam int unsigned DEF_MAP_STRIDE     = 1009;

  // Number of Bloom filters per discriminator: input bits split into
  // FILTER_INPUTS-bit slices, the last one zero padded.
  function automatic int unsigned num_filters(int unsigned input_bits, int unsigned filter_inputs);
    return (input_bits + filter_inputs - 1) / filter_inputs;
  endfunction

  // Source bit of mapped bit i.
  function automatic int unsigned perm_index(int unsigned i, int unsigned n, int unsigned stride);
    longint unsigned p;
    p = (longint'(i) * longint'(stride)) % longint'(n);
    return int'(p);
  endfunction

  // Width of an index into n items (at least one bit).
  function automatic int unsigned idx_bits(int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  // Greatest common divisor, used to check that a stride gives a permutation.
  function automatic int unsigned gcd(int unsigned a, int unsigned b);
    int unsigned x, y, t;
    x = a;
    y = b;
    while (y != 0) begin
      t = x % y;
      x = y;
      y = t;
    end
    return x;
  endfunction

endpackage
