// bthowen_hash_engine: shared hash units, central hash register and the
// sequencing of one inference.
//
// Filters at the same index in different discriminators see the same input
// and so the same hashes; the hashes are computed once here and broadcast to
// every discriminator. HASH_UNITS H3 hash units are time-multiplexed over the
// NUM_FILTERS filters: in group cycle g, unit u hashes filter g*HASH_UNITS+u
// with the current parameter set j. Results are collected in a central
// partial register; when the last group of set j is done, the complete set of
// NUM_FILTERS hashes is copied into the broadcast register and presented to
// all lookup units at once, with first_o (j = 0) and last_o (j = k-1). Then
// the next set is hashed while the lookup units read the previous one.
//
// Timing, with G = ceil(NUM_FILTERS / HASH_UNITS): hashing starts in the
// first cycle sample_valid_i is high while the engine is idle (group 0 of set
// 0 is hashed in that cycle S); broadcast j is valid (lookup_en_o) in cycle
// S + G*(j+1); sample_release_o pulses in the last group cycle, S + k*G - 1,
// when the sample is no longer needed, and a next sample already waiting in
// the deserializer is hashed from the following cycle on. A sample thus
// occupies k*G cycles; with one hash unit per filter that is k cycles, the
// 1/k rate of the original lookup units. For the default model (84 filters,
// 5 units, k = 2) it is 34 cycles, under the 37 cycles the 64-bit bus needs
// to deliver a sample. busy_o is high in every cycle the engine hashes.
//
// The time-multiplexing with a central partial register and a lockstep
// broadcast follows the original accelerator; the group order and the
// timing details are this design's choices.
module bthowen_hash_engine #(
  parameter int unsigned INPUT_BITS     = bthowen_pkg::DEF_INPUT_BITS,
  parameter int unsigned FILTER_INPUTS  = bthowen_pkg::DEF_FILTER_INPUTS,
  parameter int unsigned FILTER_ENTRIES = bthowen_pkg::DEF_FILTER_ENTRIES,
  parameter int unsigned NUM_HASHES     = bthowen_pkg::DEF_NUM_HASHES,
  parameter int unsigned HASH_UNITS     = bthowen_pkg::DEF_HASH_UNITS,
  parameter int unsigned NUM_FILTERS    = bthowen_pkg::num_filters(INPUT_BITS, FILTER_INPUTS),
  parameter int unsigned HASH_BITS      = $clog2(FILTER_ENTRIES),
  parameter int unsigned GROUPS         = (NUM_FILTERS + HASH_UNITS - 1) / HASH_UNITS
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // sample, already split into filter inputs
  input  logic [FILTER_INPUTS-1:0] filter_in_i [NUM_FILTERS],
  input  logic                     sample_valid_i,
  output logic                     sample_release_o,
  // shared hash parameters
  input  logic [HASH_BITS-1:0]     params_i [NUM_HASHES][FILTER_INPUTS],
  // broadcast to all lookup units
  output logic [HASH_BITS-1:0]     hashes_o [NUM_FILTERS],
  output logic                     lookup_en_o,
  output logic                     first_o,
  output logic                     last_o,
  output logic                     busy_o
);

  localparam int unsigned GBITS = bthowen_pkg::idx_bits(GROUPS);
  localparam int unsigned SBITS = bthowen_pkg::idx_bits(NUM_HASHES);

  logic                 running_q;
  logic [GBITS-1:0]     group_q;
  logic [SBITS-1:0]     set_q;
  logic [HASH_BITS-1:0] partial_q [NUM_FILTERS];
  logic [HASH_BITS-1:0] partial_d [NUM_FILTERS];
  logic [HASH_BITS-1:0] cur_params [FILTER_INPUTS];
  logic [FILTER_INPUTS-1:0] unit_x    [HASH_UNITS];
  logic [HASH_BITS-1:0]     unit_hash [HASH_UNITS];
  logic last_group, last_set, active;

  assign last_group = (group_q == GBITS'(GROUPS - 1));
  assign last_set   = (set_q == SBITS'(NUM_HASHES - 1));
  // Hashing in this cycle: a sample is in progress, or one is waiting while
  // idle (group_q and set_q are zero then).
  assign active     = running_q || sample_valid_i;

  always_comb begin
    for (int unsigned i = 0; i < FILTER_INPUTS; i++) cur_params[i] = params_i[set_q][i];
  end

  for (genvar u = 0; u < HASH_UNITS; u++) begin : g_unit
    always_comb begin
      int unsigned f;
      f = int'(group_q) * HASH_UNITS + u;
      unit_x[u] = (f < NUM_FILTERS) ? filter_in_i[f] : '0;
    end

    bthowen_h3_hasher #(.FILTER_INPUTS(FILTER_INPUTS), .HASH_BITS(HASH_BITS)) u_hasher (
      .x_i     (unit_x[u]),
      .params_i(cur_params),
      .hash_o  (unit_hash[u])
    );
  end

  always_comb begin
    partial_d = partial_q;
    for (int unsigned u = 0; u < HASH_UNITS; u++) begin
      int unsigned f;
      f = int'(group_q) * HASH_UNITS + u;
      if (f < NUM_FILTERS) partial_d[f] = unit_hash[u];
    end
  end

  always_ff @(posedge clk_i) begin
    if (active) partial_q <= partial_d;
    if (active && last_group) hashes_o <= partial_d;
  end

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      running_q   <= 1'b0;
      group_q     <= '0;
      set_q       <= '0;
      lookup_en_o <= 1'b0;
      first_o     <= 1'b0;
      last_o      <= 1'b0;
    end else begin
      lookup_en_o <= active && last_group;
      first_o     <= active && last_group && (set_q == '0);
      last_o      <= active && last_group && last_set;
      if (active) begin
        if (last_group) begin
          group_q <= '0;
          if (last_set) begin
            set_q     <= '0;
            running_q <= 1'b0;
          end else begin
            set_q     <= set_q + 1'b1;
            running_q <= 1'b1;
          end
        end else begin
          group_q   <= group_q + 1'b1;
          running_q <= 1'b1;
        end
      end
    end
  end

  assign sample_release_o = active && last_group && last_set;
  assign busy_o           = active;

endmodule
