// nef_rw_generator: one random-weight (RW) generator of the encoder, a 20-bit LFSR.
//
// The 20-bit state is cut into four 5-bit two's-complement random weights, weight j being
// bits 5j+4..5j. The generator reloads its own seed when a new digit arrives and then
// advances one step per clock cycle while the encoder is running, so every digit sees the
// exact same sequence of weights for a given seed, and no weight memory is needed.
//
// Interface: `load` (priority) copies `seed` into the state; otherwise `step` advances it.
// `rw` is the current state split into weights, valid in the same cycle.
//
// Published: a 20-bit LFSR giving four 5-bit signed weights, reseeded per digit. This
// design's choice: the Fibonacci polynomial x^20 + x^17 + 1 (maximal length, period
// 2^20 - 1) and the bit-field order of the four weights. A zero seed would lock the LFSR,
// so seeds must be non-zero (checked by an assertion).
module nef_rw_generator
  import nef_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load,
  input  seed_t seed,
  input  logic  step,
  output rw_t   rw [RW_PER_GEN]
);

  seed_t state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    state <= seed_t'(1);
    else if (load) state <= seed;
    else if (step) state <= {state[LFSR_W-2:0], state[19] ^ state[16]};
  end

  always_comb
    for (int j = 0; j < RW_PER_GEN; j++) rw[j] = rw_t'(state[j*RW_W +: RW_W]);

  a_seed_nonzero: assert property (@(posedge clk) disable iff (!rst_n) load |-> seed != '0);

endmodule
