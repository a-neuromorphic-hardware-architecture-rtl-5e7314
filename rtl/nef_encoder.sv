// nef_encoder: the physical encoder, which computes the stimulus of every TM neuron.
//
// The stimulus of hidden neuron n is the sum of the random weights of the pixels that are
// on: Vin = Random_weights x Img with binary Img. Because pixels are binary, a 2-input
// multiplexer per pixel (weight or zero) replaces a multiplier. The 784 pixels are handled
// a quarter per cycle over the neuron's 4-cycle slot, so only 196 multiplexers and 196
// random weights exist. The weights come from 49 20-bit LFSRs (four 5-bit weights each)
// that reload their seeds when a digit is loaded and step once per active cycle, so the
// weights of neuron n are regenerated identically for every digit. The accumulator adds
// the 784 weighted pixels in a 2-stage pipeline.
//
// The signed 15-bit sum is mapped to the neuron's stimulus code [0, MAX_STIM), which
// stands for the input range [-1, 1): stim = clamp((sum >>> STIM_SHIFT) + 128, 0, 254).
// This mapping is this design's choice; the published text gives only the code range.
//
// Interface: `load` stores `digit` and reseeds the LFSRs (seeds are held in 49 seed
// registers written through `seed_we/seed_addr/seed_wdata`). While `active`, `phase`
// and `neuron` from the global counter say which quarter of which neuron to process.
// `stim_valid` pulses, with `stim` and `stim_neuron`, two cycles after the slot's last
// quarter; `stim` and `stim_neuron` then stay stable for at least 4 cycles.
module nef_encoder
  import nef_pkg::*;
#(
  parameter int unsigned TAG_W      = 13,
  parameter int unsigned STIM_SHIFT = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // digit
  input  logic                load,
  input  logic [N_PIXELS-1:0] digit,
  // seed configuration
  input  logic                seed_we,
  input  logic [5:0]          seed_addr,
  input  seed_t               seed_wdata,
  // from the global counter
  input  logic                active,
  input  logic [1:0]          phase,
  input  logic [TAG_W-1:0]    neuron,
  // stimulus out
  output logic                stim_valid,
  output stim_t               stim,
  output logic [TAG_W-1:0]    stim_neuron
);

  // ---------------- seed registers ----------------
  seed_t seeds [N_RWGEN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < N_RWGEN; g++) seeds[g] <= default_seed(g);
    end else if (seed_we && seed_addr < 6'(N_RWGEN)) begin
      seeds[seed_addr] <= seed_wdata;
    end
  end

  // ---------------- input buffer ----------------
  logic [PIX_PER_CYCLE-1:0] pixels;

  nef_input_buffer u_ibuf (
    .clk, .rst_n, .load, .digit, .phase, .pixels
  );

  // ---------------- RW generators ----------------
  rw_t rw [PIX_PER_CYCLE];

  for (genvar g = 0; g < N_RWGEN; g++) begin : g_rw
    rw_t rw_g [RW_PER_GEN];
    nef_rw_generator u_rw (
      .clk, .rst_n, .load, .seed(seeds[g]), .step(active), .rw(rw_g)
    );
    for (genvar j = 0; j < RW_PER_GEN; j++) begin : g_w
      assign rw[g*RW_PER_GEN + j] = rw_g[j];
    end
  end

  // ---------------- 196 2-input multiplexers ----------------
  rw_t wpix [PIX_PER_CYCLE];

  always_comb
    for (int k = 0; k < PIX_PER_CYCLE; k++) wpix[k] = pixels[k] ? rw[k] : rw_t'(0);

  // ---------------- accumulator ----------------
  logic                    sum_valid;
  logic signed [SUM_W-1:0] sum;

  nef_accumulator #(.TAG_W(TAG_W)) u_acc (
    .clk, .rst_n,
    .in_valid (active),
    .in_phase (phase),
    .in_tag   (neuron),
    .wpix,
    .sum_valid,
    .sum,
    .sum_tag  (stim_neuron)
  );

  // ---------------- stimulus coding ----------------
  logic signed [SUM_W:0] scaled;

  always_comb begin
    scaled = (SUM_W+1)'(sum >>> STIM_SHIFT) + (SUM_W+1)'(128);
    if (scaled < 0)                            stim = '0;
    else if (scaled > (SUM_W+1)'(MAX_STIM-1))  stim = stim_t'(MAX_STIM - 1);
    else                                       stim = stim_t'(scaled);
  end

  assign stim_valid = sum_valid;

endmodule
