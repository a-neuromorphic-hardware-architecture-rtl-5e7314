// nef_pkg: sizes, types and small helpers shared by the NEF digit-recognition datapath.
//
// The network is a three-layer NEF (Neural Engineering Framework) classifier: 784 binary
// pixels are projected through LFSR-generated random weights onto 8192 non-spiking rate
// neurons (128 cores of 64), whose firing rates are weighted by ten 6-bit decoding weights
// each and summed by ten linear output neurons. One physical encoder and one physical
// neuron serve all hidden neurons, one neuron per four-clock time slot.
//
// The pixel count, the 4-cycle slot, the 49 x 20-bit LFSRs giving 196 5-bit weights per
// cycle, the 14 x 14 adder tree, Max_Stim = 255, 64 neurons per core, 128 cores, ten
// outputs, 6-bit decoding weights, the 7-bit firing rate and the 9 x 9 -> 18-bit multipliers
// are the published numbers. The widths of the intermediate sums follow from them; the
// output accumulator width (ACC_W) and the stimulus scaling shift are this design's choice.
package nef_pkg;

  // ---------------- input layer / encoder ----------------
  localparam int unsigned N_PIXELS      = 784;  // 28 x 28 binary pixels
  localparam int unsigned SLOT_CYCLES   = 4;    // clock cycles per TM neuron time slot
  localparam int unsigned PIX_PER_CYCLE = N_PIXELS / SLOT_CYCLES;  // 196
  localparam int unsigned LFSR_W        = 20;   // width of one RW generator
  localparam int unsigned RW_W          = 5;    // signed random weight width
  localparam int unsigned RW_PER_GEN    = LFSR_W / RW_W;  // 4 weights per LFSR
  localparam int unsigned N_RWGEN       = PIX_PER_CYCLE / RW_PER_GEN;  // 49 generators
  localparam int unsigned ADD_IN        = 14;   // inputs of one parallel adder
  localparam int unsigned N_ADD1        = PIX_PER_CYCLE / ADD_IN;  // 14 first-stage adders
  localparam int unsigned PSUM1_W       = 9;    // 14 x 5-bit signed -> 9-bit signed
  localparam int unsigned PSUM2_W       = 13;   // 196 x 5-bit signed -> 13-bit signed
  localparam int unsigned SUM_W         = 15;   // 784 x 5-bit signed -> 15-bit signed

  // ---------------- rate neuron ----------------
  localparam int unsigned MAX_STIM      = 255;  // stimulus coded in [0, MAX_STIM)
  localparam int unsigned STIM_W        = 8;
  localparam int unsigned CORE_SIZE     = 64;   // N_A: neurons per neural core
  localparam int unsigned IDX_W         = $clog2(CORE_SIZE);  // 6
  localparam int unsigned FRATE_W       = 7;    // firing rate width
  localparam int unsigned MUL_W         = 9;    // multiplier operand width
  localparam int unsigned PROD_W        = 2 * MUL_W;  // 18-bit product

  // ---------------- hidden / output layer ----------------
  localparam int unsigned N_CORES_DEF   = 128;  // 128 cores x 64 = 8192 hidden neurons
  localparam int unsigned N_OUT         = 10;   // digits 0..9
  localparam int unsigned DW_W          = 6;    // decoding weight width (signed)
  localparam int unsigned DWV_W         = N_OUT * DW_W;  // 60-bit weight word per neuron
  localparam int unsigned ACC_W         = 28;   // output neuron accumulator

  typedef logic signed [RW_W-1:0]    rw_t;
  typedef logic signed [DW_W-1:0]    dw_t;
  typedef logic signed [MUL_W-1:0]   mop_t;
  typedef logic signed [PROD_W-1:0]  prod_t;
  typedef logic signed [ACC_W-1:0]   acc_t;
  typedef logic        [STIM_W-1:0]  stim_t;
  typedef logic        [LFSR_W-1:0]  seed_t;

  // Default LFSR seeds after reset: non-zero, distinct per generator.
  function automatic seed_t default_seed(input int unsigned g);
    return seed_t'((g + 1) * 20'h1_9A3D) ^ 20'h5_5AA5 | seed_t'(1);
  endfunction

endpackage
