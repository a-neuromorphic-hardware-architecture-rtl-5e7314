// nef_tm_system: the time-multiplexed encoder and hidden layer.
//
// The hidden layer has N_CORES neural cores of 64 neurons (128 x 64 = 8192 by default).
// All cores hold the same 64 tuning curves, yet their neurons respond differently because
// each receives a different random projection of the digit. None of the neurons exists
// physically: one physical encoder, one physical neuron, a global counter and a decoding
// weight buffer process them one after another, one neuron per 4-cycle time slot.
//
// Pipeline for hidden neuron n (cycle numbers counted from the first cycle of the pass):
//   4n .. 4n+3   the encoder weights the four pixel quarters (global counter phase 0..3)
//   4n+5         stimulus ready; weight buffer read issued; neuron slot cycle 0
//   4n+6 .. 4n+9 decoding weights available; the ten products are formed
//   4n+10        the ten products of neuron n leave on `mlt_rlt` with `mlt_valid`
// A new neuron enters every 4 cycles, so a digit takes N_CORES * 64 * 4 cycles of
// throughput and the next digit may start right after the last slot of the previous one.
//
// Interface: `digit_valid`/`digit_ready` handshake for a binary 784-pixel digit (taken
// when both are high). Seeds and decoding weights are written through their ports
// before use. The stimulus of each neuron is also brought out for observation.
module nef_tm_system
  import nef_pkg::*;
#(
  parameter int unsigned N_CORES    = N_CORES_DEF,
  parameter int unsigned STIM_SHIFT = 1,
  localparam int unsigned N_NEURONS = N_CORES * CORE_SIZE,
  localparam int unsigned NW        = $clog2(N_NEURONS)
) (
  input  logic                clk,
  input  logic                rst_n,
  // digit input
  input  logic                digit_valid,
  output logic                digit_ready,
  input  logic [N_PIXELS-1:0] digit,
  // configuration
  input  logic                seed_we,
  input  logic [5:0]          seed_addr,
  input  seed_t               seed_wdata,
  input  logic                w_we,
  input  logic [NW-1:0]       w_addr,
  input  logic [DWV_W-1:0]    w_wdata,
  // observation of the stimulus
  output logic                stim_valid,
  output stim_t               stim,
  output logic [NW-1:0]       stim_neuron,
  // weighted firing rates (Mlt_rlt) of one hidden neuron
  output logic                mlt_valid,
  output prod_t               mlt_rlt [N_OUT],
  output logic [NW-1:0]       mlt_neuron
);

  logic          load;
  logic          active;
  logic [1:0]    phase;
  logic [NW-1:0] neuron;
  dw_t           dw [N_OUT];

  assign load = digit_valid && digit_ready;

  nef_global_counter #(.N_NEURONS(N_NEURONS)) u_cnt (
    .clk, .rst_n,
    .start  (digit_valid),
    .ready  (digit_ready),
    .active, .phase, .neuron,
    .last   ()
  );

  nef_encoder #(.TAG_W(NW), .STIM_SHIFT(STIM_SHIFT)) u_enc (
    .clk, .rst_n,
    .load, .digit,
    .seed_we, .seed_addr, .seed_wdata,
    .active, .phase, .neuron,
    .stim_valid, .stim, .stim_neuron
  );

  nef_weight_buffer #(.DEPTH(N_NEURONS)) u_wbuf (
    .clk, .rst_n,
    .we    (w_we),
    .waddr (w_addr),
    .wdata (w_wdata),
    .re    (stim_valid),
    .raddr (stim_neuron),
    .dw
  );

  nef_neuron #(.TAG_W(NW)) u_neuron (
    .clk, .rst_n,
    .slot_start (stim_valid),
    .stim,
    .neuron     (stim_neuron),
    .dw,
    .mlt_valid, .mlt_rlt, .mlt_neuron
  );

endmodule
