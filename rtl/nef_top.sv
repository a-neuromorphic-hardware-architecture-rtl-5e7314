// nef_top: NEF handwritten-digit recogniser, time-multiplexed system plus output layer.
//
// A binary 28 x 28 digit enters through a valid/ready handshake. The time-multiplexed
// system encodes it onto N_CORES x 64 hidden rate neurons (8192 by default) and weights
// each neuron's firing rate by its ten decoding weights; the output layer sums these
// over all hidden neurons and reports the digit whose output neuron is largest.
//
// Timing: a digit accepted at a clock edge gives `result_valid` N_CORES*64*4 + 9 cycles
// later (32777 cycles by default, about 123 us at 266 MHz). Digits may follow each other
// with no gap: `digit_ready` returns high in the last cycle of the current pass, so the
// throughput is one digit per N_CORES*64*4 cycles (32768, about 8k digits/s at 266 MHz).
//
// Configuration ports stand in for the host link: 49 LFSR seeds (`seed_*`) and one
// 60-bit word of ten signed 6-bit decoding weights per hidden neuron (`w_*`), both found
// off-chip by the training procedure. Write them while no digit is in flight.
module nef_top
  import nef_pkg::*;
#(
  parameter int unsigned N_CORES    = N_CORES_DEF,
  parameter int unsigned STIM_SHIFT = 1,
  localparam int unsigned NW        = $clog2(N_CORES * CORE_SIZE)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                digit_valid,
  output logic                digit_ready,
  input  logic [N_PIXELS-1:0] digit,
  input  logic                seed_we,
  input  logic [5:0]          seed_addr,
  input  logic [LFSR_W-1:0]   seed_wdata,
  input  logic                w_we,
  input  logic [NW-1:0]       w_addr,
  input  logic [DWV_W-1:0]    w_wdata,
  output logic                result_valid,
  output logic [N_OUT-1:0]    result,
  output logic [3:0]          result_idx,
  output logic signed [ACC_W-1:0] y [N_OUT]
);

  logic          stim_valid, mlt_valid;
  stim_t         stim;
  logic [NW-1:0] stim_neuron, mlt_neuron;
  prod_t         mlt_rlt [N_OUT];

  nef_tm_system #(.N_CORES(N_CORES), .STIM_SHIFT(STIM_SHIFT)) u_tm (
    .clk, .rst_n,
    .digit_valid, .digit_ready, .digit,
    .seed_we, .seed_addr, .seed_wdata,
    .w_we, .w_addr, .w_wdata,
    .stim_valid, .stim, .stim_neuron,
    .mlt_valid, .mlt_rlt, .mlt_neuron
  );

  nef_output_layer #(.N_NEURONS(N_CORES * CORE_SIZE)) u_out (
    .clk, .rst_n,
    .mlt_valid, .mlt_rlt,
    .result_valid, .result, .result_idx, .y
  );

endmodule
