// nef_input_buffer: the encoder's input buffer of 784 one-bit registers.
//
// A binary digit (pixel > 0 already mapped to 1) is stored when `load` is high and stays
// unchanged while all TM neurons are processed. Each time slot reads it a quarter at a
// time: in phase p the 196 pixels p*196 .. p*196+195 drive the encoder's multiplexers,
// lowest pixels in the first cycle and highest in the fourth, as published.
//
// Interface: `digit` is captured on the clock edge where `load` is high; `pixels` is a
// combinational slice selected by `phase`. The pixel order inside the 784-bit vector
// (row-major 28 x 28, pixel 0 in bit 0) is this design's convention.
module nef_input_buffer
  import nef_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  logic [N_PIXELS-1:0]      digit,
  input  logic [1:0]               phase,
  output logic [PIX_PER_CYCLE-1:0] pixels
);

  logic [N_PIXELS-1:0] buf_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    buf_q <= '0;
    else if (load) buf_q <= digit;
  end

  assign pixels = buf_q[phase * PIX_PER_CYCLE +: PIX_PER_CYCLE];

endmodule
