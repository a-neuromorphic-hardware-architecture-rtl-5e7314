// nef_global_counter: the global counter that walks the time-multiplexed (TM) neurons.
//
// Every hidden neuron owns one time slot of SLOT_CYCLES (4) clock cycles. Once started,
// the counter steps a 2-bit phase through 0..3 inside each slot and advances the neuron
// number after phase 3, over N_NEURONS slots, so one digit takes N_NEURONS * 4 cycles.
// The encoder uses the phase to pick which quarter of the digit it weights, and the
// neuron number travels with the data down the pipeline.
//
// Interface: `start` (accepted while `ready`) begins a pass in the next cycle. While
// `active`, `phase` and `neuron` name the slot being fed; `last` marks the final cycle of
// the pass. `ready` is high when idle and also in the last cycle, so a new digit can start
// with no bubble: the pass of the next digit follows the previous one directly.
//
// The sequencing follows the published time-slot scheme; the start/ready handshake and
// the back-to-back restart are this design's choices.
module nef_global_counter #(
  parameter int unsigned N_NEURONS = nef_pkg::N_CORES_DEF * nef_pkg::CORE_SIZE,
  localparam int unsigned NW = $clog2(N_NEURONS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          ready,
  output logic          active,
  output logic [1:0]    phase,
  output logic [NW-1:0] neuron,
  output logic          last     // last cycle of a pass
);

  assign last  = active && (phase == 2'd3) && (neuron == NW'(N_NEURONS - 1));
  assign ready = !active || last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      phase  <= '0;
      neuron <= '0;
    end else if (start && ready) begin
      active <= 1'b1;
      phase  <= '0;
      neuron <= '0;
    end else if (active) begin
      phase <= phase + 2'd1;
      if (phase == 2'd3) begin
        if (last) active <= 1'b0;
        else      neuron <= neuron + NW'(1);
      end
    end
  end

endmodule
