// nef_mult9: one of the physical neuron's 9-bit multipliers (a DSP block on an FPGA).
//
// Combinational signed 9 x 9 -> 18-bit product. Operands that are unsigned in the
// datapath (neuron gain, firing rate) are zero-extended by the caller.
module nef_mult9
  import nef_pkg::*;
(
  input  mop_t  a,
  input  mop_t  b,
  output prod_t p
);

  assign p = PROD_W'(a) * PROD_W'(b);

endmodule
