// nef_parallel_adder: an N-input signed adder, one of the "parallel adders" of the
// encoder's accumulator (fourteen 14 x 5-bit adders and one 14 x 9-bit adder).
//
// Purely combinational: `sum` is the sign-extended sum of all `in` operands. The output
// width OUT_W must hold N * 2^(IN_W-1) in magnitude; the caller picks it.
module nef_parallel_adder #(
  parameter int unsigned N     = 14,
  parameter int unsigned IN_W  = 5,
  parameter int unsigned OUT_W = 9
) (
  input  logic signed [IN_W-1:0]  in [N],
  output logic signed [OUT_W-1:0] sum
);

  always_comb begin
    sum = '0;
    for (int i = 0; i < N; i++) sum = sum + OUT_W'(in[i]);
  end

endmodule
