// nef_output_layer: the ten linear output neurons and the winner selection.
//
// Each output neuron is one register and one adder: it accumulates, for every hidden
// neuron in turn, that neuron's firing rate times its decoding weight for this digit
// (Y = W x H computed one hidden neuron per time slot). When the products of all
// N_NEURONS hidden neurons have been added, the index of the output neuron with the
// largest sum is sent out as the recognised digit and the ten sums are cleared for the
// next digit.
//
// Interface: `mlt_valid` with `mlt_rlt[0..9]` delivers one hidden neuron's ten products
// (at most one set per cycle). The set that completes N_NEURONS products is followed two
// cycles later by `result_valid` for one cycle, with `result` (one-hot, bit d for digit d,
// the Result[9:0] bus), `result_idx` (binary digit) and `y` (the ten final sums), which
// hold until the next result. Ties go to the lowest digit.
//
// Published: one register and adder per output neuron, argmax, clearing after each digit.
// This design's choices: counting the products to find the end of a digit, the 28-bit
// accumulators, the one-cycle winner search after the last sum and the tie rule.
module nef_output_layer
  import nef_pkg::*;
#(
  parameter int unsigned N_NEURONS = N_CORES_DEF * CORE_SIZE,
  localparam int unsigned CW = $clog2(N_NEURONS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             mlt_valid,
  input  prod_t            mlt_rlt [N_OUT],
  output logic             result_valid,
  output logic [N_OUT-1:0] result,
  output logic [3:0]       result_idx,
  output acc_t             y [N_OUT]
);

  acc_t          acc [N_OUT];
  logic [CW-1:0] count;
  logic          resolve;

  // winner search over the completed sums
  logic [3:0] best_idx;
  acc_t       best_val;

  always_comb begin
    best_idx = '0;
    best_val = acc[0];
    for (int j = 1; j < N_OUT; j++) begin
      if (acc[j] > best_val) begin
        best_val = acc[j];
        best_idx = 4'(j);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count        <= '0;
      resolve      <= 1'b0;
      result_valid <= 1'b0;
      result       <= '0;
      result_idx   <= '0;
      for (int j = 0; j < N_OUT; j++) begin
        acc[j] <= '0;
        y[j]   <= '0;
      end
    end else begin
      result_valid <= 1'b0;
      resolve      <= 1'b0;
      if (resolve) begin
        result_valid <= 1'b1;
        result_idx   <= best_idx;
        result       <= N_OUT'(1) << best_idx;
        y            <= acc;
      end
      if (mlt_valid) begin
        for (int j = 0; j < N_OUT; j++)
          acc[j] <= (resolve ? acc_t'(0) : acc[j]) + ACC_W'(mlt_rlt[j]);
        if (count == CW'(N_NEURONS - 1)) begin
          count   <= '0;
          resolve <= 1'b1;
        end else begin
          count <= count + CW'(1);
        end
      end else if (resolve) begin
        for (int j = 0; j < N_OUT; j++) acc[j] <= '0;
      end
    end
  end

  a_no_double_resolve: assert property (@(posedge clk) disable iff (!rst_n)
    resolve |-> !$past(resolve));

endmodule
