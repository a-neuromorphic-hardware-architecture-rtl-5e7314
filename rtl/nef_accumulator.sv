// nef_accumulator: sums the 784 weighted pixels of one TM neuron over its 4-cycle slot.
//
// Each cycle it receives 196 weighted pixels (5-bit signed, zero where the pixel is off).
// Stage 1: fourteen 14-input 5-bit parallel adders reduce them to fourteen 9-bit partial
// sums, registered. Stage 2: one 14-input 9-bit parallel adder reduces those to the
// 196-pixel sum, which is added to a running register cleared on the slot's first cycle.
// After the slot's last (fourth) quarter the 784-pixel total is registered at `sum`
// together with the neuron number, with `sum_valid` high for one cycle.
//
// Timing: a quarter presented in cycle c is in stage 1 at the end of c and in the running
// sum at the end of c+1; the total of a slot whose last quarter is presented in cycle c
// appears in cycle c+2 (two cycles of latency), and a new total every 4 cycles.
//
// Published: the 2-stage pipeline, the fourteen 14 x 5-bit adders and the 14 x 9-bit
// adder. This design's choice: the 4-cycle running sum sits in stage 2 behind that adder.
module nef_accumulator
  import nef_pkg::*;
#(
  parameter int unsigned TAG_W = 13
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [1:0]              in_phase,
  input  logic [TAG_W-1:0]        in_tag,
  input  rw_t                     wpix [PIX_PER_CYCLE],
  output logic                    sum_valid,
  output logic signed [SUM_W-1:0] sum,
  output logic [TAG_W-1:0]        sum_tag
);

  // ---------------- stage 1 ----------------
  logic signed [PSUM1_W-1:0] psum1_d [N_ADD1];
  logic signed [PSUM1_W-1:0] psum1_q [N_ADD1];
  logic                      s1_valid;
  logic [1:0]                s1_phase;
  logic [TAG_W-1:0]          s1_tag;

  for (genvar a = 0; a < N_ADD1; a++) begin : g_add1
    nef_parallel_adder #(.N(ADD_IN), .IN_W(RW_W), .OUT_W(PSUM1_W)) u_add (
      .in  (wpix[a*ADD_IN +: ADD_IN]),
      .sum (psum1_d[a])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_phase <= '0;
      s1_tag   <= '0;
      for (int a = 0; a < N_ADD1; a++) psum1_q[a] <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_phase <= in_phase;
      s1_tag   <= in_tag;
      psum1_q  <= psum1_d;
    end
  end

  // ---------------- stage 2 ----------------
  logic signed [PSUM2_W-1:0] psum2;
  logic signed [SUM_W-1:0]   run_q, run_d;

  nef_parallel_adder #(.N(N_ADD1), .IN_W(PSUM1_W), .OUT_W(PSUM2_W)) u_add2 (
    .in  (psum1_q),
    .sum (psum2)
  );

  assign run_d = (s1_phase == 2'd0 ? SUM_W'(0) : run_q) + SUM_W'(psum2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q     <= '0;
      sum       <= '0;
      sum_tag   <= '0;
      sum_valid <= 1'b0;
    end else begin
      sum_valid <= s1_valid && (s1_phase == 2'd3);
      if (s1_valid) run_q <= run_d;
      if (s1_valid && s1_phase == 2'd3) begin
        sum     <= run_d;
        sum_tag <= s1_tag;
      end
    end
  end

endmodule
