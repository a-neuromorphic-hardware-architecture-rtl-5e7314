// nef_neuron: the physical non-spiking rate neuron, shared by all TM hidden neurons.
//
// Firing rate ("broken-stick" tuning curve). With i = N_index, the neuron's position in
// its 64-neuron core, and Stim the stimulus code in [0, 255):
//   lower half, i < 32 :  T = 255 - (Stim + 4i),          F = max(i * T / 32, 0)
//   upper half, i >= 32:  T = Stim + 4i - 4*63,          F = max((63 - i) * T / 32, 0)
// i.e. F_rate = max(2 * gain * T / N_A, 0) with N_A = 64. The lower half is the published
// formula. For the upper half the published formula (T = Stim + 4i, gain i) would give
// rates far beyond the published 7-bit F_rate; this design uses the mirror image of the
// lower half instead, which keeps F_rate within 0..126 and gives rising tuning curves.
// The division by 32 is an arithmetic shift, exact for the non-negative results kept.
//
// Datapath: three 9-bit multipliers serve eleven multiplications per 4-cycle slot, as
// published. Multiplier 0 computes gain x T in slot cycle 0; F_rate is latched at its
// A input at the end of cycle 0 (the "latch" cycle 1 leaves multiplier 0 idle) and it
// multiplies F_rate by decoding weights 0 and 1 in cycles 2 and 3. Multipliers 1 and 2
// multiply F_rate by weights 2..5 and 6..9. Since F_rate only exists from cycle 1, they
// run one cycle later than multiplier 0, in cycles 1, 2, 3 and cycle 0 of the next slot;
// this offset is this design's reading of the schedule. Every product is stored in its
// own Mlt_rlt register.
//
// Interface: `slot_start` marks cycle 0 of a neuron's slot; `stim` and `neuron` must be
// valid in that cycle. `dw` (ten signed 6-bit decoding weights) must be valid from cycle 1
// of the slot through cycle 0 of the next one. Slots start at most every 4 cycles. The
// ten products of a neuron appear together, with `mlt_valid` high for one cycle, in cycle
// 1 of the following slot (5 cycles after `slot_start`), tagged with `mlt_neuron`.
module nef_neuron
  import nef_pkg::*;
#(
  parameter int unsigned TAG_W = 13
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             slot_start,
  input  stim_t            stim,
  input  logic [TAG_W-1:0] neuron,
  input  dw_t              dw [N_OUT],
  output logic             mlt_valid,
  output prod_t            mlt_rlt [N_OUT],
  output logic [TAG_W-1:0] mlt_neuron
);

  localparam int unsigned HALF = CORE_SIZE / 2;

  logic [1:0] ph_q, ph;
  assign ph = slot_start ? 2'd0 : ph_q;

  // ---------------- combinational logic: gain and T ----------------
  logic [IDX_W-1:0]  n_index;
  logic [IDX_W-1:0]  gain;
  mop_t              t_val;   // 9-bit signed, always within -124..255

  assign n_index = neuron[IDX_W-1:0];

  always_comb begin
    if (n_index < IDX_W'(HALF)) begin
      gain   = n_index;
      t_val = mop_t'(MAX_STIM) - (mop_t'(stim) + mop_t'(4 * n_index));
    end else begin
      gain   = IDX_W'(CORE_SIZE - 1) - n_index;
      t_val = mop_t'(stim) + mop_t'(4 * n_index) - mop_t'(4 * (CORE_SIZE - 1));
    end
  end

  // ---------------- operand multiplexers ----------------
  logic [FRATE_W-1:0] f_rate;
  mop_t               a0, b0, a12, b1, b2;
  prod_t              p0, p1, p2;
  logic [1:0]         sel12;  // which of the four weights multipliers 1 and 2 use

  assign sel12 = ph - 2'd1;   // 1 -> 0, 2 -> 1, 3 -> 2, 0 -> 3

  always_comb begin
    a0 = (ph == 2'd0) ? mop_t'({3'b000, gain}) : mop_t'({2'b00, f_rate});
    unique case (ph)
      2'd0:    b0 = t_val;
      2'd2:    b0 = mop_t'(dw[0]);
      2'd3:    b0 = mop_t'(dw[1]);
      default: b0 = '0;
    endcase
    a12 = mop_t'({2'b00, f_rate});
    b1  = mop_t'(dw[2 + sel12]);
    b2  = mop_t'(dw[6 + sel12]);
  end

  nef_mult9 u_mul0 (.a(a0),  .b(b0), .p(p0));
  nef_mult9 u_mul1 (.a(a12), .b(b1), .p(p1));
  nef_mult9 u_mul2 (.a(a12), .b(b2), .p(p2));

  // F_rate = max(gain * T / (N_A/2), 0), N_A/2 = 2^(IDX_W-1)
  logic signed [PROD_W-1:0] f_full;
  assign f_full = p0 >>> (IDX_W - 1);

  // ---------------- registers ----------------
  logic             inflight;
  logic [TAG_W-1:0] tag_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_q       <= '0;
      f_rate     <= '0;
      inflight   <= 1'b0;
      tag_q      <= '0;
      mlt_valid  <= 1'b0;
      mlt_neuron <= '0;
      for (int j = 0; j < N_OUT; j++) mlt_rlt[j] <= '0;
    end else begin
      ph_q      <= ph + 2'd1;
      mlt_valid <= 1'b0;
      if (ph == 2'd0) begin
        // close the neuron of the previous slot, open the new one
        mlt_valid  <= inflight;
        mlt_neuron <= tag_q;
        inflight   <= slot_start;
        if (slot_start) tag_q <= neuron;
        f_rate <= (f_full < 0) ? '0 : FRATE_W'(f_full);
      end
      if (ph == 2'd2) mlt_rlt[0] <= p0;
      if (ph == 2'd3) mlt_rlt[1] <= p0;
      mlt_rlt[2 + sel12] <= p1;
      mlt_rlt[6 + sel12] <= p2;
    end
  end

  a_slot_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    slot_start && inflight |-> ph_q == 2'd0);
  a_frate_range: assert property (@(posedge clk) disable iff (!rst_n)
    ph == 2'd0 |-> f_full < (1 <<< FRATE_W));

endmodule
