// tb_nef_neuron: drives the physical neuron with back-to-back and gapped slots over all
// 64 neuron indices, random stimuli (including 0 and 254) and random decoding weights.
// Checks the ten products against F_rate x weight from the reference tuning curve, the
// tag, and that they appear exactly 5 cycles after the slot starts. Also checks that the
// zero clamp and both halves of the core are exercised.
module tb_nef_neuron;
  import nef_pkg::*;
  import tb_nef_ref_pkg::*;
  localparam int TAG_W = 13;
  logic clk = 1'b0, rst_n = 1'b0;
  logic slot_start = 1'b0;
  stim_t stim = '0;
  logic [TAG_W-1:0] neuron = '0;
  dw_t dw [N_OUT];
  logic mlt_valid;
  prod_t mlt_rlt [N_OUT];
  logic [TAG_W-1:0] mlt_neuron;
  int checks = 0, failures = 0, clamped = 0, lower = 0, upper = 0, maxf = 0;
  int cyc = 0;
  int exp_q [$];   // flat: N_OUT + 2 ints per entry   // products, tag, due cycle

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  nef_neuron #(.TAG_W(TAG_W)) dut (.*);

  always @(negedge clk) if (rst_n && mlt_valid) begin
    int e [N_OUT + 2];
    checks++;
    if (exp_q.size() == 0) begin
      failures++;
      $display("FAIL unexpected output");
    end else begin
      foreach (e[i]) e[i] = exp_q.pop_front();
      if (int'(mlt_neuron) != e[N_OUT] || cyc != e[N_OUT + 1]) begin
        failures++;
        $display("FAIL tag %0d exp %0d cyc %0d exp %0d", mlt_neuron, e[N_OUT], cyc, e[N_OUT + 1]);
      end
      for (int j = 0; j < N_OUT; j++) begin
        checks++;
        if (int'(mlt_rlt[j]) != e[j]) begin
          failures++;
          $display("FAIL n=%0d j=%0d got %0d exp %0d", mlt_neuron, j, mlt_rlt[j], e[j]);
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dw_t nxt [N_OUT];
    foreach (dw[j]) dw[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 700; k++) begin
      int idx, s, f;
      int e [N_OUT + 2];
      idx = k % 64;
      s = (k % 5 == 0) ? 0 : (k % 5 == 1) ? 254 : $urandom_range(0, 254);
      f = frate(s, idx);
      if (f == 0) clamped++;
      if (f > maxf) maxf = f;
      if (idx < 32) lower++; else upper++;
      for (int j = 0; j < N_OUT; j++) begin
        nxt[j] = dw_t'($urandom_range(0, 63));
        if (k % 7 == 0) nxt[j] = dw_t'(j % 2 ? -32 : 31);
        e[j] = f * int'(nxt[j]);
      end
      e[N_OUT] = k;
      @(negedge clk);               // slot cycle 0
      slot_start = 1'b1;
      stim   = stim_t'(s);
      neuron = TAG_W'(k);
      e[N_OUT + 1] = cyc + 5;
      foreach (e[i]) exp_q.push_back(e[i]);
      @(negedge clk);               // slot cycle 1: weights of this neuron arrive
      slot_start = 1'b0;
      stim   = stim_t'($urandom);   // only needed in cycle 0
      neuron = TAG_W'($urandom);
      dw = nxt;
      @(negedge clk);
      @(negedge clk);               // cycle 3
      if (k % 11 == 10) repeat ($urandom_range(1, 6)) @(negedge clk);   // idle gap
    end
    repeat (8) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || clamped == 0 || lower == 0 || upper == 0 || maxf < 120) begin
      failures++;
      $display("FAIL left=%0d clamped=%0d lower=%0d upper=%0d maxf=%0d", exp_q.size(), clamped, lower, upper, maxf);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
