// tb_nef_top_full: the digit recogniser at its full size, 128 cores = 8192 hidden neurons,
// with every parameter at its default. After loading 49 seeds and 8192 decoding-weight
// words it sends three digits, the last two back to back, and checks each result (winner
// and the ten output sums) against the reference model, the latency of 8192*4 + 9 = 32777
// cycles from acceptance to result, the 32768-cycle spacing of back-to-back results and
// every hidden neuron's stimulus.
module tb_nef_top_full;
  import nef_pkg::*;
  import tb_nef_ref_pkg::*;
  localparam int NC = N_CORES_DEF;
  localparam int NN = NC * CORE_SIZE;
  localparam int NW = $clog2(NN);
  localparam int NDIG = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic digit_valid = 1'b0, digit_ready;
  logic [N_PIXELS-1:0] digit = '0;
  logic seed_we = 1'b0;
  logic [5:0] seed_addr = '0;
  logic [LFSR_W-1:0] seed_wdata = '0;
  logic w_we = 1'b0;
  logic [NW-1:0] w_addr = '0;
  logic [DWV_W-1:0] w_wdata = '0;
  logic result_valid;
  logic [N_OUT-1:0] result;
  logic [3:0] result_idx;
  logic signed [ACC_W-1:0] y [N_OUT];

  nef_top dut (.*);

  logic [19:0] seeds [NGEN];
  logic [DWV_W-1:0] wmem [NN];
  logic [N_PIXELS-1:0] digits [NDIG];
  int checks = 0, failures = 0, cyc = 0, pass = -1, results = 0;
  int exp_q [$];      // flat: 10 sums, winner, due cycle
  int sums [];
  int t0 = 0, prev_t0 = -1000000;
  int prev_sums [];
  // mechanism counters
  int n_idle_start = 0, n_wait = 0, n_b2b = 0, n_sat_lo = 0, n_sat_hi = 0;
  int n_clamp = 0, n_lower = 0, n_upper = 0, last_result_cyc = -1, n_spacing = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // reference result of one digit, queued when it is accepted
  always @(posedge clk) if (rst_n) begin
    if (digit_valid && !digit_ready) n_wait++;
    if (digit_valid && digit_ready) begin
      int e [N_OUT + 2];
      int best;
      if (dut.u_tm.active) n_b2b++; else n_idle_start++;
      pass++;
      prev_sums = sums;
      prev_t0 = t0;
      t0 = cyc + 1;
      encoder_sums(digits[pass], seeds, NN, sums);
      foreach (e[i]) e[i] = 0;
      for (int n = 0; n < NN; n++) begin
        int f;
        f = frate(stim_code(sums[n], 1), n % CORE_SIZE);
        if (f == 0) n_clamp++;
        if (n % CORE_SIZE < CORE_SIZE / 2) n_lower++; else n_upper++;
        for (int j = 0; j < N_OUT; j++) e[j] += f * dw_field(wmem[n], j);
      end
      best = 0;
      for (int j = 1; j < N_OUT; j++) if (e[j] > e[best]) best = j;
      e[N_OUT] = best;
      e[N_OUT + 1] = cyc + 4 * NN + 9;
      foreach (e[i]) exp_q.push_back(e[i]);
    end
  end

  // stimulus of each hidden neuron, observed inside the time-multiplexed system
  always @(negedge clk) if (rst_n && dut.u_tm.stim_valid) begin
    int n, s;
    n = int'(dut.u_tm.stim_neuron);
    s = (cyc >= t0 + 4 * n + 5) ? sums[n] : prev_sums[n];
    check(int'(dut.u_tm.stim) == stim_code(s, 1), $sformatf("stim n=%0d", n));
    if (dut.u_tm.stim == 0) n_sat_lo++;
    if (dut.u_tm.stim == stim_t'(MAX_STIM - 1)) n_sat_hi++;
  end

  always @(negedge clk) if (rst_n && result_valid) begin
    int e [N_OUT + 2];
    checks++;
    if (exp_q.size() == 0) begin
      failures++;
      $display("FAIL unexpected result");
    end else begin
      foreach (e[i]) e[i] = exp_q.pop_front();
      check(cyc == e[N_OUT + 1], $sformatf("result %0d latency: cyc %0d exp %0d", results, cyc, e[N_OUT + 1]));
      check(int'(result_idx) == e[N_OUT] && result == N_OUT'(1 << e[N_OUT]),
            $sformatf("result %0d winner %0d exp %0d", results, result_idx, e[N_OUT]));
      for (int j = 0; j < N_OUT; j++)
        check(int'(y[j]) == e[j], $sformatf("result %0d y[%0d] %0d exp %0d", results, j, y[j], e[j]));
      if (last_result_cyc >= 0 && cyc - last_result_cyc == 4 * NN) n_spacing++;
      last_result_cyc = cyc;
    end
    results++;
  end

  task automatic send(input logic [N_PIXELS-1:0] d);
    digit = d;
    digit_valid = 1'b1;
    while (!digit_ready) @(negedge clk);
    @(negedge clk);
    digit_valid = 1'b0;
  endtask

  task automatic mech(input int n, input string name);
    $display("mechanism %-28s %0d", name, n);
    check(n > 0, {"mechanism never happened: ", name});
  endtask

  initial begin
    repeat (4 * NN * (NDIG + 2) + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < NGEN; g++) begin
      @(negedge clk);
      seeds[g] = 20'($urandom_range(1, (1 << 20) - 1));
      seed_we = 1'b1; seed_addr = 6'(g); seed_wdata = seeds[g];
    end
    @(negedge clk);
    seed_we = 1'b0;
    for (int a = 0; a < NN; a++) begin
      wmem[a] = {$urandom, $urandom};
      w_we = 1'b1; w_addr = NW'(a); w_wdata = wmem[a];
      @(negedge clk);
    end
    w_we = 1'b0;
    digits[0] = sparse_digit();
    digits[1] = positive_pixels(seeds);   // neuron 0 saturates high
    digits[2] = '1;                       // dense: stimulus saturates low
    send(digits[0]);
    repeat (100) @(negedge clk);
    send(digits[1]);                      // offered mid-pass: waits, then back to back
    send(digits[2]);
    repeat (4 * NN + 50) @(negedge clk);
    check(results == NDIG && exp_q.size() == 0, $sformatf("results %0d of %0d", results, NDIG));
    mech(n_idle_start, "idle start");
    mech(n_wait, "wait on digit_ready");
    mech(n_b2b, "back-to-back start");
    mech(n_spacing, "results 4N cycles apart");
    mech(n_sat_lo, "stimulus saturated low");
    mech(n_sat_hi, "stimulus saturated high");
    mech(n_clamp, "firing rate clamped to 0");
    mech(n_lower, "lower-half tuning curve");
    mech(n_upper, "upper-half tuning curve");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
