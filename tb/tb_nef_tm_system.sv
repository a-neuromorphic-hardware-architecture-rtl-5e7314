// tb_nef_tm_system: runs the time-multiplexed encoder + hidden layer with one core (64
// neurons) over three digits, two of them back to back. Every stimulus and every
// neuron's ten weighted firing rates are compared with the reference model, as is the
// cycle at which they appear (stimulus 4n+5, products 4n+10 after the pass starts), and
// `digit_ready` must stay low during a pass except in its last cycle.
module tb_nef_tm_system;
  import nef_pkg::*;
  import tb_nef_ref_pkg::*;
  localparam int NC = 1;
  localparam int NN = NC * CORE_SIZE;
  localparam int NW = $clog2(NN);
  logic clk = 1'b0, rst_n = 1'b0;
  logic digit_valid = 1'b0, digit_ready;
  logic [N_PIXELS-1:0] digit = '0;
  logic seed_we = 1'b0;
  logic [5:0] seed_addr = '0;
  seed_t seed_wdata = '0;
  logic w_we = 1'b0;
  logic [NW-1:0] w_addr = '0;
  logic [DWV_W-1:0] w_wdata = '0;
  logic stim_valid, mlt_valid;
  stim_t stim;
  logic [NW-1:0] stim_neuron, mlt_neuron;
  prod_t mlt_rlt [N_OUT];
  logic [19:0] seeds [NGEN];
  logic [DWV_W-1:0] wmem [NN];
  int checks = 0, failures = 0;
  int cyc = 0, t0 = 0, pass = -1;
  int sums [];
  int stims_seen = 0, mlts_seen = 0;
  logic [N_PIXELS-1:0] digits [3];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  nef_tm_system #(.N_CORES(NC)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // pass bookkeeping: a digit accepted at the end of cycle c starts its pass in c+1
  int prev_sums [];
  int prev_t0 = -1000000;
  always @(posedge clk) if (rst_n && digit_valid && digit_ready) begin
    pass++;
    prev_sums = sums;
    prev_t0 = t0;
    t0 = cyc + 1;
    encoder_sums(digits[pass], seeds, NN, sums);
  end

  // outputs of neuron n belong to the newest pass unless they are due before it began
  always @(negedge clk) if (rst_n) begin
    if (stim_valid) begin
      int n, s, base;
      n = int'(stim_neuron);
      stims_seen++;
      if (cyc >= t0 + 4 * n + 5) begin s = sums[n]; base = t0; end
      else begin s = prev_sums[n]; base = prev_t0; end
      check(int'(stim) == stim_code(s, 1) && cyc == base + 4 * n + 5,
            $sformatf("stim n=%0d got %0d exp %0d cyc %0d", n, stim, stim_code(s, 1), cyc));
    end
    if (mlt_valid) begin
      int n, f, base, s;
      n = int'(mlt_neuron);
      mlts_seen++;
      if (cyc >= t0 + 4 * n + 10) begin s = sums[n]; base = t0; end
      else begin s = prev_sums[n]; base = prev_t0; end
      f = frate(stim_code(s, 1), n % CORE_SIZE);
      check(cyc == base + 4 * n + 10, $sformatf("mlt timing n=%0d cyc %0d", n, cyc));
      for (int j = 0; j < N_OUT; j++)
        check(int'(mlt_rlt[j]) == f * dw_field(wmem[n], j),
              $sformatf("mlt n=%0d j=%0d got %0d exp %0d", n, j, mlt_rlt[j], f * dw_field(wmem[n], j)));
    end
  end

  task automatic send(input logic [N_PIXELS-1:0] d);
    digit = d;
    digit_valid = 1'b1;
    while (!digit_ready) @(negedge clk);
    @(negedge clk);
    digit_valid = 1'b0;
  endtask

  initial begin
    repeat (3000) @(posedge clk);
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
    digits[1] = sparse_digit();
    digits[2] = digits[0];
    send(digits[0]);
    repeat (20) @(negedge clk);
    check(!digit_ready, "ready low during a pass");
    send(digits[1]);   // waits for the last cycle of pass 0: no gap
    send(digits[2]);   // same digit as pass 0 again, also back to back
    repeat (4 * NN + 20) @(negedge clk);
    check(stims_seen == 3 * NN && mlts_seen == 3 * NN, $sformatf("counts %0d %0d", stims_seen, mlts_seen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
