// tb_nef_output_layer: feeds several digits' worth of products (N_NEURONS = 12) with
// random gaps, including a digit whose first products arrive in the cycle the previous
// result is being resolved. Checks the ten final sums, the winner (one-hot and binary,
// ties to the lowest digit), the 2-cycle result timing and the clearing between digits.
module tb_nef_output_layer;
  import nef_pkg::*;
  localparam int NN = 12;
  logic clk = 1'b0, rst_n = 1'b0;
  logic mlt_valid = 1'b0;
  prod_t mlt_rlt [N_OUT];
  logic result_valid;
  logic [N_OUT-1:0] result;
  logic [3:0] result_idx;
  acc_t y [N_OUT];
  int checks = 0, failures = 0, results = 0, overlap = 0, ties = 0;
  int cyc = 0;
  int exp_y [$];   // flat: N_OUT + 2 ints per entry   // sums, winner, due cycle

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  nef_output_layer #(.N_NEURONS(NN)) dut (.*);

  always @(negedge clk) if (rst_n && result_valid) begin
    int e [N_OUT + 2];
    results++;
    checks++;
    if (exp_y.size() == 0) begin
      failures++;
      $display("FAIL unexpected result");
    end else begin
      foreach (e[i]) e[i] = exp_y.pop_front();
      if (int'(result_idx) != e[N_OUT] || result != N_OUT'(1 << e[N_OUT]) || cyc != e[N_OUT + 1]) begin
        failures++;
        $display("FAIL winner %0d exp %0d onehot %b cyc %0d exp %0d", result_idx, e[N_OUT], result, cyc, e[N_OUT + 1]);
      end
      for (int j = 0; j < N_OUT; j++) begin
        checks++;
        if (int'(y[j]) != e[j]) begin
          failures++;
          $display("FAIL y[%0d] %0d exp %0d", j, y[j], e[j]);
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
    foreach (mlt_rlt[j]) mlt_rlt[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int d = 0; d < 30; d++) begin
      int s [N_OUT + 2];
      int best;
      foreach (s[j]) s[j] = 0;
      for (int n = 0; n < NN; n++) begin
        @(negedge clk);
        mlt_valid = 1'b1;
        for (int j = 0; j < N_OUT; j++) begin
          int v;
          v = (d % 5 == 4) ? 100 : $urandom_range(0, 8128) - 4064;   // d%5==4: all tied
          mlt_rlt[j] = prod_t'(v);
          s[j] += v;
        end
        if (n == NN - 1) begin
          s[N_OUT + 1] = cyc + 2;
          best = 0;
          for (int j = 1; j < N_OUT; j++) if (s[j] > s[best]) best = j;
          s[N_OUT] = best;
          foreach (s[i]) exp_y.push_back(s[i]);
        end
        @(negedge clk);
        mlt_valid = 1'b0;
        // after the last products of a digit, sometimes start the next digit in the
        // resolve cycle, otherwise leave a random gap
        if (n == NN - 1 && d % 3 == 1) begin
          overlap++;
          // next loop iteration drives valid in the very next cycle (resolve cycle)
        end else if ($urandom_range(0, 3) == 0) begin
          repeat ($urandom_range(1, 4)) @(negedge clk);
        end
      end
      if (d % 5 == 4) ties++;
    end
    repeat (6) @(negedge clk);
    checks++;
    if (results != 30 || exp_y.size() != 0 || overlap == 0 || ties == 0) begin
      failures++;
      $display("FAIL results=%0d left=%0d", results, exp_y.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
