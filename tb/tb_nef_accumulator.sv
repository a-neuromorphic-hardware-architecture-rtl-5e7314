// tb_nef_accumulator: feeds random weighted pixels slot by slot (with idle gaps) and
// checks each 784-pixel total, its tag, and that it appears exactly two cycles after the
// slot's last quarter.
module tb_nef_accumulator;
  import nef_pkg::*;
  localparam int TAG_W = 13;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [1:0] in_phase = '0;
  logic [TAG_W-1:0] in_tag = '0;
  rw_t wpix [PIX_PER_CYCLE];
  logic sum_valid;
  logic signed [SUM_W-1:0] sum;
  logic [TAG_W-1:0] sum_tag;
  int checks = 0, failures = 0;
  int exp_q [$];
  int tag_q [$];
  int due_q [$];
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  nef_accumulator #(.TAG_W(TAG_W)) dut (.*);

  // checker: every sum_valid must match the oldest expected slot, in the right cycle
  always @(negedge clk) if (rst_n) begin
    if (sum_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected sum");
      end else begin
        int e, t, d;
        e = exp_q.pop_front(); t = tag_q.pop_front(); d = due_q.pop_front();
        if (int'(sum) != e || int'(sum_tag) != t || cyc != d) begin
          failures++;
          $display("FAIL sum %0d exp %0d tag %0d exp %0d cyc %0d exp %0d", sum, e, sum_tag, t, cyc, d);
        end
      end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (wpix[k]) wpix[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 60; n++) begin
      int s;
      s = 0;
      for (int p = 0; p < 4; p++) begin
        @(negedge clk);
        in_valid = 1'b1;
        in_phase = 2'(p);
        in_tag   = TAG_W'(n * 7 + 3);
        for (int k = 0; k < PIX_PER_CYCLE; k++) begin
          // extremes in the first slots, random afterwards
          if (n == 0)      wpix[k] = rw_t'(-16);
          else if (n == 1) wpix[k] = rw_t'(15);
          else             wpix[k] = rw_t'($urandom_range(0, 31));
          s += int'(wpix[k]);
        end
        if (p == 3) begin
          exp_q.push_back(s);
          tag_q.push_back(n * 7 + 3);
          due_q.push_back(cyc + 2);
        end
      end
      if (n % 9 == 4) begin
        @(negedge clk);
        in_valid = 1'b0;
        foreach (wpix[k]) wpix[k] = rw_t'($urandom_range(0, 31));
        repeat (2) @(negedge clk);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d sums missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
