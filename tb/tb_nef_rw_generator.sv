// tb_nef_rw_generator: compares the LFSR weights with a software LFSR under random
// step/load patterns, and checks the maximal period 2^20 - 1.
module tb_nef_rw_generator;
  import nef_pkg::*;
  import tb_nef_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, step = 1'b0;
  seed_t seed = 20'h00001;
  rw_t rw [RW_PER_GEN];
  logic [19:0] model, seed0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  nef_rw_generator dut (.*);

  task automatic compare(input string what);
    for (int j = 0; j < RW_PER_GEN; j++) begin
      checks++;
      if (int'(rw[j]) != rw_field(model, j)) begin
        failures++;
        $display("FAIL %s j=%0d got %0d exp %0d", what, j, rw[j], rw_field(model, j));
      end
    end
  endtask

  initial begin
    repeat (1200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int period;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    model = 'x;
    for (int r = 0; r < 5; r++) begin
      @(negedge clk);
      seed  = seed_t'($urandom_range(1, (1 << 20) - 1));
      load  = 1'b1;
      step  = 1'b1;       // load has priority
      @(negedge clk);
      model = seed;
      load  = 1'b0;
      compare("after load");
      for (int t = 0; t < 300; t++) begin
        step = 1'($urandom_range(0, 1));
        @(negedge clk);
        if (step) model = lfsr_next(model);
        compare("stepping");
      end
    end
    // period: the state must come back to the seed after exactly 2^20 - 1 steps
    seed  = 20'hABCDE;
    load  = 1'b1;
    @(negedge clk);
    load  = 1'b0;
    step  = 1'b1;
    seed0 = {rw[3], rw[2], rw[1], rw[0]};
    period = 0;
    do begin
      @(negedge clk);
      period++;
    end while ({rw[3], rw[2], rw[1], rw[0]} != seed0 && period < (1 << 20) + 5);
    checks++;
    if (period != (1 << 20) - 1) begin
      failures++;
      $display("FAIL period %0d", period);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
