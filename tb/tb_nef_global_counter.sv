// tb_nef_global_counter: checks the slot/phase sequence, the last-cycle flag, the ready
// handshake and a back-to-back restart of the global counter (5 neurons).
module tb_nef_global_counter;
  localparam int N = 5;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic ready, active, last;
  logic [1:0] phase;
  logic [$clog2(N)-1:0] neuron;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  nef_global_counter #(.N_NEURONS(N)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // one pass: expect 4*N active cycles with phase/neuron in order
  task automatic expect_pass(input bit restart_at_end);
    for (int t = 0; t < 4 * N; t++) begin
      @(negedge clk);
      check(active, $sformatf("active t=%0d", t));
      check(phase == 2'(t % 4) && neuron == 3'(t / 4), $sformatf("seq t=%0d ph=%0d n=%0d", t, phase, neuron));
      check(last == (t == 4 * N - 1), $sformatf("last t=%0d", t));
      check(ready == (t == 4 * N - 1), $sformatf("ready t=%0d", t));
      start = (t == 4 * N - 1) && restart_at_end;
      if (t == 5) start = 1'b1;   // ignored: not ready
      if (t == 6) start = 1'b0;
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!active && ready, "idle after reset");
    start = 1'b1;
    expect_pass(1'b1);     // restarts without a gap
    expect_pass(1'b0);
    @(negedge clk);
    check(!active && ready, "idle after pass");
    repeat (3) begin
      @(negedge clk);
      check(!active, "stays idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
