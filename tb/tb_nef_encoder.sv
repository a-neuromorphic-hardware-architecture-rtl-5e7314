// tb_nef_encoder: writes random seeds, loads digits and runs the encoder over 40 neurons,
// checking every stimulus code against the software LFSR/adder model, its timing (two
// cycles after the slot's last quarter), reseeding on a second load, and that both
// saturation limits of the stimulus code are reached.
module tb_nef_encoder;
  import nef_pkg::*;
  import tb_nef_ref_pkg::*;
  localparam int TAG_W = 13;
  localparam int NN = 40;
  logic clk = 1'b0, rst_n = 1'b0;
  logic load = 1'b0;
  logic [N_PIXELS-1:0] digit = '0;
  logic seed_we = 1'b0;
  logic [5:0] seed_addr = '0;
  seed_t seed_wdata = '0;
  logic active = 1'b0;
  logic [1:0] phase = '0;
  logic [TAG_W-1:0] neuron = '0;
  logic stim_valid;
  stim_t stim;
  logic [TAG_W-1:0] stim_neuron;
  logic [19:0] seeds [NGEN];
  int checks = 0, failures = 0, sat_lo = 0, sat_hi = 0, got = 0;
  int sums [];
  int cyc = 0, last_q_cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  nef_encoder #(.TAG_W(TAG_W), .STIM_SHIFT(1)) dut (.*);

  always @(negedge clk) if (rst_n && stim_valid) begin
    int n, e;
    n = int'(stim_neuron);
    e = stim_code(sums[n], 1);
    checks++;
    if (int'(stim) != e || cyc != last_q_cyc + 2 + 4 * (n - got)) begin
      failures++;
      $display("FAIL n=%0d stim %0d exp %0d (sum %0d) cyc %0d", n, stim, e, sums[n], cyc);
    end
    if (e == 0) sat_lo++;
    if (e == 254) sat_hi++;
  end

  task automatic run_digit(input logic [N_PIXELS-1:0] d);
    encoder_sums(d, seeds, NN, sums);
    @(negedge clk);
    digit = d;
    load  = 1'b1;
    @(negedge clk);
    load  = 1'b0;
    got   = 0;
    last_q_cyc = cyc + 3;   // cycle of neuron 0's last quarter
    for (int n = 0; n < NN; n++)
      for (int p = 0; p < 4; p++) begin
        active = 1'b1;
        phase  = 2'(p);
        neuron = TAG_W'(n);
        @(negedge clk);
      end
    active = 1'b0;
    repeat (4) @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N_PIXELS-1:0] d;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < NGEN; g++) begin
      @(negedge clk);
      seeds[g]   = 20'($urandom_range(1, (1 << 20) - 1));
      seed_we    = 1'b1;
      seed_addr  = 6'(g);
      seed_wdata = seeds[g];
    end
    @(negedge clk);
    seed_we = 1'b0;
    for (int r = 0; r < 4; r++) begin
      // MNIST-like density: about one pixel in five is lit
      for (int i = 0; i < N_PIXELS; i++) d[i] = ($urandom_range(0, 4) == 0);
      if (r == 2) d = '1;               // dense digit: weights average negative
      if (r == 3) d = positive_pixels(seeds); // lights only neuron 0's positive weights

      run_digit(d);
      if (r == 0) run_digit(d);   // same digit again: reseeding must repeat the weights
    end
    checks++;
    if (sat_lo == 0 || sat_hi == 0) begin
      failures++;
      $display("FAIL saturation not seen lo=%0d hi=%0d", sat_lo, sat_hi);
    end
    $display("saturation events: low %0d high %0d", sat_lo, sat_hi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
