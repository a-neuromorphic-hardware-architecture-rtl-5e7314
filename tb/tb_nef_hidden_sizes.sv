// tb_nef_hidden_sizes: runs the recogniser at the six hidden-layer sizes of the published
// size study, 1k, 2k, 4k, 8k, 12k and 16k neurons (16 to 256 cores), side by side. Each
// size gets its own random seeds, weights and two back-to-back digits, checked against
// the reference model. This shows the RTL scales by its N_CORES parameter alone; only
// the 8k size is the default build.
module tb_nef_hidden_sizes;
  localparam int NSIZE = 6;
  localparam int CORES [NSIZE] = '{16, 32, 64, 128, 192, 256};
  logic clk = 1'b0, rst_n = 1'b0;
  logic done [NSIZE];
  int   chk  [NSIZE];
  int   fail [NSIZE];
  int   checks, failures;

  always #5 clk = ~clk;

  for (genvar s = 0; s < NSIZE; s++) begin : g_size
    tb_nef_size_run #(.NC(CORES[s])) u_run (
      .clk, .rst_n, .done(done[s]), .checks(chk[s]), .failures(fail[s])
    );
  end

  function automatic bit all_done();
    foreach (done[s]) if (!done[s]) return 1'b0;
    return 1'b1;
  endfunction

  task automatic report();
    checks = 0; failures = 0;
    foreach (chk[s]) begin checks += chk[s]; failures += fail[s]; end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    report();
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (!all_done()) @(posedge clk);
    report();
    foreach (CORES[s]) $display("%0d hidden neurons: checks %0d failures %0d", CORES[s] * 64, chk[s], fail[s]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
