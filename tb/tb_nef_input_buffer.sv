// tb_nef_input_buffer: loads random digits and checks the four 196-pixel quarters, and
// that the stored digit holds while `load` is low.
module tb_nef_input_buffer;
  import nef_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0;
  logic [N_PIXELS-1:0] digit, ref_d;
  logic [1:0] phase = '0;
  logic [PIX_PER_CYCLE-1:0] pixels;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  nef_input_buffer dut (.*);

  function automatic logic [N_PIXELS-1:0] rand_digit();
    logic [N_PIXELS-1:0] d;
    for (int i = 0; i < N_PIXELS; i++) d[i] = 1'($urandom_range(0, 1));
    return d;
  endfunction

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    digit = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 6; r++) begin
      @(negedge clk);
      digit = rand_digit();
      ref_d = digit;
      load  = 1'b1;
      @(negedge clk);
      load  = 1'b0;
      digit = rand_digit();   // must not be taken
      for (int p = 0; p < 4; p++) begin
        phase = 2'(p);
        #1;
        for (int k = 0; k < PIX_PER_CYCLE; k++) begin
          checks++;
          if (pixels[k] !== ref_d[196 * p + k]) begin
            failures++;
            $display("FAIL r=%0d p=%0d k=%0d", r, p, k);
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
