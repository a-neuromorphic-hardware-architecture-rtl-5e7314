// tb_nef_weight_buffer: fills the full 8192 x 60-bit decoding-weight RAM with random
// words, then reads it back in random order, checking the one-cycle read latency, the
// unpacking into ten signed 6-bit weights and that the read data holds between reads.
module tb_nef_weight_buffer;
  import nef_pkg::*;
  import tb_nef_ref_pkg::*;
  localparam int DEPTH = N_CORES_DEF * CORE_SIZE;
  localparam int AW = $clog2(DEPTH);
  logic clk = 1'b0, rst_n = 1'b0;
  logic we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [DWV_W-1:0] wdata = '0;
  dw_t dw [N_OUT];
  logic [DWV_W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  nef_weight_buffer dut (.*);

  task automatic compare(input int a, input string what);
    for (int j = 0; j < N_OUT; j++) begin
      checks++;
      if (int'(dw[j]) != dw_field(model[a], j)) begin
        failures++;
        $display("FAIL %s a=%0d j=%0d got %0d exp %0d", what, a, j, dw[j], dw_field(model[a], j));
      end
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      model[a] = {$urandom, $urandom};
      we = 1'b1; waddr = AW'(a); wdata = model[a];
    end
    @(negedge clk);
    we = 1'b0;
    for (int r = 0; r < 3000; r++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      re = 1'b1; raddr = AW'(a);
      @(negedge clk);
      re = 1'b0; raddr = AW'($urandom);
      compare(a, "read");
      if (r % 4 == 0) begin
        @(negedge clk);
        compare(a, "hold");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
