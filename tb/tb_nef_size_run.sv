// tb_nef_size_run: helper for tb_nef_hidden_sizes. Builds the recogniser with N_CORES
// cores, loads random seeds and decoding weights, sends two random sparse digits back to
// back and checks each result (winner and output sums) against the reference model and
// the 4N + 9 cycle latency. Raises `done` with its check and failure counts.
module tb_nef_size_run #(
  parameter int NC = 2
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  import nef_pkg::*;
  import tb_nef_ref_pkg::*;
  localparam int NN = NC * CORE_SIZE;
  localparam int NW = $clog2(NN);

  logic digit_valid, digit_ready;
  logic [N_PIXELS-1:0] digit;
  logic seed_we;
  logic [5:0] seed_addr;
  logic [LFSR_W-1:0] seed_wdata;
  logic w_we;
  logic [NW-1:0] w_addr;
  logic [DWV_W-1:0] w_wdata;
  logic result_valid;
  logic [N_OUT-1:0] result;
  logic [3:0] result_idx;
  logic signed [ACC_W-1:0] y [N_OUT];

  nef_top #(.N_CORES(NC)) dut (.*);

  logic [19:0] seeds [NGEN];
  logic [DWV_W-1:0] wmem [NN];
  logic [N_PIXELS-1:0] digits [2];
  int exp_q [$];
  int cyc = 0, pass = -1, results = 0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL N=%0d %s", NN, what); end
  endtask

  always @(posedge clk) if (rst_n && digit_valid && digit_ready) begin
    int e [N_OUT + 2];
    int sums [];
    int best;
    pass++;
    encoder_sums(digits[pass], seeds, NN, sums);
    foreach (e[i]) e[i] = 0;
    for (int n = 0; n < NN; n++) begin
      int f;
      f = frate(stim_code(sums[n], 1), n % CORE_SIZE);
      for (int j = 0; j < N_OUT; j++) e[j] += f * dw_field(wmem[n], j);
    end
    best = 0;
    for (int j = 1; j < N_OUT; j++) if (e[j] > e[best]) best = j;
    e[N_OUT] = best;
    e[N_OUT + 1] = cyc + 4 * NN + 9;
    foreach (e[i]) exp_q.push_back(e[i]);
  end

  always @(negedge clk) if (rst_n && result_valid) begin
    int e [N_OUT + 2];
    if (exp_q.size() < N_OUT + 2) check(1'b0, "unexpected result");
    else begin
      foreach (e[i]) e[i] = exp_q.pop_front();
      check(cyc == e[N_OUT + 1], $sformatf("latency cyc %0d exp %0d", cyc, e[N_OUT + 1]));
      check(int'(result_idx) == e[N_OUT] && result == N_OUT'(1 << e[N_OUT]), "winner");
      for (int j = 0; j < N_OUT; j++) check(int'(y[j]) == e[j], $sformatf("y[%0d]", j));
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

  initial begin
    done = 1'b0; checks = 0; failures = 0;
    digit_valid = 1'b0; digit = '0;
    seed_we = 1'b0; seed_addr = '0; seed_wdata = '0;
    w_we = 1'b0; w_addr = '0; w_wdata = '0;
    @(posedge rst_n);
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
    send(digits[0]);
    send(digits[1]);
    repeat (4 * NN + 40) @(negedge clk);
    check(results == 2, $sformatf("%0d results", results));
    done = 1'b1;
  end
endmodule
