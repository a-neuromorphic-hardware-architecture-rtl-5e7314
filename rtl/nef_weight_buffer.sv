// nef_weight_buffer: on-chip RAM holding the decoding weights of all TM hidden neurons.
//
// One 60-bit word per hidden neuron packs its ten signed 6-bit decoding weights, weight j
// (for digit j) in bits 6j+5..6j. With 8192 neurons this is 8192 x 60 = 480k bits, the
// RAM figure of the published FPGA build. The weights are computed off-chip (OPIUM) and
// written through the write port before recognition starts.
//
// Interface: simple dual-port RAM. Write: `we`, `waddr`, `wdata` on a clock edge. Read:
// synchronous, `re` with `raddr` in cycle c gives `rdata` in cycle c+1, and `rdata` holds
// its value until the next read, so one read per time slot keeps the weights stable for
// the whole slot. The RAM is not reset; the read register is. Port style and packing are
// this design's choices.
module nef_weight_buffer
  import nef_pkg::*;
#(
  parameter int unsigned DEPTH = N_CORES_DEF * CORE_SIZE,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [DWV_W-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output dw_t              dw [N_OUT]
);

  logic [DWV_W-1:0] mem [DEPTH];
  logic [DWV_W-1:0] rdata;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rdata <= '0;
    else if (re) rdata <= mem[raddr];
  end

  always_comb
    for (int j = 0; j < N_OUT; j++) dw[j] = dw_t'(rdata[j*DW_W +: DW_W]);

endmodule
