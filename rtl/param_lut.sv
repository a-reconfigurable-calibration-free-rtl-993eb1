// param_lut: parameter lookup table of the data generator, 4k words of
// 12 bits (size from the paper). The host writes the interval-variation rule
// through the write port; the generator reads it. It is a simple dual-port
// RAM with a registered read, so it maps onto one FPGA block RAM.
// Timing: a write takes effect on the rising edge with we high; rdata shows
// the word at raddr one clock after raddr is presented. The contents start
// at zero. Read latency and initial contents are this design's choices.
module param_lut
  import dtc_pkg::*;
#(
  parameter int unsigned AW = LUT_AW,
  parameter int unsigned DW = LUT_DW
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [2**AW];

  initial begin
    for (int i = 0; i < 2**AW; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
