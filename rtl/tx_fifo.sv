// tx_fifo: transmit FIFO in front of the transceiver, in the fabric clock
// domain. It buffers the data frames from the encoder so that the encoder can
// stall (valid/ready) when the transmit path is not draining. The FIFO's
// position in the chain is the paper's; its depth (16) and interface are
// this design's choices.
// Timing: a word is written when in_valid && in_ready and read when
// out_valid && out_ready; the head word is visible on out_data whenever
// out_valid is high (first word falls through). Simultaneous read and write
// are allowed when full or empty as long as each side's flag permits it.
module tx_fifo #(
  parameter int unsigned DW    = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [DW-1:0]            in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [DW-1:0]            out_data,
  output logic [$clog2(DEPTH):0]   level
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] wptr_q, rptr_q;
  logic [AW:0]   cnt_q;
  logic          wr, rd;

  assign in_ready  = (cnt_q != (AW+1)'(DEPTH));
  assign out_valid = (cnt_q != '0);
  assign wr        = in_valid && in_ready;
  assign rd        = out_valid && out_ready;
  assign out_data  = mem[rptr_q];
  assign level     = cnt_q;

  always_ff @(posedge clk) begin
    if (wr) mem[wptr_q] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr_q <= '0;
      rptr_q <= '0;
      cnt_q  <= '0;
    end else begin
      if (wr) wptr_q <= (wptr_q == AW'(DEPTH-1)) ? '0 : wptr_q + 1'b1;
      if (rd) rptr_q <= (rptr_q == AW'(DEPTH-1)) ? '0 : rptr_q + 1'b1;
      cnt_q <= cnt_q + (AW+1)'(wr) - (AW+1)'(rd);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) cnt_q <= (AW+1)'(DEPTH));

endmodule
