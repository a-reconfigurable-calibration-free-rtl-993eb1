// phase_accumulator: D-bit phase accumulator of the sequence generator.
// On each sampling strobe (en) the phase grows by the frequency control word
// K, wrapping modulo 2^D; the upper bits of the phase address the parameter
// lookup table, so 2^D/K samples sweep the table once. 'phase_next' is the
// value after the next strobe (phase + K), offered so that a synchronous
// table can be read ahead. The structure follows the paper; D = 32 and the
// clear input are this design's choices.
// Timing: updates on the rising clock edge; synchronous active-low reset and
// clear both set the phase to 0 (clear wins over en).
module phase_accumulator
  import dtc_pkg::*;
#(
  parameter int unsigned D = PHASE_D
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         en,
  input  logic [D-1:0] k,
  output logic [D-1:0] phase,
  output logic [D-1:0] phase_next
);

  logic [D-1:0] acc_q;

  assign phase_next = acc_q + k;
  assign phase      = acc_q;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      acc_q <= '0;
    end else if (en) begin
      acc_q <= phase_next;
    end
  end

endmodule
