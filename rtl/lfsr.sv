// lfsr: n-stage Fibonacci linear feedback shift register.
// The stages A_n .. A_1 shift one place towards A_1 on every enabled clock;
// the new value of A_n is the feedback A_{n+1} = A_1*B_1 ^ A_2*B_2 ^ ... ^
// A_n*B_n, as in the paper's LFSR figure and equation. The serial output is
// A_1; 'msb' is A_n, the bit the random number generator uses, and
// 'msb_next' is the feedback, i.e. the value msb takes after the next step.
// TAPS holds B_i in bit i-1. The tap sets and the all-ones reset seed are
// this design's choices (the paper gives the structure only).
// Timing: state changes on the rising clock edge when en is high; reset is
// synchronous and active low.
module lfsr #(
  parameter int unsigned N    = 9,
  parameter logic [31:0] TAPS = 32'h0000_0021,
  parameter logic [31:0] SEED = 32'hFFFF_FFFF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  output logic [N-1:0] state,     // bit i-1 is stage A_i
  output logic         msb,       // A_n
  output logic         msb_next,  // A_{n+1}
  output logic         out        // A_1
);

  logic [N-1:0] a_q;
  logic         fb;

  always_comb begin
    fb = ^(a_q & TAPS[N-1:0]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_q <= SEED[N-1:0];
    end else if (en) begin
      a_q <= {fb, a_q[N-1:1]};
    end
  end

  assign state    = a_q;
  assign msb      = a_q[N-1];
  assign msb_next = fb;
  assign out      = a_q[0];

endmodule
