// prng: 12-bit pseudo-random number generator built from twelve LFSRs of
// different lengths (9 to 20 stages). Bit j of the number is the most
// significant stage of LFSR j. Because the lengths differ, the twelve
// m-sequences are all different; the 12-bit number repeats after the least
// common multiple of the periods (2^n_j - 1), about 2^132 steps. (The
// product, about 2^174, would need pairwise coprime periods.) Twelve LFSRs and the
// MSB-per-LFSR construction follow the paper; the lengths and taps are this
// design's choice (see dtc_pkg).
// Interface: 'en' advances every LFSR by one step on the rising clock edge;
// 'rnd' is the current number and 'rnd_next' the number after the next step,
// so a consumer can address a synchronous memory one cycle early.
module prng
  import dtc_pkg::*;
#(
  parameter int unsigned NUM = NUM_LFSR
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  output logic [NUM-1:0] rnd,
  output logic [NUM-1:0] rnd_next
);

  for (genvar j = 0; j < NUM; j++) begin : g_lfsr
    localparam int unsigned LEN = lfsr_len(j);
    lfsr #(
      .N   (LEN),
      .TAPS(lfsr_taps(LEN))
    ) u_lfsr (
      .clk     (clk),
      .rst_n   (rst_n),
      .en      (en),
      .state   (),
      .msb     (rnd[j]),
      .msb_next(rnd_next[j]),
      .out     ()
    );
  end

endmodule
