// serializer: parallel-to-serial converter of the transceiver's PMA. Every
// W bit clocks it loads one W-bit word from the transmit buffer and sends it
// most significant bit first, one bit per bit clock; at 10 Gb/s a bit lasts
// 100 ps, which is the resolution of the converter. If no word is available
// when one is due, W zeros are sent (line low) and 'underflow' is high for
// that bit clock. In the real device this is a hard transceiver circuit; here
// it is a shift register with a bit counter. MSB-first order and the
// underflow behaviour are this design's choices.
// Timing: word_take is high in the bit clock in which the word is loaded; the
// first bit of that word appears on tx_bit one bit clock later and the word
// occupies tx_bit for the next W bit clocks.
module serializer #(
  parameter int unsigned W = 32
) (
  input  logic         ser_clk,
  input  logic         ser_rst_n,
  input  logic [W-1:0] word,
  input  logic         word_avail,
  output logic         word_take,
  output logic         tx_bit,
  output logic         underflow
);

  localparam int unsigned CW = $clog2(W);

  logic [CW-1:0] cnt_q;
  logic [W-1:0]  sh_q;
  logic          load;

  assign load      = (cnt_q == '0);
  assign word_take = load && word_avail;
  assign underflow = load && !word_avail;

  always_ff @(posedge ser_clk) begin
    if (!ser_rst_n) begin
      cnt_q  <= '0;
      sh_q   <= '0;
      tx_bit <= 1'b0;
    end else begin
      cnt_q <= (cnt_q == CW'(W-1)) ? '0 : cnt_q + 1'b1;
      if (load) begin
        tx_bit <= word_avail ? word[W-1] : 1'b0;
        sh_q   <= word_avail ? {word[W-2:0], 1'b0} : '0;
      end else begin
        tx_bit <= sh_q[W-1];
        sh_q   <= {sh_q[W-2:0], 1'b0};
      end
    end
  end

endmodule
