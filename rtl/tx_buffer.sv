// tx_buffer: transmit buffer of the transceiver, the dual-clock FIFO that
// separates the PCS side (fabric clock, where frames are written) from the
// PMA side (serial clock domain, where the serializer reads them) and so
// absorbs any phase difference between the two clocks. The paper states its
// role only; the Gray-coded pointers with two-flop synchronisers are the
// usual way of building it and are this design's choice, as is the depth of
// 2^AW = 8 words.
// Timing: write when wen && !wfull on wclk; read when ren && !rempty on
// rclk, with the head word visible on rdata (first word falls through).
// wfull and rempty are pessimistic: a pointer change is seen by the other
// side two of its clocks later.
module tx_buffer #(
  parameter int unsigned DW = 32,
  parameter int unsigned AW = 3
) (
  input  logic          wclk,
  input  logic          wrst_n,
  input  logic          wen,
  input  logic [DW-1:0] wdata,
  output logic          wfull,
  input  logic          rclk,
  input  logic          rrst_n,
  input  logic          ren,
  output logic [DW-1:0] rdata,
  output logic          rempty
);

  logic [DW-1:0] mem [2**AW];

  logic [AW:0] wbin_q, wgray_q, rbin_q, rgray_q;
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer seen in rclk domain
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer seen in wclk domain
  logic [AW:0] wbin_d, rbin_d;

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---- write side ----
  assign wfull  = (wgray_q == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign wbin_d = wbin_q + (AW+1)'(wen && !wfull);

  always_ff @(posedge wclk) begin
    if (wen && !wfull) mem[wbin_q[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk) begin
    if (!wrst_n) begin
      wbin_q   <= '0;
      wgray_q  <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      wbin_q   <= wbin_d;
      wgray_q  <= bin2gray(wbin_d);
      rgray_w1 <= rgray_q;
      rgray_w2 <= rgray_w1;
    end
  end

  // ---- read side ----
  assign rempty = (rgray_q == wgray_r2);
  assign rbin_d = rbin_q + (AW+1)'(ren && !rempty);
  assign rdata  = mem[rbin_q[AW-1:0]];

  always_ff @(posedge rclk) begin
    if (!rrst_n) begin
      rbin_q   <= '0;
      rgray_q  <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      rbin_q   <= rbin_d;
      rgray_q  <= bin2gray(rbin_d);
      wgray_r1 <= wgray_q;
      wgray_r2 <= wgray_r1;
    end
  end

endmodule
