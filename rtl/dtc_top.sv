// dtc_top: digital-to-time converter built on a transceiver transmit path.
// Timing signals are synthesised as bit patterns on a 10 Gb/s serial line,
// so every edge sits on the 100 ps grid of the transceiver's bit clock and
// needs no calibration. The chain is the paper's:
//   data_generator -> timing parameters {T, L}
//   frame_encoder  -> one 32-bit frame per fabric clock
//   tx_fifo        -> transmit FIFO (fabric clock)
//   tx_buffer      -> dual-clock buffer, fabric clock to bit clock
//   serializer     -> tx_serial, MSB of each frame first
// The transceiver's 8B/10B encoder is bypassed, as in the paper, and its
// PLL, output driver and receive path are outside this module: the bit
// clock and the fabric clock are inputs (the fabric clock must be the bit
// clock divided by 32, 312.5 MHz at 10 Gb/s) and tx_serial feeds the output
// driver. Configuration is a plain struct with start/stop strobes and a
// write port to the 4k x 12 parameter table, all on the fabric clock.
// Latency from the first frame of a run to the line is a few fabric clocks
// (FIFO, buffer synchronisers and the serializer's load slot).
module dtc_top
  import dtc_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  ser_clk,
  input  logic                  ser_rst_n,
  input  dtc_cfg_t              cfg,
  input  logic                  start,
  input  logic                  stop,
  input  logic                  lut_we,
  input  logic [LUT_AW-1:0]     lut_waddr,
  input  logic [LUT_DW-1:0]     lut_wdata,
  output logic                  busy,
  output logic                  done,
  output logic                  tx_serial,
  output logic                  underflow,
  output logic [4:0]            fifo_level
);

  timing_param_t        prm;
  logic                 p_valid, p_ready;
  logic                 f_valid, f_ready;
  logic [FRAME_W-1:0]   frame;
  logic                 q_valid, q_ready;
  logic [FRAME_W-1:0]   q_data;
  logic                 b_full, b_empty, b_take;
  logic [FRAME_W-1:0]   b_data;

  data_generator u_gen (
    .clk      (clk),
    .rst_n    (rst_n),
    .cfg      (cfg),
    .start    (start),
    .stop     (stop),
    .lut_we   (lut_we),
    .lut_waddr(lut_waddr),
    .lut_wdata(lut_wdata),
    .p_valid  (p_valid),
    .p_ready  (p_ready),
    .p        (prm),
    .busy     (busy),
    .done     (done)
  );

  frame_encoder #(.W(FRAME_W)) u_enc (
    .clk       (clk),
    .rst_n     (rst_n),
    .p_valid   (p_valid),
    .p_ready   (p_ready),
    .p         (prm),
    .f_valid   (f_valid),
    .f_ready   (f_ready),
    .frame     (frame),
    .frame_case()
  );

  tx_fifo #(.DW(FRAME_W), .DEPTH(16)) u_fifo (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (f_valid),
    .in_ready (f_ready),
    .in_data  (frame),
    .out_valid(q_valid),
    .out_ready(q_ready),
    .out_data (q_data),
    .level    (fifo_level)
  );

  assign q_ready = !b_full;

  tx_buffer #(.DW(FRAME_W), .AW(3)) u_buf (
    .wclk  (clk),
    .wrst_n(rst_n),
    .wen   (q_valid),
    .wdata (q_data),
    .wfull (b_full),
    .rclk  (ser_clk),
    .rrst_n(ser_rst_n),
    .ren   (b_take),
    .rdata (b_data),
    .rempty(b_empty)
  );

  serializer #(.W(FRAME_W)) u_ser (
    .ser_clk   (ser_clk),
    .ser_rst_n (ser_rst_n),
    .word      (b_data),
    .word_avail(!b_empty),
    .word_take (b_take),
    .tx_bit    (tx_serial),
    .underflow (underflow)
  );

endmodule
