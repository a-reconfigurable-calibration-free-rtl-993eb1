// tb_frame_linearity: linearity of the synthesised pulse widths, run through
// the whole converter at its default sizes (the data-frame DNL/INL
// experiment). For every code T = 1..64 bits a fixed sequence of 33 pulses
// with length L = 33 (65 for codes above 32) is sent; because L = 1 mod 32, successive pulses start at
// every one of the 32 bit positions of a frame, so each code is exercised
// across all frame alignments and across frame boundaries. Every pulse width
// is measured on the line in picoseconds (100 ps bit clock). From the mean
// width of each code the testbench computes
//   DNL(T) = (w(T+1) - w(T)) / 100 ps - 1,   INL(T) = w(T) / 100 ps - T,
// prints their extremes and requires them to lie within the measured bounds
// reported for the hardware (DNL +-0.02 LSB, INL -0.04/+0.03 LSB). In
// simulation both are exactly zero; the check guards the encoding, not the
// analog output.
`timescale 1ps/1ps
module tb_frame_linearity;
  import dtc_pkg::*;

  localparam int MAXT = 64;
  localparam int REPS = 33;

  logic clk = 1'b0, ser_clk = 1'b0;
  logic rst_n, ser_rst_n, start, stop, lut_we;
  logic [11:0] lut_waddr, lut_wdata;
  logic busy, done, tx_serial, underflow;
  logic [4:0] fifo_level;
  dtc_cfg_t cfg;
  int checks = 0, failures = 0;

  always #50 ser_clk = ~ser_clk;
  initial begin #20; forever #1550 clk = ~clk; end

  dtc_top dut (.clk(clk), .rst_n(rst_n), .ser_clk(ser_clk), .ser_rst_n(ser_rst_n), .cfg(cfg),
    .start(start), .stop(stop), .lut_we(lut_we), .lut_waddr(lut_waddr), .lut_wdata(lut_wdata),
    .busy(busy), .done(done), .tx_serial(tx_serial), .underflow(underflow),
    .fifo_level(fifo_level));

  initial begin : watchdog
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // line decoder: widths in ps of the pulses of the current code
  bit     prev_bit = 0;
  time    rise_t;
  real    sum_ps;
  int     n_pulses;
  int     offsets_seen [32];
  longint bit_idx = 0;

  always @(posedge ser_clk) begin
    if (ser_rst_n) begin
      bit_idx++;
      if (tx_serial && !prev_bit) begin
        rise_t = $time;
        offsets_seen[bit_idx % 32] = 1;
      end
      if (!tx_serial && prev_bit) begin
        sum_ps += real'($time - rise_t);
        n_pulses++;
      end
      prev_bit = tx_serial;
    end
  end

  real w [MAXT+1];
  real dnl_min = 0.0, dnl_max = 0.0, inl_min = 0.0, inl_max = 0.0;

  initial begin
    rst_n = 1'b0; ser_rst_n = 1'b0; start = 1'b0; stop = 1'b0;
    lut_we = 1'b0; lut_waddr = '0; lut_wdata = '0; cfg = '0;
    #10_000;
    @(negedge clk);
    rst_n = 1'b1;
    ser_rst_n = 1'b1;
    repeat (50) @(negedge clk);
    for (int t = 1; t <= MAXT; t++) begin
      sum_ps = 0.0;
      n_pulses = 0;
      foreach (offsets_seen[i]) offsets_seen[i] = 0;
      cfg.mode = MODE_FIXED_SEQ; cfg.t_fixed = PW'(t);
      cfg.count = CNT_W'(REPS); cfg.k = '0; cfg.t_base = '0;
      // L is 1 more than a multiple of 32 and longer than T, so each pulse
      // starts one bit later in the frame than the one before
      cfg.l_len = (t < 33) ? PW'(33) : PW'(65);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (!done) @(negedge clk);
      repeat (60) @(negedge clk);
      checks++;
      if (n_pulses != REPS) begin
        failures++;
        $display("code %0d: %0d pulses, expected %0d", t, n_pulses, REPS);
      end
      w[t] = (n_pulses > 0) ? sum_ps / n_pulses : 0.0;
      begin
        int n_off;
        n_off = 0;
        foreach (offsets_seen[i]) n_off += offsets_seen[i];
        checks++;
        if (n_off != 32) begin failures++; $display("code %0d: only %0d frame offsets", t, n_off); end
      end
    end
    for (int t = 1; t <= MAXT; t++) begin
      real inl;
      inl = w[t] / 100.0 - real'(t);
      if (inl < inl_min) inl_min = inl;
      if (inl > inl_max) inl_max = inl;
      if (t < MAXT) begin
        real dnl;
        dnl = (w[t+1] - w[t]) / 100.0 - 1.0;
        if (dnl < dnl_min) dnl_min = dnl;
        if (dnl > dnl_max) dnl_max = dnl;
      end
    end
    $display("DNL %0.4f .. %0.4f LSB, INL %0.4f .. %0.4f LSB over codes 1..%0d", dnl_min, dnl_max,
             inl_min, inl_max, MAXT);
    checks++;
    if (dnl_min < -0.02 || dnl_max > 0.02) begin failures++; $display("DNL out of bounds"); end
    checks++;
    if (inl_min < -0.04 || inl_max > 0.03) begin failures++; $display("INL out of bounds"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
