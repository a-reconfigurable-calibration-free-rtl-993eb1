// tb_random_intervals: the random-interval experiment run end to end through
// the whole converter at its default sizes: 1,000,000 pulses with
// pseudo-random widths are decoded from the serial line. The table holds
// LUT[a] = a >> 6, so with t_base = 10 the width is 10 + (rnd >> 6), one of
// 64 values from 1.0 ns to 7.3 ns, and the length is 80 bits. Each decoded
// pulse must match, bit for bit, the parameter the generator handed to the
// encoder, every spacing must be exactly 80 bits, and the histogram of the
// 64 widths must be flat: every bin within 4 percent of 15625.
`timescale 1ps/1ps
module tb_random_intervals;
  import dtc_pkg::*;

  localparam int NPULSES = 1_000_000;
  localparam int LEN     = 80;
  localparam int TBASE   = 10;

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
    #20_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // widths handed to the encoder, in order
  int exp_q [$];
  always @(posedge clk) begin
    if (rst_n && dut.u_gen.p_valid && dut.u_gen.p_ready && dut.u_gen.p.t != 0)
      exp_q.push_back(int'(dut.u_gen.p.t));
  end

  int     hist [64];
  int     pulses = 0, mismatches = 0, bad_period = 0;
  longint bit_idx = 0, rise_idx = 0, prev_rise = -1;
  bit     prev_bit = 0;

  always @(posedge ser_clk) begin
    if (ser_rst_n) begin
      bit_idx++;
      if (tx_serial && !prev_bit) begin
        rise_idx = bit_idx;
        if (prev_rise >= 0 && pulses < NPULSES && rise_idx - prev_rise != LEN) bad_period++;
        prev_rise = rise_idx;
      end
      if (!tx_serial && prev_bit && pulses < NPULSES) begin
        int w, e;
        w = int'(bit_idx - rise_idx);
        e = (exp_q.size() > 0) ? exp_q.pop_front() : -1;
        if (w != e) mismatches++;
        if (w >= TBASE && w < TBASE + 64) hist[w - TBASE]++;
        pulses++;
      end
      prev_bit = tx_serial;
    end
  end

  initial begin
    rst_n = 1'b0; ser_rst_n = 1'b0; start = 1'b0; stop = 1'b0;
    lut_we = 1'b0; lut_waddr = '0; lut_wdata = '0; cfg = '0;
    #10_000;
    @(negedge clk);
    rst_n = 1'b1;
    ser_rst_n = 1'b1;
    for (int a = 0; a < 4096; a++) begin
      @(negedge clk);
      lut_we = 1'b1; lut_waddr = 12'(a); lut_wdata = 12'(a >> 6);
    end
    @(negedge clk) lut_we = 1'b0;

    cfg.mode = MODE_RANDOM; cfg.t_fixed = '0; cfg.l_len = PW'(LEN); cfg.count = '0;
    cfg.k = '0; cfg.t_base = PW'(TBASE);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (pulses < NPULSES) @(negedge clk);
    stop = 1'b1;
    @(negedge clk);
    stop = 1'b0;

    checks++;
    if (mismatches != 0) begin failures++; $display("%0d pulses differ from their parameters", mismatches); end
    checks++;
    if (bad_period != 0) begin failures++; $display("%0d spacings differ from %0d bits", bad_period, LEN); end
    for (int b = 0; b < 64; b++) begin
      checks++;
      if (hist[b] < NPULSES / 64 * 96 / 100 || hist[b] > NPULSES / 64 * 104 / 100) begin
        failures++;
        $display("width %0d bits: %0d pulses, expected about %0d", TBASE + b, hist[b], NPULSES / 64);
      end
    end
    begin
      int lo, hi;
      lo = hist[0]; hi = hist[0];
      foreach (hist[b]) begin
        if (hist[b] < lo) lo = hist[b];
        if (hist[b] > hi) hi = hist[b];
      end
      $display("%0d pulses, widths %0d..%0d bits, bins hold %0d..%0d", pulses, TBASE, TBASE + 63, lo, hi);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
