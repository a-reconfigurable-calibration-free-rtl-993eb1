// tb_dtc_top: end-to-end testbench of the whole converter at its default
// sizes (32-bit frames, 4k x 12 table, 10 Gb/s line). The bit clock runs at
// 100 ps; the fabric clock runs slightly fast (3.1 ns instead of 3.2 ns) so
// that the transmit FIFO fills and the encoder is throttled, as it would be
// by a transceiver that sets the pace. The line is decoded into pulses
// (rising edge, width in bits and in picoseconds) and compared with a
// scoreboard fed by the parameters the generator hands to the encoder: every
// non-idle parameter must appear as one pulse of exactly T bits, and when two
// signals follow each other directly their rising edges must be exactly L
// bits apart. The run covers:
//   single signal of 1 ns (the minimum interval) and of 40 us (the maximum);
//   two single signals 100 ps apart in width (the resolution);
//   a fixed-interval sequence; a nine-step timing sequence over two periods;
//   100 random intervals; an endless sequence ended by stop;
// and counts how often each mechanism occurred (each mode, the three frame
// compositing cases, transmit-buffer underflow at start-up, encoder stalls
// on a full FIFO, stop); one that never occurred counts as a failure.
`timescale 1ps/1ps
module tb_dtc_top;
  import dtc_pkg::*;

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
    #2_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_mode [4];
  int n_case [4];
  int n_underflow = 0, n_stall = 0, n_stop = 0, n_done = 0;

  // ---------------- scoreboard from the generator ----------------
  typedef struct { int t; int l; bit direct; } sig_t;
  sig_t exp_q [$];
  bit   prev_busy_param = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.u_gen.p_valid && dut.u_gen.p_ready) begin
        if (dut.u_gen.p.t != 0) begin
          exp_q.push_back('{t: int'(dut.u_gen.p.t), l: int'(dut.u_gen.p.l), direct: prev_busy_param});
          prev_busy_param = 1;
        end else begin
          prev_busy_param = 0;
        end
      end
      if (dut.u_enc.f_valid && dut.u_enc.f_ready) n_case[dut.u_enc.frame_case]++;
      if (dut.u_enc.f_valid && !dut.u_enc.f_ready) n_stall++;
      if (start) n_mode[cfg.mode]++;
      if (stop && busy) n_stop++;
    end
  end

  always @(posedge done) n_done++;

  // ---------------- line decoder ----------------
  longint bit_idx = 0;
  longint rise_idx = -1, prev_rise_idx = -1;
  time    rise_time;
  bit     prev_bit = 0;
  int     pulses = 0;
  sig_t   cur, prev_sig;
  time    last_width_ps;

  always @(posedge ser_clk) begin
    if (ser_rst_n) begin
      if (underflow) n_underflow++;
      bit_idx++;
      if (tx_serial && !prev_bit) begin
        rise_idx  = bit_idx;
        rise_time = $time;
      end
      if (!tx_serial && prev_bit) begin
        longint width;
        width = bit_idx - rise_idx;
        last_width_ps = $time - rise_time;
        pulses++;
        checks++;
        if (exp_q.size() == 0) begin
          failures++;
          $display("unexpected pulse of %0d bits at bit %0d", width, rise_idx);
        end else begin
          cur = exp_q.pop_front();
          if (width != longint'(cur.t)) begin
            failures++;
            if (failures < 20) $display("pulse %0d: width %0d bits, expected %0d", pulses, width, cur.t);
          end
          if (last_width_ps != time'(cur.t) * 100) begin
            failures++;
            if (failures < 20) $display("pulse %0d: %0d ps, expected %0d", pulses, last_width_ps, cur.t * 100);
          end
          if (cur.direct && prev_rise_idx >= 0) begin
            checks++;
            if (rise_idx - prev_rise_idx != longint'(prev_sig.l)) begin
              failures++;
              if (failures < 20) $display("pulse %0d: period %0d bits, expected %0d", pulses,
                                          rise_idx - prev_rise_idx, prev_sig.l);
            end
          end
          prev_sig      = cur;
          prev_rise_idx = rise_idx;
        end
      end
      prev_bit = tx_serial;
    end
  end

  // ---------------- host actions ----------------
  task automatic run(mode_e m, int t, int l, int cnt, logic [31:0] k, int tb, bit wait_done);
    @(negedge clk);
    cfg.mode = m; cfg.t_fixed = PW'(t); cfg.l_len = PW'(l); cfg.count = CNT_W'(cnt);
    cfg.k = k; cfg.t_base = PW'(tb);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    if (wait_done) begin
      while (!done) @(negedge clk);
      // let the FIFO, the buffer and the serializer drain: wait until
      // every signal handed to the encoder has been seen on the line
      begin
        int guard;
        guard = 0;
        while (exp_q.size() != 0 && guard < 20000) begin
          @(negedge clk);
          guard++;
        end
      end
      repeat (40) @(negedge clk);
    end
  endtask

  time w100, w101;
  int  widths_seen [int];

  initial begin
    rst_n = 1'b0; ser_rst_n = 1'b0; start = 1'b0; stop = 1'b0;
    lut_we = 1'b0; lut_waddr = '0; lut_wdata = '0; cfg = '0;
    #10_000;
    // both resets released together: the serializer meets an empty buffer
    @(negedge clk);
    rst_n = 1'b1;
    ser_rst_n = 1'b1;

    // table: nine steps of 16 bits across the address range
    for (int a = 0; a < 4096; a++) begin
      @(negedge clk);
      lut_we = 1'b1; lut_waddr = 12'(a); lut_wdata = 12'(((a * 9) >> 12) * 16);
    end
    @(negedge clk) lut_we = 1'b0;

    // minimum interval: 1 ns
    run(MODE_SINGLE, 10, 64, 0, 0, 0, 1);
    // resolution: 10.0 ns and 10.1 ns
    run(MODE_SINGLE, 100, 200, 0, 0, 0, 1);
    w100 = last_width_ps;
    run(MODE_SINGLE, 101, 200, 0, 0, 0, 1);
    w101 = last_width_ps;
    checks++;
    if (w101 - w100 != 100) begin failures++; $display("resolution: %0d ps step", w101 - w100); end
    // fixed-interval sequence
    run(MODE_FIXED_SEQ, 17, 50, 5, 0, 0, 1);
    // timing sequence: nine signals per period, two periods
    run(MODE_TIMING_SEQ, 0, 200, 18, 32'd477218589, 20, 1);
    // random intervals
    run(MODE_RANDOM, 0, 300, 100, 0, 20, 1);
    // maximum interval: 40 us
    run(MODE_SINGLE, 400000, 400100, 0, 0, 0, 1);
    checks++;
    if (last_width_ps != 64'd40_000_000) begin failures++; $display("40 us pulse lasted %0d ps", last_width_ps); end
    // endless sequence ended by stop
    run(MODE_FIXED_SEQ, 30, 90, 0, 0, 0, 0);
    repeat (200) @(negedge clk);
    stop = 1'b1;
    @(negedge clk);
    stop = 1'b0;
    repeat (200) @(negedge clk);

    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d signals never reached the line", exp_q.size()); end
    // mechanism coverage
    for (int m = 0; m < 4; m++) begin
      checks++;
      if (n_mode[m] == 0) begin failures++; $display("mode %0d never used", m); end
    end
    for (int c = 1; c <= 3; c++) begin
      checks++;
      if (n_case[c] == 0) begin failures++; $display("frame case %0d never occurred", c); end
    end
    checks++;
    if (n_underflow == 0) begin failures++; $display("no underflow seen"); end
    checks++;
    if (n_stall == 0) begin failures++; $display("encoder never stalled"); end
    checks++;
    if (n_stop == 0) begin failures++; $display("stop never used"); end
    checks++;
    if (n_done < 7) begin failures++; $display("done rose %0d times", n_done); end
    $display("pulses %0d; modes %0d/%0d/%0d/%0d; cases %0d/%0d/%0d; underflow %0d; stalls %0d; stops %0d",
             pulses, n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_case[1], n_case[2], n_case[3],
             n_underflow, n_stall, n_stop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
