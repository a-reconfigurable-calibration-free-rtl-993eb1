// tb_data_generator: self-checking testbench of data_generator. The
// parameter sink takes parameters with a random ready and compares them
// with values worked out here:
//   single mode      one parameter {t_fixed, l_len}, then the idle {0, 32};
//   fixed sequence   exactly 'count' parameters, 'done' after the last;
//   clipping         L below 32 is raised to 32, T above L lowered to L;
//   timing sequence  T = t_base + LUT[(n*K mod 2^32) >> 20] for the n-th
//                    parameter, nine steps per table sweep;
//   random           1,000,000 intervals drawn through a ramp table must be
//                    spread evenly over 64 buckets (within 3 percent), the
//                    random-interval experiment of the paper;
//   stop             an endless run ends on stop.
// It also checks that one parameter per clock is delivered when the sink is
// always ready.
`timescale 1ns/1ps
module tb_data_generator;
  import dtc_pkg::*;

  logic clk = 1'b0;
  logic rst_n, start, stop, lut_we, p_valid, p_ready, busy, done;
  logic [11:0] lut_waddr, lut_wdata;
  dtc_cfg_t cfg;
  timing_param_t p;
  int checks = 0, failures = 0;
  logic [11:0] lut_model [4096];
  bit rand_ready = 1;

  always #1 clk = ~clk;

  data_generator dut (.clk(clk), .rst_n(rst_n), .cfg(cfg), .start(start), .stop(stop),
    .lut_we(lut_we), .lut_waddr(lut_waddr), .lut_wdata(lut_wdata), .p_valid(p_valid),
    .p_ready(p_ready), .p(p), .busy(busy), .done(done));

  initial begin : watchdog
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) p_ready = rand_ready ? ($urandom_range(0, 3) != 0) : 1'b1;

  // wait for the next transferred parameter
  task automatic take(output timing_param_t q);
    do @(posedge clk); while (!(p_valid && p_ready));
    q = p;
  endtask

  task automatic expect_param(string what, int t, int l);
    timing_param_t q;
    take(q);
    checks++;
    if (int'(q.t) != t || int'(q.l) != l) begin
      failures++;
      if (failures < 20) $display("%s: got T=%0d L=%0d, expected T=%0d L=%0d", what, q.t, q.l, t, l);
    end
  endtask

  task automatic do_start(mode_e m, int t, int l, int cnt, logic [31:0] k, int tb);
    @(negedge clk);
    cfg.mode = m; cfg.t_fixed = PW'(t); cfg.l_len = PW'(l); cfg.count = CNT_W'(cnt);
    cfg.k = k; cfg.t_base = PW'(tb);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
  endtask

  task automatic write_lut(int a, int v);
    @(negedge clk);
    lut_we = 1'b1; lut_waddr = 12'(a); lut_wdata = 12'(v); lut_model[a] = 12'(v);
    @(negedge clk);
    lut_we = 1'b0;
  endtask

  int bucket [64];
  int n_bad;

  initial begin
    rst_n = 1'b0; start = 1'b0; stop = 1'b0; lut_we = 1'b0; lut_waddr = '0; lut_wdata = '0;
    cfg = '0;
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1'b1;

    // idle parameters before any start
    expect_param("idle", 0, 32);

    // single timing signal: 1 ns interval in a 6.4 ns length
    do_start(MODE_SINGLE, 10, 64, 0, 0, 0);
    expect_param("single", 10, 64);
    expect_param("after single", 0, 32);
    checks++;
    if (!done || busy) begin failures++; $display("single: done=%0d busy=%0d", done, busy); end

    // fixed sequence of 1000 intervals (the largest the paper names)
    do_start(MODE_FIXED_SEQ, 400, 1000, 1000, 0, 0);
    for (int i = 0; i < 1000; i++) expect_param("fixed", 400, 1000);
    expect_param("after fixed", 0, 32);
    checks++;
    if (!done) begin failures++; $display("fixed: done not set"); end

    // 40 us interval, the top of the range
    do_start(MODE_SINGLE, 400000, 400100, 0, 0, 0);
    expect_param("40us", 400000, 400100);

    // clipping
    do_start(MODE_FIXED_SEQ, 50, 10, 2, 0, 0);
    expect_param("clip", 32, 32);
    expect_param("clip", 32, 32);

    // table: entry a holds a * 9 / 4096 * 16 (nine steps of 16 bits)
    for (int a = 0; a < 4096; a++) write_lut(a, ((a * 9) >> 12) * 16);

    // timing sequence, nine signals per sweep, 27 signals
    do_start(MODE_TIMING_SEQ, 0, 200, 27, 32'd477218589, 20);
    for (int n = 0; n < 27; n++) begin
      logic [31:0] ph;
      ph = 32'(64'(n) * 64'd477218589);
      expect_param("timing seq", 20 + int'(lut_model[ph[31:20]]), 200);
    end
    @(posedge clk); #0.1;
    checks++;
    if (!done) begin failures++; $display("timing seq: done not set"); end

    // one parameter per clock when the sink is always ready
    rand_ready = 0;
    do_start(MODE_FIXED_SEQ, 5, 40, 100, 0, 0);
    @(posedge clk);
    begin
      int got;
      got = 0;
      repeat (100) begin
        @(posedge clk);
        if (p_valid && p_ready && busy) got++;
      end
      checks++;
      if (got != 100) begin failures++; $display("rate: %0d parameters in 100 clocks", got); end
    end

    // random intervals through a ramp table: entry a holds a
    for (int a = 0; a < 4096; a++) write_lut(a, a);
    do_start(MODE_RANDOM, 0, 5000, 0, 0, 100);
    n_bad = 0;
    for (int i = 0; i < 1_000_000; i++) begin
      timing_param_t q;
      take(q);
      if (q.t < 100 || q.t > 100 + 4095 || q.l != 5000) n_bad++;
      else bucket[(q.t - 100) >> 6]++;
    end
    checks++;
    if (n_bad != 0) begin failures++; $display("random: %0d intervals out of range", n_bad); end
    for (int b = 0; b < 64; b++) begin
      checks++;
      if (bucket[b] < 15625 * 97 / 100 || bucket[b] > 15625 * 103 / 100) begin
        failures++; $display("random: bucket %0d holds %0d, expected about 15625", b, bucket[b]);
      end
    end
    // stop ends an endless run
    @(negedge clk); stop = 1'b1; @(negedge clk); stop = 1'b0;
    checks++;
    if (busy) begin failures++; $display("stop: still busy"); end
    expect_param("after stop", 0, 32);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
