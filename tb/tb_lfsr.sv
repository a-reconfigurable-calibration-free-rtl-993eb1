// tb_lfsr: self-checking testbench of lfsr. Instantiates one LFSR of every
// length used by the random number generator (9..20 stages, taps from
// dtc_pkg) and checks, for each: the state returns to the seed after exactly
// 2^n - 1 steps and not before (maximal length); the serial output A_1 is
// the MSB sequence delayed by n-1 steps; msb_next predicts the next msb; the
// state holds while en is low.
`timescale 1ns/1ps
module tb_lfsr;
  import dtc_pkg::*;

  localparam int NL = 12;
  logic clk = 1'b0;
  logic rst_n;
  logic en;
  int   checks = 0;
  int   failures = 0;

  always #1 clk = ~clk;

  logic [NL-1:0] msb, msb_next, sout;
  logic [31:0]   st [NL];

  for (genvar j = 0; j < NL; j++) begin : g
    localparam int unsigned LEN = lfsr_len(j);
    logic [LEN-1:0] s;
    lfsr #(.N(LEN), .TAPS(lfsr_taps(LEN))) u (
      .clk(clk), .rst_n(rst_n), .en(en), .state(s),
      .msb(msb[j]), .msb_next(msb_next[j]), .out(sout[j]));
    assign st[j] = 32'(s);
  end

  // history of msb bits for the delay check
  logic [NL-1:0] hist [64];
  int            first_ret [NL];
  logic [31:0]   seed [NL];
  logic [NL-1:0] prev_next;

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0;
    en    = 1'b0;
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1'b1;
    for (int j = 0; j < NL; j++) begin
      seed[j] = st[j];
      first_ret[j] = 0;
    end
    // hold check
    repeat (5) @(posedge clk);
    for (int j = 0; j < NL; j++) begin
      checks++;
      if (st[j] != seed[j]) begin failures++; $display("LFSR %0d moved with en low", j); end
    end
    #0.1 en = 1'b1;
    for (int step = 1; step <= (1 << 20); step++) begin
      prev_next = msb_next;
      hist[step % 64] = msb;
      @(posedge clk);
      #0.1;
      for (int j = 0; j < NL; j++) begin
        int unsigned n;
        n = lfsr_len(j);
        if (step < 200) begin
          checks++;
          if (msb[j] != prev_next[j]) begin failures++; $display("msb_next wrong lfsr %0d step %0d", j, step); end
          if (step >= int'(n)) begin
            checks++;
            // out at this step equals msb from n-1 steps earlier
            if (sout[j] != hist[(step - int'(n) + 2) % 64][j]) begin
              failures++; $display("delay wrong lfsr %0d step %0d", j, step);
            end
          end
        end
        if (first_ret[j] == 0 && st[j] == seed[j]) first_ret[j] = step;
      end
    end
    for (int j = 0; j < NL; j++) begin
      int unsigned n;
      n = lfsr_len(j);
      checks++;
      if (first_ret[j] != (1 << n) - 1) begin
        failures++;
        $display("LFSR n=%0d period %0d, expected %0d", n, first_ret[j], (1 << n) - 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
