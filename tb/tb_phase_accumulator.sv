// tb_phase_accumulator: self-checking testbench of phase_accumulator. Drives
// random K, enable and clear and compares phase and phase_next with a model
// that adds K modulo 2^32; also checks that K = 2^32/9 (rounded up) sweeps
// the top 12 bits through 9 table addresses before wrapping, as used for a
// nine-signal timing sequence.
`timescale 1ns/1ps
module tb_phase_accumulator;
  logic clk = 1'b0;
  logic rst_n, clear, en;
  logic [31:0] k, phase, phase_next;
  logic [31:0] model;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  phase_accumulator #(.D(32)) dut (.clk(clk), .rst_n(rst_n), .clear(clear), .en(en),
                                   .k(k), .phase(phase), .phase_next(phase_next));

  initial begin : watchdog
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; clear = 1'b0; en = 1'b0; k = '0; model = '0;
    repeat (2) @(posedge clk);
    #0.1 rst_n = 1'b1;
    for (int s = 0; s < 20000; s++) begin
      k     = $urandom();
      en    = $urandom_range(0, 1);
      clear = ($urandom_range(0, 99) == 0);
      #0.1;
      checks++;
      if (phase !== model || phase_next !== model + k) begin
        failures++;
        if (failures < 10) $display("step %0d phase %h exp %h", s, phase, model);
      end
      @(posedge clk);
      if (clear) model = '0;
      else if (en) model = model + k;
      #0.1;
    end
    // nine-step sweep
    clear = 1'b1; en = 1'b0; k = 32'd477218589;
    @(posedge clk); #0.1 clear = 1'b0; en = 1'b1;
    for (int s = 0; s < 9; s++) begin
      checks++;
      if (phase[31:20] !== 12'((64'(s) * 64'd477218589) >> 20)) begin
        failures++;
        $display("sweep step %0d address %0d", s, phase[31:20]);
      end
      @(posedge clk); #0.1;
    end
    checks++;
    if (phase[31:20] !== 12'd0) begin failures++; $display("sweep did not wrap: %0d", phase[31:20]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
