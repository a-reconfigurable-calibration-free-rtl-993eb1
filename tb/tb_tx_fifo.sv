// tb_tx_fifo: self-checking testbench of tx_fifo. Random pushes and pops
// against a queue model; checks data order, the level output, that in_ready
// falls exactly when 16 words are held and out_valid when none are, and that
// a full FIFO keeps its contents while the reader is stopped.
`timescale 1ns/1ps
module tb_tx_fifo;
  logic clk = 1'b0;
  logic rst_n, in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_data, out_data;
  logic [4:0] level;
  logic [31:0] model [$];
  int checks = 0, failures = 0;
  int full_seen = 0;

  always #1 clk = ~clk;

  tx_fifo #(.DW(32), .DEPTH(16)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid),
    .in_ready(in_ready), .in_data(in_data), .out_valid(out_valid), .out_ready(out_ready),
    .out_data(out_data), .level(level));

  initial begin : watchdog
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; out_ready = 1'b0; in_data = '0;
    repeat (2) @(posedge clk);
    #0.1 rst_n = 1'b1;
    for (int s = 0; s < 30000; s++) begin
      int phase;
      phase = (s / 1000) % 3;  // 0: mostly write, 1: mostly read, 2: balanced
      in_valid  = $urandom_range(0, 9) < (phase == 0 ? 8 : (phase == 1 ? 2 : 5));
      out_ready = $urandom_range(0, 9) < (phase == 1 ? 8 : (phase == 0 ? 2 : 5));
      in_data   = $urandom();
      #0.1;
      checks++;
      if (level !== 5'(model.size()) || in_ready !== (model.size() < 16) ||
          out_valid !== (model.size() > 0)) begin
        failures++;
        if (failures < 10) $display("step %0d flags: level %0d model %0d", s, level, model.size());
      end
      if (model.size() == 16) full_seen++;
      if (out_valid && model.size() > 0) begin
        checks++;
        if (out_data !== model[0]) begin failures++; if (failures < 10) $display("data %h exp %h", out_data, model[0]); end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      #0.1;
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("FIFO never became full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
