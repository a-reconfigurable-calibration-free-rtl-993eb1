// tb_serializer: self-checking testbench of serializer. A word source
// offers random 32-bit words, sometimes withholding them. The checker
// expects, for every load slot, either the word taken (MSB first) or 32
// zeros with underflow high, and verifies that word_take comes exactly every
// 32 bit clocks, i.e. one word per 3.2 ns at 10 Gb/s.
`timescale 1ps/1ps
module tb_serializer;
  localparam int W = 32;
  logic ser_clk = 1'b0;
  logic ser_rst_n, word_avail, word_take, tx_bit, underflow;
  logic [W-1:0] word;
  bit exp_q [$];
  int checks = 0, failures = 0;
  int takes = 0, unders = 0, last_load = -1, cyc = 0;
  bit started = 0;

  always #50 ser_clk = ~ser_clk;

  serializer #(.W(W)) dut (.ser_clk(ser_clk), .ser_rst_n(ser_rst_n), .word(word),
    .word_avail(word_avail), .word_take(word_take), .tx_bit(tx_bit), .underflow(underflow));

  initial begin : watchdog
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge ser_clk) begin
    if (ser_rst_n) begin
      cyc++;
      // tx_bit now shows the bit decided at the previous edge
      if (started) begin
        checks++;
        if (exp_q.size() == 0 || tx_bit !== exp_q.pop_front()) begin
          failures++;
          if (failures < 10) $display("cycle %0d: bit mismatch", cyc);
        end
      end
      if (word_take || underflow) begin
        if (last_load >= 0) begin
          checks++;
          if (cyc - last_load != W) begin failures++; $display("load spacing %0d", cyc - last_load); end
        end
        last_load = cyc;
        started = 1;
        for (int i = W - 1; i >= 0; i--) exp_q.push_back(word_take ? word[i] : 1'b0);
        if (word_take) takes++; else unders++;
      end
      checks++;
      if (word_take && underflow) begin failures++; $display("take and underflow together"); end
      word       <= $urandom();
      word_avail <= ($urandom_range(0, 7) != 0);
    end
  end

  initial begin
    ser_rst_n = 1'b0; word = '0; word_avail = 1'b0;
    #500;
    @(posedge ser_clk) #1 ser_rst_n = 1'b1;
    #5_000_000;
    checks++;
    if (takes < 100 || unders == 0) begin failures++; $display("takes %0d underflows %0d", takes, unders); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
