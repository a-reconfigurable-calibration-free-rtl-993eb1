// tb_tx_buffer: self-checking testbench of tx_buffer. The write clock
// (3.2 ns) and the read clock (0.5 ns, unrelated phase) run freely; the
// writer pushes a counting sequence whenever the buffer is not full and the
// reader pops at random. Every word read must be the next in sequence.
// A phase with the reader stopped checks that wfull rises after 8 words and
// that nothing is lost; a phase with the writer stopped checks rempty.
`timescale 1ps/1ps
module tb_tx_buffer;
  logic wclk = 1'b0, rclk = 1'b0;
  logic wrst_n, rrst_n, wen, ren, wfull, rempty;
  logic [31:0] wdata, rdata;
  logic [31:0] next_wr = 0, next_rd = 0;
  int checks = 0, failures = 0;
  bit writer_on = 1, reader_on = 1;
  int full_seen = 0, empty_seen = 0, reads = 0;

  always #1600 wclk = ~wclk;
  initial begin #137; forever #250 rclk = ~rclk; end

  tx_buffer #(.DW(32), .AW(3)) dut (.wclk(wclk), .wrst_n(wrst_n), .wen(wen), .wdata(wdata),
    .wfull(wfull), .rclk(rclk), .rrst_n(rrst_n), .ren(ren), .rdata(rdata), .rempty(rempty));

  initial begin : watchdog
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge wclk) begin
    if (!wrst_n) begin
      wen <= 1'b0; wdata <= '0;
    end else begin
      if (wen && !wfull) next_wr <= next_wr + 1;
      if (wen && !wfull) begin
        wen   <= writer_on && ($urandom_range(0, 3) != 0);
        wdata <= next_wr + 1;
      end else begin
        wen   <= writer_on && ($urandom_range(0, 3) != 0);
        wdata <= next_wr;
      end
      if (wfull) full_seen++;
    end
  end

  always @(posedge rclk) begin
    if (!rrst_n) begin
      ren <= 1'b0;
    end else begin
      if (ren && !rempty) begin
        checks++;
        reads++;
        if (rdata !== next_rd) begin
          failures++;
          if (failures < 10) $display("read %h expected %h", rdata, next_rd);
        end
        next_rd <= next_rd + 1;
      end
      if (rempty) empty_seen++;
      ren <= reader_on && ($urandom_range(0, 15) == 0);
    end
  end

  initial begin
    wrst_n = 1'b0; rrst_n = 1'b0;
    #10000;
    @(posedge wclk) #1 wrst_n = 1'b1;
    @(posedge rclk) #1 rrst_n = 1'b1;
    #2_000_000;
    reader_on = 0;
    #200_000;
    checks++;
    if (!wfull) begin failures++; $display("wfull not set with reader stopped"); end
    checks++;
    if (next_wr - next_rd != 8 && next_wr - next_rd != 9) begin
      failures++; $display("buffer holds %0d words when full", next_wr - next_rd);
    end
    reader_on = 1;
    #2_000_000;
    writer_on = 0;
    #200_000;
    checks++;
    if (!rempty) begin failures++; $display("rempty not set with writer stopped"); end
    checks++;
    if (next_rd != next_wr) begin failures++; $display("words lost: wrote %0d read %0d", next_wr, next_rd); end
    checks++;
    if (reads < 300 || full_seen == 0 || empty_seen == 0) begin
      failures++; $display("coverage: reads %0d full %0d empty %0d", reads, full_seen, empty_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
