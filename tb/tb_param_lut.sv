// tb_param_lut: self-checking testbench of param_lut. Checks the table reads
// zero before any write, fills all 4096 words with random data, reads them
// back in random order with the one-clock read latency, and checks a read
// of the address being written returns the old word.
`timescale 1ns/1ps
module tb_param_lut;
  logic clk = 1'b0;
  logic we;
  logic [11:0] waddr, raddr;
  logic [11:0] wdata, rdata;
  logic [11:0] model [4096];
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  param_lut #(.AW(12), .DW(12)) dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
                                     .raddr(raddr), .rdata(rdata));

  initial begin : watchdog
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1'b0; waddr = '0; wdata = '0; raddr = '0;
    for (int a = 0; a < 4096; a += 97) begin
      raddr = 12'(a);
      @(posedge clk); #0.1;
      checks++;
      if (rdata !== 12'd0) begin failures++; $display("addr %0d not zero at start", a); end
    end
    for (int a = 0; a < 4096; a++) begin
      model[a] = 12'($urandom());
      we = 1'b1; waddr = 12'(a); wdata = model[a];
      @(posedge clk); #0.1;
    end
    we = 1'b0;
    for (int s = 0; s < 8000; s++) begin
      int a;
      a = $urandom_range(0, 4095);
      raddr = 12'(a);
      @(posedge clk); #0.1;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        if (failures < 10) $display("addr %0d read %h expected %h", a, rdata, model[a]);
      end
    end
    // read during write of the same address: old data first
    raddr = 12'd5; waddr = 12'd5; wdata = ~model[5]; we = 1'b1;
    @(posedge clk); #0.1;
    we = 1'b0;
    checks++;
    if (rdata !== model[5]) begin failures++; $display("read-during-write returned new data"); end
    @(posedge clk); #0.1;
    checks++;
    if (rdata !== ~model[5]) begin failures++; $display("write lost"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
