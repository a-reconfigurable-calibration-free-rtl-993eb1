// tb_prng: self-checking testbench of prng. A reference model keeps the
// twelve m-sequences as plain integers, each stepped by the recurrence
// a(t+n) = XOR of a(t+e) over the exponents e of its primitive polynomial
// (the polynomials are written out here, not taken from the package), and
// the 12-bit number is compared with rnd and rnd_next at every step under a
// random enable. It then draws 4096*64 numbers and checks that each of the
// 64 buckets of the top six bits holds its share within 5 percent.
`timescale 1ns/1ps
module tb_prng;
  localparam int NL = 12;
  logic clk = 1'b0;
  logic rst_n, en;
  logic [NL-1:0] rnd, rnd_next;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  prng #(.NUM(NL)) dut (.clk(clk), .rst_n(rst_n), .en(en), .rnd(rnd), .rnd_next(rnd_next));

  // polynomial exponents (besides n and 0) of the twelve LFSRs, n = 9..20
  int ex [NL][3] = '{'{5, -1, -1}, '{7, -1, -1}, '{9, -1, -1}, '{6, 4, 1},
                     '{4, 3, 1},   '{5, 3, 1},   '{14, -1, -1}, '{15, 13, 4},
                     '{14, -1, -1}, '{11, -1, -1}, '{6, 2, 1},  '{17, -1, -1}};
  // ref[j][i] = stage A_(i+1) of LFSR j, stage 0 oldest
  bit model [NL][20];
  int len [NL];

  function automatic bit fb_of(int j);
    bit f;
    f = model[j][0];
    for (int k = 0; k < 3; k++) if (ex[j][k] >= 0) f ^= model[j][ex[j][k]];
    return f;
  endfunction

  function automatic logic [NL-1:0] ref_rnd();
    logic [NL-1:0] r;
    for (int j = 0; j < NL; j++) r[j] = model[j][len[j]-1];
    return r;
  endfunction

  function automatic logic [NL-1:0] ref_next();
    logic [NL-1:0] r;
    for (int j = 0; j < NL; j++) r[j] = fb_of(j);
    return r;
  endfunction

  task automatic step_model();
    bit f [NL];
    for (int j = 0; j < NL; j++) f[j] = fb_of(j);
    for (int j = 0; j < NL; j++) begin
      for (int i = 0; i < len[j] - 1; i++) model[j][i] = model[j][i+1];
      model[j][len[j]-1] = f[j];
    end
  endtask

  int bucket [64];

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < NL; j++) begin
      len[j] = 9 + j;
      for (int i = 0; i < 20; i++) model[j][i] = 1'b1;
    end
    rst_n = 1'b0; en = 1'b0;
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1'b1;
    for (int s = 0; s < 50000; s++) begin
      en = $urandom_range(0, 3) != 0;
      checks++;
      if (rnd !== ref_rnd() || rnd_next !== ref_next()) begin
        failures++;
        if (failures < 10) $display("step %0d: rnd %h/%h next %h/%h", s, rnd, ref_rnd(), rnd_next, ref_next());
      end
      @(posedge clk);
      if (en) step_model();
      #0.1;
    end
    en = 1'b1;
    for (int s = 0; s < 4096 * 64; s++) begin
      @(posedge clk);
      #0.1;
      bucket[rnd[NL-1 -: 6]]++;
    end
    for (int b = 0; b < 64; b++) begin
      checks++;
      if (bucket[b] < 4096 * 95 / 100 || bucket[b] > 4096 * 105 / 100) begin
        failures++;
        $display("bucket %0d holds %0d, expected about 4096", b, bucket[b]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
