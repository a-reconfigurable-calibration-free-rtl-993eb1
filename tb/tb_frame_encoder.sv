// tb_frame_encoder: self-checking testbench of frame_encoder. A reference
// bit queue is built directly from the definition of a timing signal: after
// the 32 zeros of the reset frame, every parameter the encoder takes appends
// T ones and L-T zeros. Every frame the encoder emits is compared, MSB
// first, with the next 32 bits of that queue. Parameters are random, with
// lengths of exactly 32 and 64 mixed in so that all three cases of the
// compositing rule (L_temp equal to, above and below W) occur; the
// downstream ready is random in the second half. With ready held high the
// encoder must deliver one frame every clock.
`timescale 1ns/1ps
module tb_frame_encoder;
  import dtc_pkg::*;
  localparam int W = 32;

  logic clk = 1'b0;
  logic rst_n;
  logic p_valid, p_ready, f_valid, f_ready;
  timing_param_t p;
  logic [W-1:0] frame;
  logic [1:0] frame_case;
  int checks = 0, failures = 0;
  bit exp_q [$];
  int case_cnt [4];
  int frames = 0, cycles = 0;
  bit throttle = 0;

  always #1 clk = ~clk;

  frame_encoder #(.W(W)) dut (.clk(clk), .rst_n(rst_n), .p_valid(p_valid), .p_ready(p_ready),
                              .p(p), .f_valid(f_valid), .f_ready(f_ready), .frame(frame),
                              .frame_case(frame_case));

  function automatic timing_param_t rand_param();
    timing_param_t r;
    int l, t;
    case ($urandom_range(0, 5))
      0: l = 32;
      1: l = 64;
      2: l = $urandom_range(32, 40);
      3: l = $urandom_range(32, 200);
      default: l = $urandom_range(32, 3000);
    endcase
    case ($urandom_range(0, 3))
      0: t = 0;
      1: t = l;
      default: t = $urandom_range(0, l);
    endcase
    r.t = PW'(t);
    r.l = PW'(l);
    return r;
  endfunction

  task automatic push_param(timing_param_t q);
    for (int i = 0; i < int'(q.l); i++) exp_q.push_back(i < int'(q.t));
  endtask

  initial begin : watchdog
    repeat (400_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // parameter source: valid most of the time
  always @(posedge clk) begin
    if (!rst_n) begin
      p_valid <= 1'b1;
      p       <= rand_param();
    end else begin
      if (p_valid && p_ready) begin
        push_param(p);
        p <= rand_param();
      end
      p_valid <= ($urandom_range(0, 9) != 0);
    end
  end

  // frame sink and checker
  always @(posedge clk) begin
    if (rst_n) begin
      cycles++;
      f_ready <= throttle ? ($urandom_range(0, 2) != 0) : 1'b1;
      if (f_valid && f_ready) begin
        logic [W-1:0] e;
        frames++;
        case_cnt[frame_case]++;
        for (int i = W - 1; i >= 0; i--) e[i] = exp_q.size() > 0 ? exp_q.pop_front() : 1'bx;
        checks++;
        if (frame !== e) begin
          failures++;
          if (failures < 10) $display("frame %0d: got %h expected %h (case %0d)", frames, frame, e, frame_case);
        end
      end
    end
  end

  initial begin
    rst_n = 1'b0;
    f_ready = 1'b1;
    for (int i = 0; i < W; i++) exp_q.push_back(1'b0);
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1'b1;
    // throughput: with p_valid mostly high and ready high, count frames
    force p_valid = 1'b1;
    repeat (1000) @(posedge clk);
    #0.1;
    checks++;
    // frames counted so far: the first frame appears one clock after reset
    if (frames < 998) begin failures++; $display("throughput: %0d frames in 1000 clocks", frames); end
    release p_valid;
    repeat (40000) @(posedge clk);
    throttle = 1;
    repeat (40000) @(posedge clk);
    for (int c = 1; c <= 3; c++) begin
      checks++;
      if (case_cnt[c] == 0) begin failures++; $display("case %0d never occurred", c); end
    end
    $display("frames %0d, cases %0d/%0d/%0d", frames, case_cnt[1], case_cnt[2], case_cnt[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
