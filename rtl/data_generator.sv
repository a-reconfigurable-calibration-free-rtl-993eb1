// data_generator: produces the stream of timing parameters {T, L} that the
// frame encoder turns into line bits. It holds the sequence generator
// (phase accumulator + parameter lookup table) and the pseudo-random number
// generator, and works in one of four modes set by the host:
//   MODE_SINGLE     one signal of interval t_fixed;
//   MODE_FIXED_SEQ  'count' signals of interval t_fixed (0 = until stop);
//   MODE_TIMING_SEQ interval t_base + LUT[phase[D-1:D-12]], the phase
//                   growing by K for every signal, so a sweep of the table
//                   takes 2^D/K signals and then repeats;
//   MODE_RANDOM     interval t_base + LUT[rnd], rnd a fresh 12-bit
//                   pseudo-random number for every signal.
// Every signal has length l_len. The four functions are the paper's; the mode
// encoding, the base-plus-table form of the interval, the use of the random
// number as a table address and the handshake are this design's choices.
// Parameters are clipped to L >= FRAME_W and T <= L, which the encoder needs
// (it closes at most one signal per frame).
// Interface and timing: 'start' (one clock) latches cfg; one clock later the
// first parameter is offered (the table read takes a cycle). A parameter
// moves when p_valid and p_ready are both high; the next one is offered in
// the following cycle, so one parameter per clock is possible. While idle,
// the idle parameter {T=0, L=FRAME_W} is offered so the line stays low.
// 'done' rises when the last parameter of a finite run has been taken.
module data_generator
  import dtc_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  dtc_cfg_t            cfg,
  input  logic                start,
  input  logic                stop,
  input  logic                lut_we,
  input  logic [LUT_AW-1:0]   lut_waddr,
  input  logic [LUT_DW-1:0]   lut_wdata,
  output logic                p_valid,
  input  logic                p_ready,
  output timing_param_t       p,
  output logic                busy,
  output logic                done
);

  dtc_cfg_t         cfg_q;
  logic             running_q;
  logic             prime_q;     // first cycle after start: table read in flight
  logic             endless_q;
  logic [CNT_W-1:0] remain_q;
  logic             done_q;

  logic                p_fire;
  logic [PHASE_D-1:0]  phase, phase_next;
  logic [LUT_AW-1:0]   rnd, rnd_next;
  logic [LUT_AW-1:0]   lut_raddr;
  logic [LUT_DW-1:0]   lut_rdata;
  logic                use_lut;
  logic [PW:0]         t_raw;
  logic [PW-1:0]       l_eff;

  assign use_lut = (cfg_q.mode == MODE_TIMING_SEQ) || (cfg_q.mode == MODE_RANDOM);
  assign p_valid = !(running_q && prime_q);
  assign p_fire  = p_valid && p_ready;

  // ---- sequence generator and random number generator ----
  phase_accumulator #(.D(PHASE_D)) u_phase (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (start),
    .en        (p_fire && running_q && (cfg_q.mode == MODE_TIMING_SEQ)),
    .k         (cfg_q.k),
    .phase     (phase),
    .phase_next(phase_next)
  );

  prng #(.NUM(LUT_AW)) u_prng (
    .clk     (clk),
    .rst_n   (rst_n),
    .en      (p_fire && running_q && (cfg_q.mode == MODE_RANDOM)),
    .rnd     (rnd),
    .rnd_next(rnd_next)
  );

  // Read one step ahead when a parameter is taken, so that lut_rdata always
  // belongs to the parameter currently offered.
  always_comb begin
    if (cfg_q.mode == MODE_RANDOM) begin
      lut_raddr = (p_fire && running_q) ? rnd_next : rnd;
    end else begin
      lut_raddr = (p_fire && running_q) ? phase_next[PHASE_D-1 -: LUT_AW]
                                        : phase[PHASE_D-1 -: LUT_AW];
    end
  end

  param_lut #(.AW(LUT_AW), .DW(LUT_DW)) u_lut (
    .clk  (clk),
    .we   (lut_we),
    .waddr(lut_waddr),
    .wdata(lut_wdata),
    .raddr(lut_raddr),
    .rdata(lut_rdata)
  );

  // ---- parameter output ----
  always_comb begin
    l_eff = (cfg_q.l_len < PW'(FRAME_W)) ? PW'(FRAME_W) : cfg_q.l_len;
    if (use_lut) t_raw = {1'b0, cfg_q.t_base} + (PW+1)'(lut_rdata);
    else         t_raw = {1'b0, cfg_q.t_fixed};
    if (!running_q) begin
      p.t = '0;
      p.l = PW'(FRAME_W);
    end else begin
      p.l = l_eff;
      p.t = (t_raw > {1'b0, l_eff}) ? l_eff : t_raw[PW-1:0];
    end
  end

  // ---- run control ----
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cfg_q     <= '0;
      running_q <= 1'b0;
      prime_q   <= 1'b0;
      endless_q <= 1'b0;
      remain_q  <= '0;
      done_q    <= 1'b0;
    end else if (start) begin
      cfg_q     <= cfg;
      running_q <= 1'b1;
      prime_q   <= 1'b1;
      done_q    <= 1'b0;
      endless_q <= (cfg.mode != MODE_SINGLE) && (cfg.count == '0);
      remain_q  <= (cfg.mode == MODE_SINGLE) ? CNT_W'(1) : cfg.count;
    end else if (stop) begin
      running_q <= 1'b0;
      prime_q   <= 1'b0;
    end else if (running_q) begin
      prime_q <= 1'b0;
      if (p_fire && !endless_q) begin
        remain_q <= remain_q - 1'b1;
        if (remain_q == CNT_W'(1)) begin
          running_q <= 1'b0;
          done_q    <= 1'b1;
        end
      end
    end
  end

  assign busy = running_q;
  assign done = done_q;

endmodule
