// frame_encoder: real-time encoder that turns timing parameters into 32-bit
// data frames for the serializer. A signal of interval T and length L is T
// 1s followed by L-T 0s on the line; consecutive signals follow each other
// without gaps. Two registers carry the state from frame to frame:
// L_temp, the bits of the current signal still to be sent, and T_temp, the
// 1s among them still to be sent. Each frame is the OR of two parts:
//   Part1 (high bits) finishes or continues the current signal;
//   Part2 (low bits) starts the next signal when the current one ends
//         inside the frame.
// The three cases follow the paper's pseudocode exactly:
//   L_temp == W : Part1 = T_temp 1s then 0s, Part2 = 0, take T(i+1);
//   L_temp >  W : Part1 = min(T_temp, W) 1s, Part2 = 0, L_temp -= W;
//   L_temp <  W : Part1 = T_temp 1s within its L_temp bits; take T(i+1);
//                 Part2 = L_temp 0s, then up to W-L_temp 1s of T(i+1);
//                 L_temp = L + L_temp - W.
// Bit W-1 is the first bit on the line (Part1 holds the high bits). The
// encoder needs L >= W for every parameter (the generator guarantees it).
// Interface and timing: one frame per clock. A parameter is taken when
// p_valid && p_ready; p_ready is high only in cycles whose frame closes a
// signal. The frame appears on 'frame' one clock after it is built and is
// held while f_valid && !f_ready. At reset L_temp = W and T_temp = 0, so the
// first frame is all zeros and takes the first parameter. Reset values and
// handshakes are this design's choices.
module frame_encoder
  import dtc_pkg::*;
#(
  parameter int unsigned W = FRAME_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          p_valid,
  output logic          p_ready,
  input  timing_param_t p,
  output logic          f_valid,
  input  logic          f_ready,
  output logic [W-1:0]  frame,
  output logic [1:0]    frame_case  // 1: L_temp==W, 2: L_temp>W, 3: L_temp<W
);

  localparam logic [PW-1:0] WP = PW'(W);

  logic [PW-1:0] t_temp_q, l_temp_q;
  logic [PW-1:0] t_temp_d, l_temp_d;
  logic [W-1:0]  part1, part2;
  logic [1:0]    case_d;
  logic          needs_param, can_load, go;
  logic [PW-1:0] rem;

  // W-bit word whose k highest bits are 1.
  function automatic logic [W-1:0] top_ones(logic [PW-1:0] k);
    if (k >= WP) return '1;
    return ~({W{1'b1}} >> k);
  endfunction

  always_comb begin
    part1    = '0;
    part2    = '0;
    t_temp_d = t_temp_q;
    l_temp_d = l_temp_q;
    rem      = WP - l_temp_q;
    case_d   = 2'd0;
    if (l_temp_q == WP) begin
      case_d   = 2'd1;
      part1    = top_ones(t_temp_q);
      part2    = '0;
      t_temp_d = p.t;
      l_temp_d = p.l;
    end else if (l_temp_q > WP) begin
      case_d = 2'd2;
      if (t_temp_q >= WP) begin
        part1    = '1;
        t_temp_d = t_temp_q - WP;
      end else begin
        part1    = top_ones(t_temp_q);
        t_temp_d = '0;
      end
      part2    = '0;
      l_temp_d = l_temp_q - WP;
    end else begin
      case_d = 2'd3;
      part1  = top_ones(t_temp_q);
      if (p.t > rem) begin
        part2    = ~top_ones(l_temp_q);
        t_temp_d = p.t - rem;
      end else begin
        part2    = top_ones(l_temp_q + p.t) & ~top_ones(l_temp_q);
        t_temp_d = '0;
      end
      l_temp_d = p.l + l_temp_q - WP;
    end
  end

  assign needs_param = (l_temp_q <= WP);
  assign can_load    = !f_valid || f_ready;
  assign go          = can_load && (!needs_param || p_valid);
  assign p_ready     = can_load && needs_param;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      t_temp_q   <= '0;
      l_temp_q   <= WP;
      f_valid    <= 1'b0;
      frame      <= '0;
      frame_case <= 2'd0;
    end else if (can_load) begin
      f_valid <= go;
      if (go) begin
        frame      <= part1 | part2;
        frame_case <= case_d;
        t_temp_q   <= t_temp_d;
        l_temp_q   <= l_temp_d;
      end
    end
  end

  // A held frame must not change until it is accepted.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (f_valid && !f_ready) |=> ($stable(frame) && f_valid);
  endproperty
  a_hold: assert property (p_hold);

  // Every parameter taken must satisfy L >= W and T <= L (one signal end
  // per frame at most).
  a_param_ok: assert property (@(posedge clk) disable iff (!rst_n)
                               (p_valid && p_ready) |-> (p.l >= WP && p.t <= p.l));

endmodule
