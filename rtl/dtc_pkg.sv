// dtc_pkg: types and constants shared by the transceiver-based digital-to-time
// converter. A timing signal is described by two numbers counted in line bits
// (100 ps each at 10 Gb/s): its interval T, the number of leading 1s, and its
// length L, the total number of bits (1s then 0s) before the next signal
// starts. The 32-bit frame width and the 4k x 12 lookup table follow the
// paper; the 19-bit parameter width (enough for 40 us) and the LFSR tap sets
// are this design's choices.
package dtc_pkg;

  // Data frame width W (bits sent per fabric clock).
  localparam int unsigned FRAME_W = 32;
  // Width of T and L: 2^19-1 bits = 52.4 us at 100 ps per bit.
  localparam int unsigned PW = 19;
  // Parameter lookup table: 4k entries of 12 bits.
  localparam int unsigned LUT_AW = 12;
  localparam int unsigned LUT_DW = 12;
  // Phase accumulator resolution D.
  localparam int unsigned PHASE_D = 32;
  // Sequence counter width: up to 1000 fixed intervals.
  localparam int unsigned CNT_W = 10;
  // Number of LFSRs in the pseudo-random number generator.
  localparam int unsigned NUM_LFSR = 12;

  typedef enum logic [1:0] {
    MODE_SINGLE     = 2'd0,  // one timing signal
    MODE_FIXED_SEQ  = 2'd1,  // 'count' signals with the same interval
    MODE_TIMING_SEQ = 2'd2,  // intervals read from the table via the phase accumulator
    MODE_RANDOM     = 2'd3   // intervals read from the table at pseudo-random addresses
  } mode_e;

  // One timing parameter as handed from the generator to the encoder.
  typedef struct packed {
    logic [PW-1:0] t;  // interval: number of 1s
    logic [PW-1:0] l;  // length: 1s plus 0s
  } timing_param_t;

  // Host configuration, sampled on 'start'.
  typedef struct packed {
    mode_e              mode;
    logic [PW-1:0]      t_fixed;  // interval for single / fixed-sequence modes
    logic [PW-1:0]      l_len;    // length of every signal
    logic [CNT_W-1:0]   count;    // signals to send, 0 = until stop (single mode: always 1)
    logic [PHASE_D-1:0] k;        // frequency control word
    logic [PW-1:0]      t_base;   // interval added to each table entry
  } dtc_cfg_t;

  // Lengths of the twelve LFSRs (n = 9 .. 20).
  function automatic int unsigned lfsr_len(int unsigned idx);
    return 9 + idx;
  endfunction

  // Feedback coefficients B_n..B_1 of each LFSR, bit i-1 holding B_i. The
  // new stage value is A_{n+1} = XOR of A_i*B_i; the recurrence polynomial
  // x^n + sum B_i x^(i-1) is a primitive polynomial of degree n, so every
  // LFSR has the maximal period 2^n - 1.
  function automatic logic [31:0] lfsr_taps(int unsigned n);
    case (n)
      9:       return 32'h0000_0021;  // x^9  + x^5 + 1
      10:      return 32'h0000_0081;  // x^10 + x^7 + 1
      11:      return 32'h0000_0201;  // x^11 + x^9 + 1
      12:      return 32'h0000_0053;  // x^12 + x^6 + x^4 + x + 1
      13:      return 32'h0000_001B;  // x^13 + x^4 + x^3 + x + 1
      14:      return 32'h0000_002B;  // x^14 + x^5 + x^3 + x + 1
      15:      return 32'h0000_4001;  // x^15 + x^14 + 1
      16:      return 32'h0000_A011;  // x^16 + x^15 + x^13 + x^4 + 1
      17:      return 32'h0000_4001;  // x^17 + x^14 + 1
      18:      return 32'h0000_0801;  // x^18 + x^11 + 1
      19:      return 32'h0000_0047;  // x^19 + x^6 + x^2 + x + 1
      20:      return 32'h0002_0001;  // x^20 + x^17 + 1
      default: return 32'h0000_0003;
    endcase
  endfunction

endpackage
