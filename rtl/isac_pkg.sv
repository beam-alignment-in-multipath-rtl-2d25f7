// isac_pkg: shared types, constants and small functions of the ISAC-MAB beam
// alignment accelerator.
//
// Word formats: radar ADC samples are complex 12-bit I/Q, range-spectrum values
// are complex 16-bit I/Q (the 16-bit inverse-transform word length of the
// matched filter), and all bandit quantities (rewards, means, UCB factors) are
// unsigned 24-bit Q8.16, the 24-bit word length of the bandit accelerator.
//
// golay_neg() returns the sign of chip i of the radar waveform. The 512-chip
// sequence is built as [a256, b256] from a Golay complementary pair; with the
// recursive construction a(m+1) = [a(m), b(m)], b(m+1) = [a(m), -b(m)] that
// concatenation is itself the length-512 sequence a9, whose chip i is negative
// when the number of adjacent "11" bit pairs in i is odd (Rudin-Shapiro form).
// Packet p sends a9 or its complementary partner b9 according to the
// Prouhet-Thue-Morse bit of p, a common Doppler-resilient ordering of Golay
// pulses. The particular pair and the ordering are this design's choice.
package isac_pkg;

  localparam int SAMP_W = 12;   // ADC I/Q width
  localparam int Y_W    = 16;   // range-spectrum I/Q width
  localparam int UQ_W   = 24;   // bandit word length, Q8.16
  localparam int UQ_FRAC = 16;

  typedef struct packed {
    logic signed [SAMP_W-1:0] re;
    logic signed [SAMP_W-1:0] im;
  } samp_t;

  typedef struct packed {
    logic signed [Y_W-1:0] re;
    logic signed [Y_W-1:0] im;
  } yval_t;

  // Phases of one beam-alignment epoch (Algorithm 2 and Fig. 5(b).i)
  typedef enum logic [2:0] {
    PH_IDLE   = 3'd0,
    PH_RADAR  = 3'd1,  // radar search: waveform sweep + RSP
    PH_RR     = 3'd2,  // round-robin over the K~ candidate beams
    PH_REGRET = 3'd3   // regret minimization with UCB
  } phase_e;

  // Sign of chip i of the 2^m-chip sequence; sel=0 gives a(m), sel=1 gives b(m).
  function automatic logic golay_neg(input logic [15:0] i, input int m, input logic sel);
    logic [15:0] pairs;
    logic        top;
    pairs = i & (i >> 1);
    top   = (m > 0) ? i[m-1] : 1'b0;
    return (^pairs) ^ (sel & top);
  endfunction

  // Prouhet-Thue-Morse bit of packet index p
  function automatic logic ptm_bit(input logic [15:0] p);
    return ^p;
  endfunction

endpackage
