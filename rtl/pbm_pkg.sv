// pbm_pkg: types and constants shared by the programmable baseband modulator.
//
// Symbol amplitudes. Every mapper emits, per rail, one of five amplitudes
// {0, +0.707, +1, -0.707, -1}, carried as a 3-bit code. The code values follow
// the row order of the IQ mapper look-up table (0, .707, 1, -.707, -1 -> 0..4).
// Codes 5..7 are never produced and are read as amplitude 0.
//
// Mode selects. MOD_SEL picks the modulation and FLT_SEL the RRC roll-off.
// MOD_SEL=1 is pi/4 DQPSK and MOD_SEL=2 is DQPSK, as in the constellation
// captures of the prototype. QPSK=0 and OQPSK=3 are this design's choice.
// FLT_SEL 0..3 select alpha = 0.22, 0.35, 0.5, 0.9, in the order the roll-offs
// are listed.
//
// Filter taps. The pulse-shaping filter is a 25-tap symmetric RRC filter,
// h0..h24 with h(24-k) = h(k), at 4 samples per symbol (a 7-symbol window).
// Only h0..h12 are stored. The taps are the continuous RRC impulse response,
// sampled at t = (k-12)/4 symbol periods, normalised to unit energy,
// multiplied by 4096 and rounded to the nearest integer.
package pbm_pkg;

  // 3-bit symbol amplitude code (see header)
  typedef enum logic [2:0] {
    LVL_ZERO = 3'd0,
    LVL_P707 = 3'd1,
    LVL_P1   = 3'd2,
    LVL_N707 = 3'd3,
    LVL_N1   = 3'd4
  } lvl_e;

  // one mapped symbol: I and Q amplitude codes
  typedef struct packed {
    lvl_e i;
    lvl_e q;
  } iq_sym_t;

  typedef enum logic [1:0] {
    MOD_QPSK     = 2'd0,
    MOD_PI4DQPSK = 2'd1,
    MOD_DQPSK    = 2'd2,
    MOD_OQPSK    = 2'd3
  } mod_sel_e;

  typedef enum logic [1:0] {
    FLT_A022 = 2'd0,
    FLT_A035 = 2'd1,
    FLT_A050 = 2'd2,
    FLT_A090 = 2'd3
  } flt_sel_e;

  localparam int unsigned SR_DEPTH    = 7;   // symbols held by the upsampler
  localparam int unsigned NUM_FILTERS = 4;   // roll-off choices
  localparam int unsigned NUM_UNIQ    = 13;  // h0..h12 of the 25 taps (symmetric)
  localparam int          COEF_SCALE  = 4096;
  localparam int          R707        = 2896; // round(4096 / sqrt(2))
  localparam int unsigned DATA_W      = 16;  // filter / carrier sample width

  // h0..h12 per roll-off, scaled by 4096
  localparam int RRC_COEF [NUM_FILTERS][NUM_UNIQ] = '{
    '{ -78,  31, 158, 206, 102, -134, -368, -410, -118, 506, 1282, 1925, 2174},  // 0.22
    '{ -52, -30,  52, 134, 117,  -45, -277, -386, -173, 424, 1245, 1961, 2244},  // 0.35
    '{   6, -34, -31,  32,  87,   32, -154, -321, -217, 321, 1185, 1996, 2328},  // 0.50
    '{ -13,  17,  18, -27, -41,   27,   67,  -57, -203,  55,  944, 2046, 2552}   // 0.90
  };

  // partial product coefficient * amplitude; the 0.707 product is
  // (c * 2896 + 2048) >>> 12, i.e. rounded half up at the 1/4096 scale
  function automatic int lvl_times(int c, logic [2:0] code);
    int p;
    p = (c * R707 + COEF_SCALE / 2) >>> $clog2(COEF_SCALE);
    case (code)
      LVL_P707: return p;
      LVL_P1:   return c;
      LVL_N707: return -p;
      LVL_N1:   return -c;
      default:  return 0;
    endcase
  endfunction

endpackage
